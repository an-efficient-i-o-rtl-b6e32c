// tb_erase_ram -- self-checking test of the partitioned erase RAM.
//
// A reduced instance (32-bit bus, 4 DPMs, 16 rows) is loaded with a stream of
// parts at eaddr 0, 1, 2, ...; then every row is read and must be the 4
// consecutive parts r*4 .. r*4+3 with part r*4 in the lowest bits. Random
// writes and reads follow, compared with a reference, including reads of a
// row in the clock one of its parts is written (old data expected).
module tb_erase_ram;
  localparam int BW = 32, P = 4, R = 16;

  logic clk = 1'b0;
  logic ewe;
  logic [5:0] eaddr;
  logic [BW-1:0] edata;
  logic [3:0] raddr;
  logic [P*BW-1:0] rdata;
  int checks = 0, failures = 0;
  logic [BW-1:0] parts [R*P];

  erase_ram #(.BUS_W(BW), .PARTS(P), .ROWS(R)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [P*BW-1:0] row_ref(int r);
    logic [P*BW-1:0] v;
    for (int p = 0; p < P; p++) v[p*BW +: BW] = parts[r*P + p];
    return v;
  endfunction

  initial begin
    ewe = 0; eaddr = 0; edata = 0; raddr = 0;
    for (int i = 0; i < R*P; i++) begin
      parts[i] = $urandom;
      @(negedge clk);
      ewe = 1; eaddr = 6'(i); edata = parts[i];
    end
    @(negedge clk); ewe = 0;
    for (int r = 0; r < R; r++) begin
      @(negedge clk); raddr = 4'(r);
      @(posedge clk); #1;
      checks++;
      if (rdata !== row_ref(r)) begin failures++; $display("row %0d: %h want %h", r, rdata, row_ref(r)); end
    end
    for (int n = 0; n < 2000; n++) begin
      automatic logic [P*BW-1:0] e;
      @(negedge clk);
      ewe = $urandom_range(1)[0];
      eaddr = 6'($urandom_range(R*P - 1));
      edata = $urandom;
      raddr = (n % 3 == 0) ? 4'(eaddr / P) : 4'($urandom_range(R - 1));
      e = row_ref(int'(raddr));
      @(posedge clk); #1;
      if (ewe) parts[eaddr] = edata;
      checks++;
      if (rdata !== e) begin failures++; $display("random read row %0d mismatch", raddr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

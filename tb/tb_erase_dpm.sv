// tb_erase_dpm -- self-checking test of one erase-RAM dual-port memory at
// its full size (256 x 256 bits): random writes and reads against a reference
// array, the one-clock read latency, and old data on a read of the address
// written in the same clock.
module tb_erase_dpm;
  localparam int W = 256, D = 256;

  logic clk = 1'b0;
  logic we;
  logic [7:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  int checks = 0, failures = 0;
  logic [W-1:0] ref_mem [D];

  erase_dpm dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int i = 0; i < W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < D; i++) ref_mem[i] = '0;
    for (int n = 0; n < 3000; n++) begin
      automatic logic [W-1:0] expect_q;
      @(negedge clk);
      we = $urandom_range(1)[0];
      waddr = 8'($urandom_range(D - 1));
      raddr = (n % 4 == 0) ? waddr : 8'($urandom_range(D - 1));
      wdata = rnd();
      expect_q = ref_mem[raddr];        // old data even if written now
      @(posedge clk); #1;
      if (we) ref_mem[waddr] = wdata;
      checks++;
      if (rdata !== expect_q) begin failures++; $display("read %0d mismatch", raddr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

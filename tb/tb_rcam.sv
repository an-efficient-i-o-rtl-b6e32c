// tb_rcam -- self-checking test of the CAM array (encoder + RCBs).
//
// A small array of 4 RCBs x 4 RCUs x 4 words (64 words of 8 bits) is filled
// row by row, then rows are rewritten at random (erase with the old row,
// write the new one). Every search is checked against a reference copy: word
// n of the stream is row n/4, slot n%4, and must appear at cmatch[n].
module tb_rcam;
  localparam int DW = 8, WORDS = 4, K = 4, NRCB = 4;
  localparam int ROWS = NRCB * WORDS, NWORD = ROWS * K;

  logic clk = 1'b0;
  logic cwe, csc;
  logic [3:0] caddr;
  logic [K*DW-1:0] cdata;
  logic [DW-1:0] ckey;
  logic [NWORD-1:0] cmatch;
  int checks = 0, failures = 0;

  logic [7:0] words [NWORD];

  rcam #(.DATA_W(DW), .WORDS(WORDS), .K(K), .N_RCB(NRCB), .SEG(1)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [K*DW-1:0] row_of(int r);
    logic [K*DW-1:0] d;
    for (int u = 0; u < K; u++) d[u*8 +: 8] = words[r*K + u];
    return d;
  endfunction

  task automatic row_op(int r, logic [K*DW-1:0] d, logic s);
    @(negedge clk);
    cwe = 1; csc = s; caddr = 4'(r); cdata = d;
    @(negedge clk);
    cwe = 0;
  endtask

  task automatic search(logic [7:0] k);
    logic [NWORD-1:0] e;
    for (int n = 0; n < NWORD; n++) e[n] = (words[n] == k);
    @(negedge clk);
    ckey = k;
    @(posedge clk); #1;
    checks++;
    if (cmatch !== e) begin failures++; $display("key %h got %h want %h", k, cmatch, e); end
  endtask

  initial begin
    cwe = 0; csc = 0; caddr = 0; cdata = 0; ckey = 0;
    // fresh array: empty
    search(8'h00);
    // fill every row; word n = n, so each key hits exactly one position
    for (int n = 0; n < NWORD; n++) words[n] = 8'(n);
    for (int r = 0; r < ROWS; r++) row_op(r, row_of(r), 1'b1);
    for (int k = 0; k < NWORD + 4; k++) search(8'(k));
    // random rewrites
    for (int i = 0; i < 300; i++) begin
      automatic int r = $urandom_range(ROWS - 1);
      row_op(r, row_of(r), 1'b0);
      for (int u = 0; u < K; u++) words[r*K + u] = 8'($urandom_range(15));
      row_op(r, row_of(r), 1'b1);
      search(8'($urandom_range(15)));
      search(words[$urandom_range(NWORD - 1)]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

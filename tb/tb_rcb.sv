// tb_rcb -- self-checking test of a sub-RCAM block.
//
// Two small blocks of 8 RCUs x 4 words are tested side by side: one with
// 8-bit words (SEG = 1) and one with 16-bit words spread over two RCUs and
// ANDed (SEG = 2). Rows are erased with their old contents and rewritten with
// random words (often repeating a value so that several words match); each
// search is compared with a match vector built from a reference copy in
// bit-sliced order (bit j*words_per_row + w is word w at address j).
module tb_rcb;
  localparam int DW = 8, WORDS = 4, K = 8;
  localparam int NW1 = K, NW2 = K / 2;

  logic clk = 1'b0;
  logic we, sc;
  logic [1:0] waddr;
  logic [K*DW-1:0] wdata;
  logic [DW-1:0]   key1;
  logic [2*DW-1:0] key2;
  logic [WORDS*NW1-1:0] match1;
  logic [WORDS*NW2-1:0] match2;
  int checks = 0, failures = 0;

  logic [K*DW-1:0] rows [WORDS];    // what each address holds (same for both)

  rcb #(.DATA_W(DW), .WORDS(WORDS), .K(K), .SEG(1)) dut1 (
    .clk, .we, .sc, .waddr, .wdata, .key(key1), .match(match1));
  rcb #(.DATA_W(DW), .WORDS(WORDS), .K(K), .SEG(2)) dut2 (
    .clk, .we, .sc, .waddr, .wdata, .key(key2), .match(match2));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic row_op(int a, logic [K*DW-1:0] d, logic s);
    @(negedge clk);
    we = 1; sc = s; waddr = 2'(a); wdata = d;
    @(negedge clk);
    we = 0;
  endtask

  task automatic search(logic [15:0] k);
    logic [WORDS*NW1-1:0] e1;
    logic [WORDS*NW2-1:0] e2;
    for (int j = 0; j < WORDS; j++) begin
      for (int w = 0; w < NW1; w++) e1[j*NW1 + w] = (rows[j][w*8 +: 8] == k[7:0]);
      for (int w = 0; w < NW2; w++) e2[j*NW2 + w] = (rows[j][w*16 +: 16] == k);
    end
    @(negedge clk);
    key1 = k[7:0]; key2 = k;
    @(posedge clk); #1;
    checks += 2;
    if (match1 !== e1) begin failures++; $display("SEG1 key %h got %h want %h", k, match1, e1); end
    if (match2 !== e2) begin failures++; $display("SEG2 key %h got %h want %h", k, match2, e2); end
  endtask

  initial begin
    we = 0; sc = 0; waddr = 0; wdata = 0; key1 = 0; key2 = 0;
    // bring the reference and the block to a known state: write zeros
    for (int j = 0; j < WORDS; j++) begin rows[j] = '0; row_op(j, '0, 1'b1); end
    for (int n = 0; n < 200; n++) begin
      automatic int a = $urandom_range(WORDS - 1);
      automatic logic [K*DW-1:0] d;
      for (int w = 0; w < K / 2; w++)
        d[w*16 +: 16] = ($urandom_range(3) == 0) ? 16'h1234 : 16'($urandom_range(8)) * 16'h0101;
      row_op(a, rows[a], 1'b0);     // erase old row
      row_op(a, d, 1'b1);           // write new row
      rows[a] = d;
      search(16'h1234);
      search(d[15:0]);
      search(16'($urandom_range(8)) * 16'h0101);
      search(16'h3412);             // bytes present, wrong order: SEG2 must not match
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_rcwe_wide -- full-size test of the wide-word configurations.
//
// The same 65,536-byte update stream (2,048 parts of 256 bits) is loaded into
// three full-size instances built with 16-, 32- and 64-bit words:
// 32,768 x 16, 16,384 x 32 and 8,192 x 64 bits, all in the same 2,048 RCUs.
// The stream uses few byte values, so many bytes of a key match while the
// whole word does not; the AND of the RCUs of each word must reject those.
// Keys taken from stored words, with one byte changed and random keys are
// searched, and every match vector is compared with a reference copy. Each
// update must take 2,048 + 2 clocks.
module tb_rcwe_wide;
  localparam int BW = 256, NP = 2048, NB = 65536;

  logic clk = 1'b0, rst_n;
  logic ewe;
  logic [10:0] eaddr;
  logic [BW-1:0] edata;
  logic [15:0] key16;
  logic [31:0] key32;
  logic [63:0] key64;
  logic [NB/2-1:0] m16;
  logic [NB/4-1:0] m32;
  logic [NB/8-1:0] m64;
  logic busy16, busy32, busy64;
  int checks = 0, failures = 0;
  int n_partial = 0;           // words with some but not all bytes matching

  logic [7:0] stream [NB];

  rcwe64k8 #(.WORD_W(16)) dut16 (.clk, .rst_n, .ewe, .eaddr, .edata, .ckey(key16), .cmatch(m16), .busy(busy16));
  rcwe64k8 #(.WORD_W(32)) dut32 (.clk, .rst_n, .ewe, .eaddr, .edata, .ckey(key32), .cmatch(m32), .busy(busy32));
  rcwe64k8 #(.WORD_W(64)) dut64 (.clk, .rst_n, .ewe, .eaddr, .edata, .ckey(key64), .cmatch(m64), .busy(busy64));

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // word n of width 8*s bytes, byte 0 lowest
  function automatic logic [63:0] word_of(int n, int s);
    logic [63:0] v = '0;
    for (int b = 0; b < s; b++) v[b*8 +: 8] = stream[n*s + b];
    return v;
  endfunction

  task automatic search(logic [63:0] k);
    int bad16 = 0, bad32 = 0, bad64 = 0;
    @(negedge clk);
    key16 = k[15:0]; key32 = k[31:0]; key64 = k;
    @(posedge clk); #1;
    for (int n = 0; n < NB/2; n++) if (m16[n] !== (word_of(n, 2) == {48'b0, k[15:0]})) bad16++;
    for (int n = 0; n < NB/4; n++) if (m32[n] !== (word_of(n, 4) == {32'b0, k[31:0]})) bad32++;
    for (int n = 0; n < NB/8; n++) begin
      logic [63:0] w = word_of(n, 8);
      if (m64[n] !== (w == k)) bad64++;
      if (w != k && (w[7:0] == k[7:0] || w[63:56] == k[63:56])) n_partial++;
    end
    checks += 3;
    if (bad16 != 0) begin failures++; $display("16-bit key %h: %0d bits wrong", k[15:0], bad16); end
    if (bad32 != 0) begin failures++; $display("32-bit key %h: %0d bits wrong", k[31:0], bad32); end
    if (bad64 != 0) begin failures++; $display("64-bit key %h: %0d bits wrong", k, bad64); end
  endtask

  initial begin
    int t = 0;
    rst_n = 0; ewe = 0; eaddr = 0; edata = 0; key16 = 0; key32 = 0; key64 = 0;
    for (int n = 0; n < NB; n++) stream[n] = 8'($urandom_range(3));
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < NP; i++) begin
      ewe = 1; eaddr = 11'(i);
      for (int b = 0; b < BW / 8; b++) edata[b*8 +: 8] = stream[i*BW/8 + b];
      @(negedge clk);
      t++;
    end
    ewe = 0;
    while (busy64) begin @(negedge clk); t++; end
    checks++;
    if (t != NP + 2 || busy16 || busy32) begin failures++; $display("update took %0d clocks", t); end
    search(word_of(0, 8));
    search(word_of(8191, 8));
    search(word_of(4000, 8) ^ 64'h0100_0000_0000_0000);
    search(word_of(17, 8) ^ 64'h0000_0000_0000_0002);
    search({$urandom, $urandom});
    checks++;
    if (n_partial == 0) begin failures++; $display("no partially matching word seen"); end
    $display("partially matching 64-bit words rejected: %0d", n_partial);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

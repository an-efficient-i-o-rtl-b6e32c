// tb_rcwe64k8_full -- full-size test of the 65,536 x 8-bit CAM with erase RAM.
//
// The top is used with its default parameters: a 256-bit stream, eight
// 256 x 256-bit DPMs, 8 RCBs x 256 RCUs. Two complete updates of 2,048 parts
// each are streamed without gaps; the first loads random bytes, the second
// only 16 distinct values, so that it must erase the whole first load and
// every key matches thousands of words. Each update must finish in
// 2,048 + 2 clocks from its first part (the CAM write stage ends with the
// stream). After each update a set of keys is searched and the 65,536-bit
// cmatch is compared with a reference copy of the stream.
module tb_rcwe64k8_full;
  localparam int BW = 256, NP = 2048, NW = 65536;

  logic clk = 1'b0, rst_n;
  logic ewe;
  logic [10:0] eaddr;
  logic [BW-1:0] edata;
  logic [7:0] ckey;
  logic [NW-1:0] cmatch;
  logic busy;
  int checks = 0, failures = 0;

  logic [7:0] stream [NW];

  rcwe64k8 dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic search(logic [7:0] k);
    int bad = 0, hits = 0;
    @(negedge clk);
    ckey = k;
    @(posedge clk); #1;
    for (int n = 0; n < NW; n++) begin
      if (cmatch[n] !== (stream[n] == k)) bad++;
      if (stream[n] == k) hits++;
    end
    checks++;
    if (bad != 0) begin failures++; $display("key %h: %0d of 65536 match bits wrong", k, bad); end
    else $display("key %h: %0d matching words, all correct", k, hits);
  endtask

  task automatic update(int range);
    int t = 0;
    for (int n = 0; n < NW; n++) stream[n] = 8'($urandom_range(range));
    @(negedge clk);
    for (int i = 0; i < NP; i++) begin
      ewe = 1; eaddr = 11'(i);
      for (int b = 0; b < BW / 8; b++) edata[b*8 +: 8] = stream[i*BW/8 + b];
      @(negedge clk);
      t++;
    end
    ewe = 0;
    while (busy) begin @(negedge clk); t++; end
    checks++;
    if (t != NP + 2) begin failures++; $display("update took %0d clocks, want %0d", t, NP + 2); end
    else $display("update of %0d parts took %0d clocks", NP, t);
  endtask

  initial begin
    rst_n = 0; ewe = 0; eaddr = 0; edata = 0; ckey = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    update(255);
    search(stream[0]);
    search(stream[NW - 1]);
    search(stream[12345]);
    search(8'h5a);
    update(15);
    search(8'h00);
    search(8'h0f);
    search(stream[777]);
    search(8'h10);          // present in the first load only: must be gone
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_rcu -- self-checking test of one RAM-based CAM unit (32 x 8 bits).
//
// Keeps a reference list of the value held by each of the 32 words (or none),
// updates words with the erase-then-write sequence (csc = 0 on the old value,
// csc = 1 on the new one), and after every update searches a stored key, a
// random key and every value once at the end, comparing the 32-bit match
// vector with one built from the reference list. Also checks the one-clock
// search latency and that a search in the clock of a write sees the old row.
module tb_rcu;
  localparam int DW = 8;
  localparam int WORDS = 32;

  logic clk = 1'b0;
  logic we, sc;
  logic [DW-1:0] wdata, key;
  logic [4:0] waddr;
  logic [WORDS-1:0] match;
  int checks = 0, failures = 0;

  int held [WORDS];   // value held by each word, -1 = none

  rcu #(.DATA_W(DW), .WORDS(WORDS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [WORDS-1:0] expect_match(int k);
    logic [WORDS-1:0] m = '0;
    for (int i = 0; i < WORDS; i++) m[i] = (held[i] == k);
    return m;
  endfunction

  task automatic cam_write(int a, int v, logic s);
    @(negedge clk);
    we = 1'b1; sc = s; waddr = 5'(a); wdata = DW'(v);
    @(negedge clk);
    we = 1'b0;
  endtask

  task automatic search(int k);
    @(negedge clk);
    key = DW'(k);
    @(posedge clk); #1;
    checks++;
    if (match !== expect_match(k)) begin
      failures++;
      $display("search %0d: got %h want %h", k, match, expect_match(k));
    end
  endtask

  initial begin
    we = 0; sc = 0; wdata = 0; waddr = 0; key = 0;
    for (int i = 0; i < WORDS; i++) held[i] = -1;
    // empty CAM: nothing matches
    for (int k = 0; k < 256; k += 17) search(k);
    // fill and rewrite words at random
    for (int n = 0; n < 400; n++) begin
      automatic int a = $urandom_range(WORDS - 1);
      automatic int v = (n % 5 == 0) ? held[$urandom_range(WORDS - 1)] : int'($urandom_range(255));
      if (v < 0) v = int'($urandom_range(255));
      if (held[a] >= 0) cam_write(a, held[a], 1'b0);   // erase stage
      cam_write(a, v, 1'b1);                            // write stage
      held[a] = v;
      search(v);
      search(int'($urandom_range(255)));
    end
    for (int k = 0; k < 256; k++) search(k);
    // read during write: the search in the write clock returns the old row
    begin
      automatic int a = 3;
      automatic int v = 77;
      if (held[a] >= 0) cam_write(a, held[a], 1'b0);
      cam_write(a, v, 1'b1);
      held[a] = v;
      @(negedge clk);
      we = 1; sc = 0; waddr = 5'(a); wdata = DW'(v); key = DW'(v);
      @(posedge clk); #1;
      checks++;
      if (match[a] !== 1'b1) begin failures++; $display("read-during-write not old data"); end
      @(negedge clk); we = 0;
      held[a] = -1;
      @(posedge clk); #1;
      checks++;
      if (match !== expect_match(v)) begin failures++; $display("erase not seen"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

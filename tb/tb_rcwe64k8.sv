// tb_rcwe64k8 -- end-to-end test of the CAM with erase RAM, reduced size.
//
// Two reduced instances (32-bit bus, 4 DPMs, 2 RCBs of 16 RCUs of 4 words)
// share one update stream: one stores 128 words of 8 bits, the other 64 words
// of 16 bits (two RCUs per word, ANDed). Four updates are streamed: the first
// unbroken, the others with random gaps in ewe and few distinct values, so
// that keys match several words and values present before an update vanish
// after it. After each update every 8-bit key and a set of 16-bit keys are
// searched and each cmatch is compared with a reference copy of the stream.
//
// Counted mechanisms (each must occur): erase-stage rows, write-stage rows,
// writes held back waiting for their row, gaps in the stream, matches removed
// by an update, multi-word matches, and 16-bit words rejected by the AND of
// their two RCUs although one byte matched. The unbroken update must finish in
// ROWS*PARTS + 2 clocks from the first part.
module tb_rcwe64k8;
  localparam int BW = 32, P = 4, RW = 4, NRCB = 2;
  localparam int ROWS = NRCB * RW, NP = ROWS * P;
  localparam int NW8 = NP * BW / 8, NW16 = NP * BW / 16;

  logic clk = 1'b0, rst_n;
  logic ewe;
  logic [4:0] eaddr;
  logic [BW-1:0] edata;
  logic [7:0] ckey8;
  logic [15:0] ckey16;
  logic [NW8-1:0] cmatch8;
  logic [NW16-1:0] cmatch16;
  logic busy8, busy16;
  int checks = 0, failures = 0;

  logic [7:0] stream [NW8];   // bytes of the current contents, stream order

  rcwe64k8 #(.BUS_W(BW), .PARTS(P), .RCU_WORDS(RW), .N_RCB(NRCB), .WORD_W(8)) dut8 (
    .clk, .rst_n, .ewe, .eaddr, .edata, .ckey(ckey8), .cmatch(cmatch8), .busy(busy8));
  rcwe64k8 #(.BUS_W(BW), .PARTS(P), .RCU_WORDS(RW), .N_RCB(NRCB), .WORD_W(16)) dut16 (
    .clk, .rst_n, .ewe, .eaddr, .edata, .ckey(ckey16), .cmatch(cmatch16), .busy(busy16));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_erase = 0, n_write = 0, n_stall = 0, n_gap = 0;
  int n_removed = 0, n_multi = 0, n_and_reject = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (dut8.cwe && !dut8.csc) n_erase++;
      if (dut8.cwe &&  dut8.csc) n_write++;
      if (dut8.u_control.state == rcam_pkg::ST_WRITE && !dut8.u_control.row_ready) n_stall++;
    end
  end

  function automatic logic [NW8-1:0] exp8(logic [7:0] k);
    logic [NW8-1:0] e;
    for (int n = 0; n < NW8; n++) e[n] = (stream[n] == k);
    return e;
  endfunction

  function automatic logic [NW16-1:0] exp16(logic [15:0] k);
    logic [NW16-1:0] e;
    for (int n = 0; n < NW16; n++) e[n] = ({stream[2*n+1], stream[2*n]} == k);
    return e;
  endfunction

  task automatic search8(logic [7:0] k, output logic [NW8-1:0] got);
    @(negedge clk);
    ckey8 = k;
    @(posedge clk); #1;
    got = cmatch8;
    checks++;
    if (cmatch8 !== exp8(k)) begin failures++; $display("8-bit key %h: %h want %h", k, cmatch8, exp8(k)); end
    if ($countones(cmatch8) > 1) n_multi++;
  endtask

  task automatic search16(logic [15:0] k);
    @(negedge clk);
    ckey16 = k;
    @(posedge clk); #1;
    checks++;
    if (cmatch16 !== exp16(k)) begin failures++; $display("16-bit key %h: %h want %h", k, cmatch16, exp16(k)); end
    for (int n = 0; n < NW16; n++)
      if (!cmatch16[n] && (stream[2*n] == k[7:0] || stream[2*n+1] == k[15:8])) n_and_reject++;
  endtask

  // stream one update; returns clocks from the first part until busy drops
  task automatic update(bit gaps, int range, output int latency);
    int i = 0;
    int t = 0;
    for (int n = 0; n < NW8; n++) stream[n] = 8'($urandom_range(range));
    @(negedge clk);
    while (i < NP) begin
      if (gaps && i > 0 && $urandom_range(3) == 0) begin
        ewe = 0; n_gap++;
      end else begin
        ewe = 1; eaddr = 5'(i);
        for (int b = 0; b < BW / 8; b++) edata[b*8 +: 8] = stream[i*BW/8 + b];
        i++;
      end
      @(negedge clk);
      t++;
    end
    ewe = 0;
    while (busy8) begin @(negedge clk); t++; end
    latency = t;
    checks++;
    if (busy16 !== busy8) begin failures++; $display("the two instances disagree on busy"); end
  endtask

  initial begin
    logic [NW8-1:0] prev_hit [256];
    logic [NW8-1:0] got;
    int lat;
    rst_n = 0; ewe = 0; eaddr = 0; edata = 0; ckey8 = 0; ckey16 = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 256; k++) prev_hit[k] = '0;
    for (int u = 0; u < 4; u++) begin
      update(u != 0, (u == 0) ? 255 : 7 + 8 * u, lat);
      if (u == 0) begin
        checks++;
        if (lat != NP + 2) begin failures++; $display("unbroken update took %0d clocks, want %0d", lat, NP + 2); end
        $display("unbroken update of %0d parts: %0d clocks", NP, lat);
      end
      for (int k = 0; k < 256; k++) begin
        search8(8'(k), got);
        for (int n = 0; n < NW8; n++) if (prev_hit[k][n] && !got[n]) n_removed++;
        prev_hit[k] = got;
      end
      for (int n = 0; n < NW16; n++) search16({stream[2*n+1], stream[2*n]});
      for (int n = 0; n < 16; n++) search16(16'($urandom));
      for (int n = 0; n < 8; n++) search16({stream[2*n], stream[2*n+1]});
    end
    $display("erase rows %0d, write rows %0d, write stalls %0d, stream gaps %0d",
             n_erase, n_write, n_stall, n_gap);
    $display("matches removed by updates %0d, multi-word matches %0d, 16-bit AND rejects %0d",
             n_removed, n_multi, n_and_reject);
    checks += 8;
    if (n_erase != 4 * ROWS) begin failures++; $display("erase rows %0d", n_erase); end
    if (n_write != 4 * ROWS) begin failures++; $display("write rows %0d", n_write); end
    if (n_stall == 0)      begin failures++; $display("no write stall"); end
    if (n_gap == 0)        begin failures++; $display("no stream gap"); end
    if (n_removed == 0)    begin failures++; $display("no match removed"); end
    if (n_multi == 0)      begin failures++; $display("no multi-word match"); end
    if (n_and_reject == 0) begin failures++; $display("no 16-bit AND reject"); end
    if (busy8)             begin failures++; $display("still busy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

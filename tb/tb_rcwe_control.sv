// tb_rcwe_control -- self-checking test of the update sequencer.
//
// A reduced sequencer (8 rows of 4 parts) gets three updates: one unbroken
// stream and two with random gaps. The expected command schedule is worked
// out from the clocks at which the parts arrive: erase row r appears on the
// CAM write port r clocks after the first part; write row r appears at the
// first clock t that is at least 8 (erase over), after the previous write,
// and after the clock in which the last part of row r was taken. Every clock
// the observed (cwe, csc, caddr) is compared with that schedule. For the
// unbroken stream the last write must appear ROWS*PARTS clocks after the
// first part, and busy must drop the clock after.
module tb_rcwe_control;
  localparam int ROWS = 8, P = 4, NP = ROWS * P;

  logic clk = 1'b0, rst_n;
  logic ewe;
  logic [4:0] eaddr;
  logic [2:0] raddr, caddr;
  logic cwe, csc, busy;
  int checks = 0, failures = 0;
  int n_stalls = 0;

  rcwe_control #(.ROWS(ROWS), .PARTS(P)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int edge_no;                 // posedge count since the first part
  int arrive [NP];             // edge at which part i was sampled
  int exp_t [2*ROWS];          // edge after which command i is visible
  logic running;

  // count edges and log part arrivals
  always @(posedge clk) begin
    if (running) edge_no <= edge_no + 1;
  end

  task automatic run_update(bit gaps);
    int i = 0;
    int t;
    // stream the parts
    @(negedge clk);
    edge_no = 0;
    while (i < NP) begin
      if (gaps && i > 0 && $urandom_range(2) == 0) begin
        ewe = 0;
      end else begin
        ewe = 1; eaddr = 5'(i); arrive[i] = (i == 0) ? 0 : edge_no; i++;
      end
      if (i == 1 && ewe) running = 1;
      @(negedge clk);
    end
    ewe = 0;
    // expected schedule
    for (int r = 0; r < ROWS; r++) exp_t[r] = r;
    t = ROWS - 1;
    for (int r = 0; r < ROWS; r++) begin
      int last = arrive[r*P + P - 1];
      t = t + 1;
      if (t < last + 1) begin t = last + 1; n_stalls++; end
      exp_t[ROWS + r] = t;
    end
    if (!gaps) begin
      checks++;
      if (exp_t[2*ROWS-1] != NP) begin failures++; $display("model: last write at %0d", exp_t[2*ROWS-1]); end
    end
  endtask

  // observer: log every command on the CAM write port
  int obs_t [2*ROWS];
  logic obs_csc [2*ROWS];
  int obs_addr [2*ROWS];
  int n_obs;

  task automatic observe_update();
    int guard = 0;
    n_obs = 0;
    while (n_obs < 2*ROWS && guard < 400) begin
      @(posedge clk); #1;
      guard++;
      if (cwe) begin
        obs_t[n_obs] = edge_no - 1; obs_csc[n_obs] = csc; obs_addr[n_obs] = int'(caddr);
        n_obs++;
      end
    end
    @(posedge clk); #1;
    checks++;
    if (busy !== 1'b0 || cwe !== 1'b0) begin failures++; $display("busy after last write"); end
  endtask

  task automatic compare_update();
    checks++;
    if (n_obs != 2*ROWS) begin failures++; $display("only %0d commands", n_obs); end
    for (int k = 0; k < n_obs; k++) begin
      checks++;
      if (obs_t[k] != exp_t[k] || obs_csc[k] !== (k >= ROWS) || obs_addr[k] != k % ROWS) begin
        failures++;
        $display("cmd %0d at edge %0d: csc %b caddr %0d (want edge %0d)", k, obs_t[k], obs_csc[k], obs_addr[k], exp_t[k]);
      end
    end
  endtask

  initial begin
    rst_n = 0; ewe = 0; eaddr = 0; running = 0; edge_no = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (busy !== 1'b0 || cwe !== 1'b0) begin failures++; $display("busy after reset"); end
    for (int u = 0; u < 3; u++) begin
      fork
        run_update(u != 0);
        observe_update();
      join
      compare_update();
      running = 0;
      repeat (3) @(negedge clk);
    end
    checks++;
    if (n_stalls == 0) begin failures++; $display("no write ever waited for its row"); end
    $display("write stalls waiting for data: %0d", n_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

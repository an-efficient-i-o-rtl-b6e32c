// rcu -- RAM-based CAM unit: a 32-word x 8-bit binary CAM in one dual-port RAM.
//
// The RAM is seen through two ports of different shape. The write port
// (port A) sees 2^DATA_W * WORDS one-bit cells; the cell at address
// {wdata, waddr} says "word waddr holds the value wdata". The read port
// (port B) sees 2^DATA_W rows of WORDS bits; reading row `key` returns, in one
// access, which of the WORDS stored words equal `key`. A word is erased by
// writing 0 (sc = 0) at {old value, waddr} and written by writing 1 (sc = 1)
// at {new value, waddr}; a word must be erased before it gets a new value.
//
// Interface and timing:
//   we, sc, wdata, waddr : one bit write per clock when we = 1.
//   key -> match         : registered read, match is valid one clock after key.
//   A read of the row being written in the same clock returns the old row.
//
// The two-port mapping, the 8,192 x 1 / 256 x 32 shapes and the meaning of
// csc (0 clears, 1 sets) follow the paper. The memory powers up all zero
// (no word holds any value), which is this design's choice; FPGA block RAMs
// accept such an initial content.
module rcu #(
  parameter int unsigned DATA_W = rcam_pkg::RCU_DW_DEF,
  parameter int unsigned WORDS  = rcam_pkg::RCU_WORDS_DEF,
  localparam int unsigned AW    = $clog2(WORDS)
) (
  input  logic              clk,
  input  logic              we,
  input  logic              sc,
  input  logic [DATA_W-1:0] wdata,
  input  logic [AW-1:0]     waddr,
  input  logic [DATA_W-1:0] key,
  output logic [WORDS-1:0]  match
);

  // Row r, bit i: word i holds value r.
  logic [WORDS-1:0] mem [2**DATA_W];

  initial begin
    for (int r = 0; r < 2**DATA_W; r++) mem[r] = '0;
  end

  always_ff @(posedge clk) begin
    if (we) mem[wdata][waddr] <= sc;
    match <= mem[key];
  end

endmodule

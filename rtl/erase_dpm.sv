// erase_dpm -- one dual-port memory of the erase RAM (256 x 256 bits).
//
// A simple dual-port RAM: one write port (we, waddr, wdata) and one read port
// (raddr -> rdata) with a registered output, valid one clock after raddr.
// A read of the address written in the same clock returns the old contents;
// the update sequencer relies on this when it erases a row in the clock its
// first new part arrives.
//
// The shape (256 x 256 bits, dual port) follows the paper. The all-zero
// power-up content is this design's choice: it matches an all-empty CAM, so
// the first erase pass clears nothing that is set.
module erase_dpm #(
  parameter int unsigned WIDTH = rcam_pkg::BUS_W_DEF,
  parameter int unsigned DEPTH = rcam_pkg::N_RCB_DEF * rcam_pkg::RCU_WORDS_DEF,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule

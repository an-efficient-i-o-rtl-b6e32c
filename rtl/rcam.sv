// rcam -- the CAM array: an encoder and N_RCB sub-RCAM blocks.
//
// A write (cwe) sets (csc = 1) or clears (csc = 0) one row of the CAM: the
// K/SEG words carried on cdata, stored at row caddr. Rows 0..WORDS-1 go to
// RCB0, the next WORDS rows to RCB1, etc. A search presents ckey; one clock
// later cmatch holds one bit per CAM word, word n of the delivered stream at
// bit n: the match vectors of the RCBs are placed one after the other
// (RCB0 lowest), each already bit-sliced into stream order.
//
// Sizes at the defaults: 8 RCBs x 256 RCUs of 32 x 8 bits, 2,048-bit cdata,
// 8-bit caddr, 65,536-bit cmatch, as in the paper's final design.
module rcam #(
  parameter int unsigned DATA_W = rcam_pkg::RCU_DW_DEF,
  parameter int unsigned WORDS  = rcam_pkg::RCU_WORDS_DEF,
  parameter int unsigned K      = rcam_pkg::BUS_W_DEF * rcam_pkg::PARTS_DEF / rcam_pkg::RCU_DW_DEF,
  parameter int unsigned N_RCB  = rcam_pkg::N_RCB_DEF,
  parameter int unsigned SEG    = rcam_pkg::WORD_W_DEF / rcam_pkg::RCU_DW_DEF,
  localparam int unsigned AW    = $clog2(WORDS),
  localparam int unsigned CAW   = $clog2(N_RCB * WORDS),
  localparam int unsigned MW    = WORDS * K / SEG          // match bits per RCB
) (
  input  logic                  clk,
  input  logic                  cwe,
  input  logic                  csc,
  input  logic [CAW-1:0]        caddr,
  input  logic [K*DATA_W-1:0]   cdata,
  input  logic [SEG*DATA_W-1:0] ckey,
  output logic [N_RCB*MW-1:0]   cmatch
);

  logic [N_RCB-1:0] rcb_we;
  logic [AW-1:0]    word_addr;

  rcam_encoder #(.N_RCB(N_RCB), .WORDS(WORDS)) u_encoder (
    .cwe       (cwe),
    .caddr     (caddr),
    .rcb_we    (rcb_we),
    .word_addr (word_addr)
  );

  for (genvar b = 0; b < N_RCB; b++) begin : g_rcb
    rcb #(.DATA_W(DATA_W), .WORDS(WORDS), .K(K), .SEG(SEG)) u_rcb (
      .clk   (clk),
      .we    (rcb_we[b]),
      .sc    (csc),
      .waddr (word_addr),
      .wdata (cdata),
      .key   (ckey),
      .match (cmatch[b*MW +: MW])
    );
  end

endmodule

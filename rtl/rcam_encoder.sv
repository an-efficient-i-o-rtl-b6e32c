// rcam_encoder -- steers a CAM write to one of the N_RCB sub-RCAM blocks.
//
// The row address caddr counts rows of the whole CAM. Its upper bits select
// the RCB and its lower AW bits the word address inside every RCU of that
// RCB. The wide write data are broadcast to all RCBs; only the selected one
// gets its write strobe, so rows fill RCB0 first, then RCB1, and so on.
//
// Purely combinational. The paper names this encoder and states what it does;
// decoding the upper address bits into one-hot write strobes is this design's
// choice of how.
module rcam_encoder #(
  parameter int unsigned N_RCB  = rcam_pkg::N_RCB_DEF,
  parameter int unsigned WORDS  = rcam_pkg::RCU_WORDS_DEF,
  localparam int unsigned AW    = $clog2(WORDS),
  localparam int unsigned SELW  = (N_RCB > 1) ? $clog2(N_RCB) : 1,
  localparam int unsigned CAW   = $clog2(N_RCB * WORDS)
) (
  input  logic             cwe,
  input  logic [CAW-1:0]   caddr,
  output logic [N_RCB-1:0] rcb_we,
  output logic [AW-1:0]    word_addr
);

  logic [SELW-1:0] sel;

  always_comb begin
    sel       = SELW'(caddr >> AW);
    word_addr = caddr[AW-1:0];
    for (int b = 0; b < N_RCB; b++) rcb_we[b] = cwe && (sel == SELW'(b));
  end

  always_comb begin
    assert ($onehot0(rcb_we)) else $error("rcam_encoder: several RCBs selected");
  end

endmodule

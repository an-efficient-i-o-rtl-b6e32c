// rcwe64k8 -- 65,536 x 8-bit RAM-based binary CAM with a low-latency update path.
//
// Top level. Three parts:
//   erase_ram    eight 256 x 256-bit DPMs holding a copy of the CAM contents;
//                written from the 256-bit host stream, read 2,048 bits at a
//                time (cdata).
//   rcwe_control sequences an update: erase every row of the CAM with the old
//                copy, then write every row with the new one, each row as
//                soon as its eight parts have arrived.
//   rcam         encoder + 8 RCBs x 256 RCUs (32 x 8 bits each); a write
//                stores 256 words at once, a search compares the key with all
//                65,536 words in one clock.
//
// Ports:
//   ewe, eaddr, edata : update stream; an update is ROWS*PARTS = 2,048 parts
//                       at eaddr 0, 1, 2, ... (gaps allowed). Part i carries
//                       CAM words 32*i .. 32*i+31, word 32*i at bits [7:0].
//   ckey -> cmatch    : search; cmatch[n] = 1 when word n equals ckey, one
//                       clock after ckey. Meaningless while busy.
//   busy              : an update is in progress.
// With an unbroken stream the last CAM write lands two clocks after the last
// part; the CAM can be searched with the new contents from then on.
//
// WORD_W selects the CAM word width (8, 16, 32 or 64 bits); the same RCUs then
// hold 65,536*8/WORD_W words, each spread over WORD_W/8 RCUs whose matches
// are ANDed. The structure, sizes and port names follow the paper; the busy
// output, active-low reset and word byte order are this design's choices.
module rcwe64k8 #(
  parameter int unsigned BUS_W     = rcam_pkg::BUS_W_DEF,
  parameter int unsigned PARTS     = rcam_pkg::PARTS_DEF,
  parameter int unsigned RCU_DW    = rcam_pkg::RCU_DW_DEF,
  parameter int unsigned RCU_WORDS = rcam_pkg::RCU_WORDS_DEF,
  parameter int unsigned N_RCB     = rcam_pkg::N_RCB_DEF,
  parameter int unsigned WORD_W    = rcam_pkg::WORD_W_DEF,
  localparam int unsigned CDATA_W  = BUS_W * PARTS,
  localparam int unsigned K        = CDATA_W / RCU_DW,          // RCUs per RCB
  localparam int unsigned SEG      = WORD_W / RCU_DW,           // RCUs per word
  localparam int unsigned ROWS     = N_RCB * RCU_WORDS,         // erase RAM rows
  localparam int unsigned N_WORDS  = ROWS * CDATA_W / WORD_W,   // CAM words
  localparam int unsigned EAW      = $clog2(ROWS * PARTS),
  localparam int unsigned CAW      = $clog2(ROWS)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               ewe,
  input  logic [EAW-1:0]     eaddr,
  input  logic [BUS_W-1:0]   edata,
  input  logic [WORD_W-1:0]  ckey,
  output logic [N_WORDS-1:0] cmatch,
  output logic               busy
);

  logic [CAW-1:0]     raddr;
  logic [CDATA_W-1:0] cdata;
  logic               cwe;
  logic               csc;
  logic [CAW-1:0]     caddr;

  erase_ram #(.BUS_W(BUS_W), .PARTS(PARTS), .ROWS(ROWS)) u_erase_ram (
    .clk   (clk),
    .ewe   (ewe),
    .eaddr (eaddr),
    .edata (edata),
    .raddr (raddr),
    .rdata (cdata)
  );

  rcwe_control #(.ROWS(ROWS), .PARTS(PARTS)) u_control (
    .clk   (clk),
    .rst_n (rst_n),
    .ewe   (ewe),
    .eaddr (eaddr),
    .raddr (raddr),
    .cwe   (cwe),
    .csc   (csc),
    .caddr (caddr),
    .busy  (busy)
  );

  rcam #(.DATA_W(RCU_DW), .WORDS(RCU_WORDS), .K(K), .N_RCB(N_RCB), .SEG(SEG)) u_rcam (
    .clk    (clk),
    .cwe    (cwe),
    .csc    (csc),
    .caddr  (caddr),
    .cdata  (cdata),
    .ckey   (ckey),
    .cmatch (cmatch)
  );

endmodule

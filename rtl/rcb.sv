// rcb -- sub-RCAM block: K RCUs written side by side, with a bit-sliced output.
//
// All K RCUs share the write strobe, the set/clear bit and the word address,
// and each takes its own DATA_W-bit slice of the wide write bus, so one write
// stores K slices at once (bit-sliced technique). RCU u gets bits
// [u*DATA_W +: DATA_W].
//
// A CAM word of SEG*DATA_W bits is spread over SEG neighbouring RCUs: word w
// of a row is held in RCUs w*SEG .. w*SEG+SEG-1, lowest slice first, so the
// write bus is simply K/SEG words packed from bit 0 up. A word matches when
// all its SEG RCUs match at the same address (one AND gate per word; none
// when SEG = 1).
//
// Output order: bit j*(K/SEG) + w of `match` is word w stored at word address
// j. Since a row of the write bus is consecutive words of the input stream,
// this keeps the match vector in the order the words were delivered.
//
// Timing: match is valid one clock after key (registered RCU read).
//
// The grouping of K RCUs, the shared caddr/cwe/csc and the bit-sliced output
// ordering follow the paper (k = 32 in its first advanced design and k = 256
// in the final one). The AND gates for wide words follow its width-expansion
// scheme; the byte order inside a wide word is this design's choice.
module rcb #(
  parameter int unsigned DATA_W = rcam_pkg::RCU_DW_DEF,
  parameter int unsigned WORDS  = rcam_pkg::RCU_WORDS_DEF,
  parameter int unsigned K      = rcam_pkg::BUS_W_DEF * rcam_pkg::PARTS_DEF / rcam_pkg::RCU_DW_DEF,
  parameter int unsigned SEG    = rcam_pkg::WORD_W_DEF / rcam_pkg::RCU_DW_DEF,
  localparam int unsigned AW    = $clog2(WORDS),
  localparam int unsigned NW    = K / SEG                 // words per row
) (
  input  logic                   clk,
  input  logic                   we,
  input  logic                   sc,
  input  logic [AW-1:0]          waddr,
  input  logic [K*DATA_W-1:0]    wdata,
  input  logic [SEG*DATA_W-1:0]  key,
  output logic [WORDS*NW-1:0]    match
);

  logic [WORDS-1:0] unit_match [K];

  for (genvar u = 0; u < K; u++) begin : g_rcu
    rcu #(.DATA_W(DATA_W), .WORDS(WORDS)) u_rcu (
      .clk   (clk),
      .we    (we),
      .sc    (sc),
      .wdata (wdata[u*DATA_W +: DATA_W]),
      .waddr (waddr),
      .key   (key[(u % SEG)*DATA_W +: DATA_W]),
      .match (unit_match[u])
    );
  end

  // Width expansion: a word matches where all of its SEG RCUs match.
  // Bit-sliced reordering: bit j of word w goes to match[j*NW + w].
  for (genvar w = 0; w < NW; w++) begin : g_word
    logic [WORDS-1:0] word_match;
    always_comb begin
      word_match = '1;
      for (int s = 0; s < SEG; s++) word_match &= unit_match[w*SEG + s];
    end
    for (genvar j = 0; j < WORDS; j++) begin : g_slice
      assign match[j*NW + w] = word_match[j];
    end
  end

endmodule

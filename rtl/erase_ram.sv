// erase_ram -- centralized, horizontally partitioned erase RAM.
//
// Holds a copy of everything currently stored in the CAM, so that an update
// can clear the old contents without asking the host for them. It is split
// into PARTS dual-port memories placed side by side. A write demultiplexer
// sends the 256-bit edata to DPM eaddr[PW-1:0], row eaddr[EAW-1:PW]; so
// consecutive edata fill DPM0[0], DPM1[0], ..., DPM7[0], then DPM0[1], ...
// A read returns one row of all PARTS memories at once, DPM0 in the lowest
// bits: 2,048 bits of cdata per clock at the defaults, eight times the bus
// width.
//
// Timing: rdata is valid one clock after raddr; a read of a row being written
// in the same clock returns the old row.
//
// The split into eight 256 x 256-bit DPMs behind a multiplexer and the
// 2,048-bit read follow the paper; the address split (DPM index in the low
// eaddr bits) follows its statement that consecutive edata go to DPM0..DPM7
// of the same row.
module erase_ram #(
  parameter int unsigned BUS_W = rcam_pkg::BUS_W_DEF,
  parameter int unsigned PARTS = rcam_pkg::PARTS_DEF,
  parameter int unsigned ROWS  = rcam_pkg::N_RCB_DEF * rcam_pkg::RCU_WORDS_DEF,
  localparam int unsigned PW   = (PARTS > 1) ? $clog2(PARTS) : 1,
  localparam int unsigned RAW  = $clog2(ROWS),
  localparam int unsigned EAW  = $clog2(ROWS * PARTS)
) (
  input  logic                   clk,
  input  logic                   ewe,
  input  logic [EAW-1:0]         eaddr,
  input  logic [BUS_W-1:0]       edata,
  input  logic [RAW-1:0]         raddr,
  output logic [PARTS*BUS_W-1:0] rdata
);

  logic [PARTS-1:0] part_we;
  logic [RAW-1:0]   row_waddr;

  // Write demultiplexer.
  always_comb begin
    row_waddr = RAW'(eaddr >> $clog2(PARTS));
    for (int p = 0; p < PARTS; p++)
      part_we[p] = ewe && ((PARTS == 1) || (PW'(eaddr) == PW'(p)));
  end

  for (genvar p = 0; p < PARTS; p++) begin : g_dpm
    erase_dpm #(.WIDTH(BUS_W), .DEPTH(ROWS)) u_dpm (
      .clk   (clk),
      .we    (part_we[p]),
      .waddr (row_waddr),
      .wdata (edata),
      .raddr (raddr),
      .rdata (rdata[p*BUS_W +: BUS_W])
    );
  end

endmodule

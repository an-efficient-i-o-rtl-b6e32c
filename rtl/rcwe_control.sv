// rcwe_control -- update sequencer of the CAM with centralized erase RAM.
//
// An update replaces the whole CAM: the host streams ROWS*PARTS parts of
// edata, eaddr counting 0, 1, 2, ... while ewe is high (gaps are allowed).
// The erase RAM keeps what the CAM holds, so the sequencer can run the two
// stages of the update without waiting for the host:
//
//   ERASE  The first ewe of an update starts it. One row per clock, rows
//          0..ROWS-1, the old row is read from the erase RAM and written to
//          the CAM with csc = 0, clearing it. Row r is read in clock r after
//          the start, and its first new part cannot arrive before clock
//          r*PARTS, so every erase reads old data (for r = 0 both fall in the
//          same clock and the erase RAM returns the old row).
//   WRITE  Row r is read from the erase RAM and written to the CAM with
//          csc = 1 as soon as all PARTS parts of it have been received, and
//          the erase pass is over. With an unbroken stream, rows 0..35 follow
//          the erase pass at one per clock, and from then on each row goes out
//          the clock after its last part has been stored.
//
// Interface and timing:
//   ewe, eaddr   : the host's write stream (also goes to the erase RAM).
//   raddr        : erase-RAM read address, combinational.
//   cwe,csc,caddr: CAM write command, registered so that it lines up with the
//                  erase RAM's registered read data (cdata).
//   busy         : an update is running or its last CAM write is pending.
// With an unbroken stream starting in clock 0, erase rows go out in clocks
// 0..ROWS-1, the first new row in clock ROWS, and the last in clock
// ROWS*PARTS (the clock after the last part arrives); each is applied to
// the CAM at the end of the following clock.
//
// Following the paper: erase all rows first (fed by the erase RAM) while the
// new data stream in, then write each row once its eight 256-bit parts are
// in. The paper's Section III-A says csc = 0 erases and csc = 1 writes, its
// Section III-B says the opposite; this design follows Section III-A. Counting
// received parts to tell when a row is complete, the busy flag and the
// synchronous active-low reset are this design's choices.
module rcwe_control #(
  parameter int unsigned ROWS  = rcam_pkg::N_RCB_DEF * rcam_pkg::RCU_WORDS_DEF,
  parameter int unsigned PARTS = rcam_pkg::PARTS_DEF,
  localparam int unsigned RAW  = $clog2(ROWS),
  localparam int unsigned EAW  = $clog2(ROWS * PARTS),
  localparam int unsigned FW   = $clog2(ROWS * PARTS + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           ewe,
  input  logic [EAW-1:0] eaddr,
  output logic [RAW-1:0] raddr,
  output logic           cwe,
  output logic           csc,
  output logic [RAW-1:0] caddr,
  output logic           busy
);

  import rcam_pkg::*;

  localparam int unsigned PSH = $clog2(PARTS);

  ctrl_state_e    state;
  logic [RAW-1:0] ptr;        // next row to erase or write
  logic [FW-1:0]  fill;       // parts received in this update
  logic [RAW:0]   rows_full;  // rows whose parts have all been received
  logic           row_ready;
  logic           issue;

  always_comb begin
    rows_full = (RAW+1)'(fill >> PSH);
    row_ready = rows_full > {1'b0, ptr};
    unique case (state)
      ST_IDLE:  issue = ewe;
      ST_ERASE: issue = 1'b1;
      ST_WRITE: issue = row_ready;
      default:  issue = 1'b0;
    endcase
    raddr = (state == ST_IDLE) ? '0 : ptr;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= ST_IDLE;
      ptr   <= '0;
      fill  <= '0;
      cwe   <= 1'b0;
      csc   <= 1'b0;
      caddr <= '0;
    end else begin
      cwe   <= issue;
      csc   <= (state == ST_WRITE);
      caddr <= raddr;
      if (ewe) fill <= (state == ST_IDLE) ? FW'(1) : fill + FW'(1);
      unique case (state)
        ST_IDLE: if (ewe) begin
          state <= ST_ERASE;
          ptr   <= RAW'(1);
        end
        ST_ERASE: begin
          ptr <= ptr + RAW'(1);
          if (ptr == RAW'(ROWS - 1)) state <= ST_WRITE;
        end
        ST_WRITE: if (row_ready) begin
          ptr <= ptr + RAW'(1);
          if (ptr == RAW'(ROWS - 1)) state <= ST_IDLE;
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  assign busy = (state != ST_IDLE) || cwe;

  // Host stream rules: parts arrive in address order, starting at 0, and no
  // more than ROWS*PARTS of them per update.
  property p_first_part;
    @(posedge clk) disable iff (!rst_n) (ewe && state == ST_IDLE) |-> (eaddr == '0);
  endproperty
  property p_in_order;
    @(posedge clk) disable iff (!rst_n)
      (ewe && state != ST_IDLE) |-> (fill < FW'(ROWS * PARTS)) && (EAW'(fill) == eaddr);
  endproperty
  a_first_part: assert property (p_first_part) else $error("rcwe_control: update must start at eaddr 0");
  a_in_order:   assert property (p_in_order)   else $error("rcwe_control: edata out of order or too many");

endmodule

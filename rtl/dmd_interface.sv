// dmd_interface: loads the mask buffer into the DMD controller and starts
// its display.
//
// On load the module reads the mask buffer through its read port B, row
// after row, WPR 128-bit words per row, one word per cycle, and hands each
// word to the DMD controller with dmd_dvalid, the row number dmd_row and
// dmd_row_start on the first word of a row. When all ROWS rows are loaded
// it pulses dmd_show for one cycle (the cycle after the last word) so that the controller switches the
// mirrors to the new mask, and counts the frame in frame_cnt. busy is high
// from the cycle after load and drops in the cycle of dmd_show; a full mask takes
// ROWS*WPR + 3 cycles (about 31 us at 200 MHz). The DMD keeps showing that mask until
// the next dmd_show.
//
// From the paper: the 128-bit transfer word and showing a mask only once it
// is fully loaded. The controller-side handshake (dvalid, row number,
// row start, show strobe) is this design's simplification of the DMD
// controller's input bus.
module dmd_interface
  import ga_pkg::*;
#(
  parameter int unsigned ROWS  = MASK_ROWS,
  parameter int unsigned WPR   = WORDS_PER_ROW,
  localparam int unsigned NW   = ROWS * WPR,
  localparam int unsigned AW   = $clog2(NW),
  localparam int unsigned ROW_W = $clog2(ROWS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  output logic             busy,
  // mask buffer port B
  output logic             bram_en,
  output logic [AW-1:0]    bram_addr,
  input  word_t            bram_dout,
  // DMD controller
  output logic             dmd_dvalid,
  output word_t            dmd_data,
  output logic [ROW_W-1:0] dmd_row,
  output logic             dmd_row_start,
  output logic             dmd_show,
  output logic [15:0]      frame_cnt
);

  logic                   active_q, pend_q;   // reading / word waiting on bram_dout
  logic                   last_q;             // last word goes out this cycle
  logic [AW:0]            addr_q;
  logic [ROW_W-1:0]       row_q, prow_q;
  logic [$clog2(WPR)-1:0] col_q, pcol_q;

  assign busy      = active_q || pend_q || last_q;
  assign bram_en   = active_q;
  assign bram_addr = addr_q[AW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_q      <= 1'b0;
      pend_q        <= 1'b0;
      addr_q        <= '0;
      row_q         <= '0;
      col_q         <= '0;
      prow_q        <= '0;
      pcol_q        <= '0;
      last_q        <= 1'b0;
      dmd_dvalid    <= 1'b0;
      dmd_data      <= '0;
      dmd_row       <= '0;
      dmd_row_start <= 1'b0;
      dmd_show      <= 1'b0;
      frame_cnt     <= '0;
    end else begin
      dmd_show <= 1'b0;
      if (load && !busy) begin
        active_q <= 1'b1;
        addr_q   <= '0;
        row_q    <= '0;
        col_q    <= '0;
      end else if (active_q) begin
        addr_q <= addr_q + 1'b1;
        if (32'(col_q) == WPR - 1) begin
          col_q <= '0;
          row_q <= row_q + 1'b1;
        end else begin
          col_q <= col_q + 1'b1;
        end
        if (32'(addr_q) == NW - 1) active_q <= 1'b0;
      end
      // word read in the previous cycle is on bram_dout now
      pend_q        <= active_q;
      prow_q        <= row_q;
      pcol_q        <= col_q;
      dmd_dvalid    <= 1'b0;
      dmd_row_start <= 1'b0;
      if (pend_q) begin
        dmd_dvalid    <= 1'b1;
        dmd_data      <= bram_dout;
        dmd_row       <= prow_q;
        dmd_row_start <= (pcol_q == '0);
      end
      last_q <= pend_q && !active_q;
      if (last_q) begin
        dmd_show  <= 1'b1;
        frame_cnt <= frame_cnt + 1'b1;
      end
    end
  end

endmodule

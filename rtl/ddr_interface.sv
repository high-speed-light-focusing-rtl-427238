// ddr_interface: the FPGA side of the DDR2 memory that stores all masks.
//
// The memory holds 2*NPOP mask slots of NW 128-bit words each; word w of
// slot s lives at word address s*NW + w. The interface serves two clients:
//   - parent reads of the GA engine: rd_req with rd_slot/rd_word is accepted
//     (rd_ack) only on a 50 MHz slot (ce50) and with no other read
//     outstanding; the word comes back with rd_valid one cycle after the
//     memory controller returns it. Read commands thus go out at 50 MHz,
//     one 128-bit word per 20 ns slot;
//   - mask store: store_start copies the whole mask buffer (read through
//     its port A, one cycle of latency) into slot store_slot as a stream of
//     write commands, one per cycle while app_rdy is high, so a full mask
//     takes NW+1 cycles (6145 cycles, about 31 us at 200 MHz). store_busy
//     is high from the cycle after store_start until the last write is
//     accepted. A store has priority over parent reads.
// Toward the memory controller there is one command port: app_en with
// app_cmd (1 = read, 0 = write), app_addr (128-bit word address) and
// app_wdata, taken when app_rdy is high; read data returns on
// app_rd_valid/app_rd_data in command order.
//
// From the paper: masks kept in DDR2, parents read 128 bits at a time at
// 50 MHz (20 ns per read, Fig. 10) and a mask written in about 31 us
// (Fig. 7). This design's choices: the command port, the slot address map,
// one outstanding read, and the store priority. The memory controller and
// PHY are outside this module.
module ddr_interface
  import ga_pkg::*;
#(
  parameter int unsigned NW     = MASK_ROWS * WORDS_PER_ROW,
  parameter int unsigned SLOT_W = $clog2(2*POP),
  parameter int unsigned ADDR_W = 27,
  localparam int unsigned AW    = $clog2(NW)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ce50,
  // parent reads
  input  logic              rd_req,
  input  logic [SLOT_W-1:0] rd_slot,
  input  logic [AW-1:0]     rd_word,
  output logic              rd_ack,
  output logic              rd_valid,
  output word_t             rd_data,
  // mask store
  input  logic              store_start,
  input  logic [SLOT_W-1:0] store_slot,
  output logic              store_busy,
  output logic              bram_en,
  output logic [AW-1:0]     bram_addr,
  input  word_t             bram_dout,
  // memory controller command port
  output logic              app_en,
  output logic              app_cmd,
  output logic [ADDR_W-1:0] app_addr,
  output word_t             app_wdata,
  input  logic              app_rdy,
  input  logic              app_rd_valid,
  input  word_t             app_rd_data
);

  logic              st_active_q, have_q, rd_out_q;
  logic [AW:0]       st_rd_q;       // next buffer word to read
  logic [AW-1:0]     st_wr_q;       // buffer word now on bram_dout
  logic [SLOT_W-1:0] st_slot_q;
  logic              wr_fire, rd_fire, st_done;

  function automatic logic [ADDR_W-1:0] map_addr(logic [SLOT_W-1:0] slot, logic [AW-1:0] word);
    return ADDR_W'(slot) * ADDR_W'(NW) + ADDR_W'(word);
  endfunction

  always_comb begin
    wr_fire   = st_active_q && have_q && app_rdy;
    bram_en   = st_active_q && (32'(st_rd_q) < NW) && (!have_q || wr_fire);
    bram_addr = st_rd_q[AW-1:0];
    st_done   = st_active_q && (32'(st_rd_q) == NW) && (!have_q || wr_fire);
    rd_fire   = rd_req && ce50 && app_rdy && !rd_out_q && !st_active_q && !store_start;
    rd_ack    = rd_fire;
    app_en    = wr_fire || rd_fire;
    app_cmd   = !wr_fire;
    app_addr  = wr_fire ? map_addr(st_slot_q, st_wr_q) : map_addr(rd_slot, rd_word);
    app_wdata = bram_dout;
  end

  assign store_busy = st_active_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_active_q <= 1'b0;
      have_q      <= 1'b0;
      st_rd_q     <= '0;
      st_wr_q     <= '0;
      st_slot_q   <= '0;
      rd_out_q    <= 1'b0;
      rd_valid    <= 1'b0;
      rd_data     <= '0;
    end else begin
      // mask store
      if (store_start && !st_active_q) begin
        st_active_q <= 1'b1;
        st_slot_q   <= store_slot;
        st_rd_q     <= '0;
        have_q      <= 1'b0;
      end else if (st_active_q) begin
        if (bram_en) begin
          st_rd_q <= st_rd_q + 1'b1;
          st_wr_q <= st_rd_q[AW-1:0];
          have_q  <= 1'b1;
        end else if (wr_fire) begin
          have_q <= 1'b0;
        end
        if (st_done) st_active_q <= 1'b0;
      end
      // parent reads
      if (rd_fire) rd_out_q <= 1'b1;
      else if (app_rd_valid) rd_out_q <= 1'b0;
      rd_valid <= app_rd_valid && rd_out_q;
      if (app_rd_valid) rd_data <= app_rd_data;
    end
  end

endmodule

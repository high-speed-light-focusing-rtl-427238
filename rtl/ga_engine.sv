// ga_engine: the "Genetic Algorithm" block. It builds one complete DMD mask,
// word by word, into the mask buffer.
//
// Three jobs, chosen by mode at start:
//   GEN_RANDOM  a random mask for the initial population: each mode gets a
//               random on/off value;
//   GEN_EVOLVE  an offspring: two parents are picked at random from the
//               better-ranked half of the population, each mode is taken from
//               one of them at random (uniform crossover) and then flipped
//               with probability thr/2^THW (mutation);
//   GEN_COPY    a copy of the best-ranked parent.
//
// The mask is produced in DMD order, 128-bit word after word. A mode spans
// MPIX columns of one word and SEGR rows, so the crossover and mutation
// decisions are drawn only on the first DMD row of every band of SEGR rows
// and kept in a one-row line buffer for the other SEGR-1 rows; every mode
// stays uniform over its 16x12 pixels. One 128-bit random vector serves one
// word of decisions: for mode j of the word, bits [16j +: 15] are compared
// with thr (mutation) and bit 16j+15 picks the parent (or is the random
// value in GEN_RANDOM).
//
// Parents are read from DDR memory through the rd_* request port: parent A
// and then parent B for each word (only A for GEN_COPY). rd_req is held with
// rd_slot/rd_word until rd_ack; the word then arrives with rd_valid. Each
// finished word is written to the mask buffer with bram_we. In GEN_RANDOM no
// parent is read and one word is written per cycle. busy is high from the
// cycle after start until the last word is written. The statistics
// xo_modes/mut_modes count the modes taken from parent B and the mutated
// modes of the last mask.
//
// From the paper: the crossover of two higher-ranked parents, mutation by
// changing a share R of the modes, 128-bit processing, one random vector per
// word, and parents read from DDR. This design's choices: uniform crossover,
// parents drawn from the top half with two distinct ranks, mutation as a
// flip of a binary mode, and the bit layout of the random vector.
module ga_engine
  import ga_pkg::*;
#(
  parameter int unsigned ROWS   = MASK_ROWS,
  parameter int unsigned WPR    = WORDS_PER_ROW,
  parameter int unsigned SEGR   = SEG_ROWS,
  parameter int unsigned MPIX   = MODE_PIX,
  parameter int unsigned NPOP   = POP,
  parameter int unsigned SLOT_W = $clog2(2*POP),
  parameter int unsigned THW    = TH_W,
  localparam int unsigned NW    = ROWS * WPR,
  localparam int unsigned AW    = $clog2(NW),
  localparam int unsigned MPW   = WORD_W / MPIX,
  localparam int unsigned HALF  = NPOP / 2,
  localparam int unsigned RK_W  = (HALF > 1) ? $clog2(HALF) : 1,
  localparam int unsigned PK_W  = $clog2(NPOP)
) (
  input  logic              clk,
  input  logic              rst_n,
  // control
  input  logic              start,
  input  gen_mode_e         mode,
  input  logic [THW-1:0]    thr,
  input  logic [SLOT_W-1:0] parent_slot [NPOP],  // DDR slot of each rank, best first
  output logic              busy,
  // random source
  input  word_t             rnd,
  input  logic              rnd_ready,
  output logic              rnd_en,
  // parent reads from DDR
  output logic              rd_req,
  output logic [SLOT_W-1:0] rd_slot,
  output logic [AW-1:0]     rd_word,
  input  logic              rd_ack,
  input  logic              rd_valid,
  input  word_t             rd_data,
  // mask buffer writes
  output logic              bram_we,
  output logic [AW-1:0]     bram_addr,
  output word_t             bram_din,
  // statistics of the last mask
  output logic [SLOT_W-1:0] slot_a,
  output logic [SLOT_W-1:0] slot_b,
  output logic [31:0]       xo_modes,
  output logic [31:0]       mut_modes
);

  typedef enum logic [2:0] {S_IDLE, S_PICK, S_RDA, S_WA, S_RDB, S_WB, S_GEN} state_e;

  state_e                   state_q;
  gen_mode_e                mode_q;
  logic [AW-1:0]            addr_q;
  logic [$clog2(WPR)-1:0]   col_q;
  logic [$clog2(SEGR)-1:0]  rseg_q;
  logic [MPW-1:0]           sel_line [WPR];
  logic [MPW-1:0]           mut_line [WPR];
  word_t                    pa_q, pb_q;

  // --- per-word decisions -------------------------------------------------
  logic           dec_row;
  logic [MPW-1:0] sel_new, mut_new, sel_cur, mut_cur;
  word_t          word_out;
  logic           need_rnd, gen_fire;

  always_comb begin
    dec_row = (rseg_q == '0);
    for (int unsigned j = 0; j < MPW; j++) begin
      mut_new[j] = (rnd[j*MPIX +: THW] < thr);
      sel_new[j] = rnd[j*MPIX + MPIX - 1];
    end
    sel_cur = dec_row ? sel_new : sel_line[col_q];
    mut_cur = dec_row ? mut_new : mut_line[col_q];
    if (mode_q == GEN_COPY) begin
      sel_cur = '0;
      mut_cur = '0;
    end
    for (int unsigned j = 0; j < MPW; j++) begin
      unique case (mode_q)
        GEN_RANDOM: word_out[j*MPIX +: MPIX] = {MPIX{sel_cur[j]}};
        GEN_EVOLVE: word_out[j*MPIX +: MPIX] = (sel_cur[j] ? pb_q[j*MPIX +: MPIX]
                                                           : pa_q[j*MPIX +: MPIX])
                                               ^ {MPIX{mut_cur[j]}};
        default:    word_out[j*MPIX +: MPIX] = pa_q[j*MPIX +: MPIX];
      endcase
    end
    need_rnd = dec_row && (mode_q != GEN_COPY);
    gen_fire = (state_q == S_GEN) && (!need_rnd || rnd_ready);
  end

  // --- parent selection from the better half ------------------------------
  logic [RK_W-1:0] ra, rb;
  always_comb begin
    ra = (HALF > 1) ? rnd[RK_W-1:0] : '0;
    rb = (HALF > 1) ? rnd[2*RK_W-1:RK_W] : '0;
    if (rb == ra) rb = (32'(ra) + 1 == HALF) ? '0 : ra + 1'b1;
  end

  assign busy      = (state_q != S_IDLE);
  assign rnd_en    = ((state_q == S_PICK) && rnd_ready) || (gen_fire && need_rnd);
  assign rd_req    = (state_q == S_RDA) || (state_q == S_RDB);
  assign rd_slot   = (state_q == S_RDB) ? slot_b : slot_a;
  assign rd_word   = addr_q;
  assign bram_we   = gen_fire;
  assign bram_addr = addr_q;
  assign bram_din  = word_out;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_IDLE;
      mode_q    <= GEN_RANDOM;
      addr_q    <= '0;
      col_q     <= '0;
      rseg_q    <= '0;
      pa_q      <= '0;
      pb_q      <= '0;
      slot_a    <= '0;
      slot_b    <= '0;
      xo_modes  <= '0;
      mut_modes <= '0;
      for (int unsigned c = 0; c < WPR; c++) begin
        sel_line[c] <= '0;
        mut_line[c] <= '0;
      end
    end else begin
      unique case (state_q)
        S_IDLE: if (start) begin
          mode_q    <= mode;
          addr_q    <= '0;
          col_q     <= '0;
          rseg_q    <= '0;
          xo_modes  <= '0;
          mut_modes <= '0;
          state_q   <= (mode == GEN_RANDOM) ? S_GEN : S_PICK;
        end
        S_PICK: if (rnd_ready) begin
          slot_a  <= (mode_q == GEN_COPY) ? parent_slot[0] : parent_slot[PK_W'(ra)];
          slot_b  <= parent_slot[PK_W'(rb)];
          state_q <= S_RDA;
        end
        S_RDA: if (rd_ack) state_q <= S_WA;
        S_WA: if (rd_valid) begin
          pa_q    <= rd_data;
          state_q <= (mode_q == GEN_COPY) ? S_GEN : S_RDB;
        end
        S_RDB: if (rd_ack) state_q <= S_WB;
        S_WB: if (rd_valid) begin
          pb_q    <= rd_data;
          state_q <= S_GEN;
        end
        S_GEN: if (gen_fire) begin
          if (need_rnd) begin
            sel_line[col_q] <= sel_new;
            mut_line[col_q] <= mut_new;
            if (mode_q == GEN_EVOLVE) begin
              xo_modes  <= xo_modes + 32'($countones(sel_new));
              mut_modes <= mut_modes + 32'($countones(mut_new));
            end
          end
          if (32'(addr_q) == NW - 1) begin
            state_q <= S_IDLE;
          end else begin
            addr_q  <= addr_q + 1'b1;
            if (32'(col_q) == WPR - 1) begin
              col_q  <= '0;
              rseg_q <= (32'(rseg_q) == SEGR - 1) ? '0 : rseg_q + 1'b1;
            end else begin
              col_q <= col_q + 1'b1;
            end
            state_q <= (mode_q == GEN_RANDOM) ? S_GEN : S_RDA;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule

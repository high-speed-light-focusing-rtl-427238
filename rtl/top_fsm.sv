// top_fsm: the top-level state machine that runs the GA.
//
// It works at 50 MHz: its state advances only in cycles where ce50 is high
// (one 200 MHz cycle in four), and its commands to the 200 MHz blocks are
// one-cycle pulses issued in such a cycle. It samples their busy levels at
// the next 50 MHz slot, by which time a started block already shows busy.
//
// One mask is handled in this order (as in the workflow of one offspring):
//   GEN    the GA engine writes a new mask into the mask buffer (a random
//          mask while building the initial population, an offspring after);
//   SHOW   the DMD interface loads and shows the mask while the DDR
//          interface stores it in its DDR slot (slot j for initial parent j,
//          free_slot[j] for offspring j);
//   ADC    the photodetector signal is accumulated into the fitness;
//   RANK   the fitness is inserted into the parent list (initial
//          population) or the offspring list, followed by a fixed wait of
//          RANK_WAIT 50 MHz cycles (10 us).
// After NPOP initial parents, the iterations k = 1, 2, ... each make NPOP
// offspring and end with a merge in the ranker (better halves of parents
// and offspring form the next population). After N_ITER iterations the best
// parent is copied into the mask buffer and shown, and done is raised until
// run falls. If restart_every is not zero, the GA starts again from a new
// random population after that many iterations, for as long as run is high
// (the repeated-focusing mode); repeats counts those restarts.
//
// From the paper: the order of the steps, a population of 16, 2000
// iterations, a 10 us ranking wait, the restart every 500 iterations, and
// showing the optimized mask at the end. This design's choices: the
// encoding of states, the busy/pulse handshake, and the exact moment of each
// step; the DMD load and the DDR store run at the same time.
module top_fsm
  import ga_pkg::*;
#(
  parameter int unsigned NPOP      = POP,
  parameter int unsigned NITER     = N_ITER,
  parameter int unsigned RANK_WAIT = 500,
  parameter int unsigned FW        = FIT_W,
  parameter int unsigned SLOT_W    = $clog2(2*POP),
  parameter int unsigned K_W       = 12
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ce50,
  input  logic              run,
  input  logic [K_W-1:0]    restart_every,
  // block status
  input  logic              eng_busy,
  input  logic              store_busy,
  input  logic              dmd_busy,
  input  logic              adc_busy,
  input  logic              rank_busy,
  input  logic [FW-1:0]     adc_fitness,
  input  logic [SLOT_W-1:0] free_slot [NPOP],
  // commands (one 200 MHz cycle each)
  output logic              eng_start,
  output gen_mode_e         eng_mode,
  output logic              dmd_load,
  output logic              store_start,
  output logic [SLOT_W-1:0] store_slot,
  output logic              adc_start,
  output logic              rank_clear,
  output logic              ins_parent,
  output logic              ins_child,
  output logic [FW-1:0]     ins_fit,
  output logic [SLOT_W-1:0] ins_slot,
  output logic              merge,
  // status
  output logic [K_W-1:0]    k,
  output logic              init_phase,
  output logic              done,
  output logic [15:0]       repeats
);

  typedef enum logic [4:0] {
    S_IDLE, S_CLEAR, S_GEN_GO, S_GEN_WAIT, S_SHOW_GO, S_SHOW_WAIT,
    S_ADC_GO, S_ADC_WAIT, S_RANK, S_RANK_WAIT, S_MERGE_GO, S_MERGE_WAIT,
    S_FINAL_GO, S_FINAL_WAIT, S_FSHOW_GO, S_FSHOW_WAIT, S_DONE
  } state_e;

  state_e                    state_q;
  logic [$clog2(NPOP)-1:0]   j_q;
  logic [SLOT_W-1:0]         slot_q;
  logic [$clog2(RANK_WAIT+1)-1:0] wait_q;

  // one-cycle commands
  always_comb begin
    eng_start   = ce50 && ((state_q == S_GEN_GO) || (state_q == S_FINAL_GO));
    eng_mode    = (state_q == S_FINAL_GO) ? GEN_COPY : (init_phase ? GEN_RANDOM : GEN_EVOLVE);
    dmd_load    = ce50 && ((state_q == S_SHOW_GO) || (state_q == S_FSHOW_GO));
    store_start = ce50 && (state_q == S_SHOW_GO);
    store_slot  = init_phase ? SLOT_W'(j_q) : free_slot[j_q];
    adc_start   = ce50 && (state_q == S_ADC_GO);
    rank_clear  = ce50 && (state_q == S_CLEAR);
    ins_parent  = ce50 && (state_q == S_RANK) && init_phase;
    ins_child   = ce50 && (state_q == S_RANK) && !init_phase;
    ins_fit     = adc_fitness;
    ins_slot    = slot_q;
    merge       = ce50 && (state_q == S_MERGE_GO);
    done        = (state_q == S_DONE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      j_q        <= '0;
      k          <= '0;
      slot_q     <= '0;
      wait_q     <= '0;
      init_phase <= 1'b1;
      repeats    <= '0;
    end else if (ce50) begin
      unique case (state_q)
        S_IDLE:       if (run) begin
                        repeats <= '0;
                        state_q <= S_CLEAR;
                      end
        S_CLEAR:      begin
                        init_phase <= 1'b1;
                        j_q        <= '0;
                        k          <= '0;
                        state_q    <= S_GEN_GO;
                      end
        S_GEN_GO:     state_q <= S_GEN_WAIT;
        S_GEN_WAIT:   if (!eng_busy) state_q <= S_SHOW_GO;
        S_SHOW_GO:    begin
                        slot_q  <= store_slot;
                        state_q <= S_SHOW_WAIT;
                      end
        S_SHOW_WAIT:  if (!store_busy && !dmd_busy) state_q <= S_ADC_GO;
        S_ADC_GO:     state_q <= S_ADC_WAIT;
        S_ADC_WAIT:   if (!adc_busy) state_q <= S_RANK;
        S_RANK:       begin
                        wait_q  <= ($bits(wait_q))'(RANK_WAIT);
                        state_q <= S_RANK_WAIT;
                      end
        S_RANK_WAIT:  if (wait_q > 1) begin
                        wait_q <= wait_q - 1'b1;
                      end else if (32'(j_q) != NPOP - 1) begin
                        j_q     <= j_q + 1'b1;
                        state_q <= S_GEN_GO;
                      end else if (init_phase) begin
                        init_phase <= 1'b0;
                        j_q        <= '0;
                        k          <= K_W'(1);
                        state_q    <= S_GEN_GO;
                      end else begin
                        state_q <= S_MERGE_GO;
                      end
        S_MERGE_GO:   state_q <= S_MERGE_WAIT;
        S_MERGE_WAIT: if (!rank_busy) begin
                        if (restart_every != '0 && k == restart_every && run) begin
                          repeats <= repeats + 1'b1;
                          state_q <= S_CLEAR;
                        end else if (32'(k) >= NITER ||
                                     (restart_every != '0 && k == restart_every)) begin
                          state_q <= S_FINAL_GO;
                        end else begin
                          k       <= k + 1'b1;
                          j_q     <= '0;
                          state_q <= S_GEN_GO;
                        end
                      end
        S_FINAL_GO:   state_q <= S_FINAL_WAIT;
        S_FINAL_WAIT: if (!eng_busy) state_q <= S_FSHOW_GO;
        S_FSHOW_GO:   state_q <= S_FSHOW_WAIT;
        S_FSHOW_WAIT: if (!dmd_busy) state_q <= S_DONE;
        S_DONE:       if (!run) state_q <= S_IDLE;
        default:      state_q <= S_IDLE;
      endcase
    end
  end

endmodule

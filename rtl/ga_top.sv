// ga_top: FPGA design of a genetic algorithm (GA) that focuses light through
// a scattering medium with a DMD, closed-loop through a photodetector.
//
// The GA evolves binary DMD masks of 64x64 modes shown as 1024x768 pixels.
// For every mask it: builds the mask in the on-chip mask buffer (ga_engine,
// random bits from trivium_prng, mutation rate from mutation_rate); shows it
// on the DMD (dmd_interface) while storing it in DDR memory
// (ddr_interface); accumulates the photodetector intensity through the ADC
// (adc_interface); and ranks it (ga_ranker). top_fsm sequences these steps
// at 50 MHz; everything else runs at 200 MHz.
//
// Clocking: clk is the 200 MHz clock. The 50 MHz rate of the top-level
// state machine and of the DDR read commands is a clock enable, ce50, high
// in one cycle of four; both rates come from one PLL in the original board,
// so the two are phase-aligned and a clock enable gives the same timing.
// The PLL itself, the DDR2 memory controller and memory, the ADC chip and
// the DMD controller are outside this module; their signals are ports.
//
// Interface: raise run to start (sampled while idle); done rises when
// N_ITER iterations are finished and the best mask is shown. restart_every
// (if not zero) restarts the GA after that many iterations while run stays
// high. key/iv seed the random generator at reset.
//
// Timing at the defaults: a random mask takes 6144 cycles, an offspring 16
// cycles per word (two 20 ns parent reads, 80 ns per word), i.e. 98304
// cycles (492 us); the DMD load and DDR store ~6150 cycles (31 us); the ADC
// window 6200 cycles (31 us); the ranking wait 2000 cycles (10 us).
module ga_top
  import ga_pkg::*;
#(
  parameter int unsigned ROWS          = MASK_ROWS,
  parameter int unsigned WPR           = WORDS_PER_ROW,
  parameter int unsigned SEGR          = SEG_ROWS,
  parameter int unsigned MPIX          = MODE_PIX,
  parameter int unsigned NPOP          = POP,
  parameter int unsigned NITER         = N_ITER,
  parameter int unsigned RANK_WAIT     = 500,
  parameter int unsigned SAMPLE_CYCLES = 460,
  parameter int unsigned WINDOW_CYCLES = 6200,
  parameter int unsigned KAPPA         = KAPPA_START,
  parameter int unsigned DECAY         = TAU,
  parameter int unsigned R_END         = R_END_NUM,
  parameter int unsigned ADDR_W        = 27,
  parameter int unsigned K_W           = 12,
  localparam int unsigned NW           = ROWS * WPR,
  localparam int unsigned AW           = $clog2(NW),
  localparam int unsigned SLOT_W       = $clog2(2*NPOP),
  localparam int unsigned ROW_W        = $clog2(ROWS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // control and status
  input  logic              run,
  input  logic [K_W-1:0]    restart_every,
  input  logic [79:0]       key,
  input  logic [79:0]       iv,
  output logic              done,
  output logic              init_phase,
  output logic [K_W-1:0]    iteration,
  output logic [15:0]       repeats,
  output logic [TH_W-1:0]   mut_thr,
  output logic [FIT_W-1:0]  best_fit,
  output logic [SLOT_W-1:0] best_slot,
  // DDR2 memory controller
  output logic              app_en,
  output logic              app_cmd,
  output logic [ADDR_W-1:0] app_addr,
  output word_t             app_wdata,
  input  logic              app_rdy,
  input  logic              app_rd_valid,
  input  word_t             app_rd_data,
  // ADC
  output logic              adc_cnv,
  input  logic              adc_drdy,
  input  logic [9:0]        adc_data,
  // DMD controller
  output logic              dmd_dvalid,
  output word_t             dmd_data,
  output logic [ROW_W-1:0]  dmd_row,
  output logic              dmd_row_start,
  output logic              dmd_show
);

  // 50 MHz slot
  logic [1:0] div_q;
  logic       ce50;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) div_q <= '0;
    else        div_q <= div_q + 1'b1;
  end
  assign ce50 = (div_q == 2'd3);

  // random source
  word_t rnd;
  logic  rnd_ready, rnd_en;
  trivium_prng #(.BITS(WORD_W)) u_prng (
    .clk, .rst_n, .key, .iv, .en(rnd_en), .ready(rnd_ready), .rnd
  );

  // mutation rate of iteration k
  mutation_rate #(.KAPPA(KAPPA), .DECAY(DECAY), .R_END(R_END), .THW(TH_W), .K_W(K_W)) u_rate (
    .clk, .rst_n, .k(iteration), .thr(mut_thr), .at_floor()
  );

  // top-level state machine
  logic              eng_start, dmd_load, store_start, adc_start;
  logic              rank_clear, ins_parent, ins_child, merge;
  gen_mode_e         eng_mode;
  logic [SLOT_W-1:0] store_slot, ins_slot;
  logic [FIT_W-1:0]  ins_fit, adc_fit;
  logic              eng_busy, store_busy, dmd_busy, adc_busy, rank_busy;
  logic [SLOT_W-1:0] parent_slot [NPOP];
  logic [FIT_W-1:0]  parent_fit  [NPOP];
  logic [SLOT_W-1:0] free_slot   [NPOP];

  top_fsm #(.NPOP(NPOP), .NITER(NITER), .RANK_WAIT(RANK_WAIT), .FW(FIT_W),
            .SLOT_W(SLOT_W), .K_W(K_W)) u_fsm (
    .clk, .rst_n, .ce50, .run, .restart_every,
    .eng_busy, .store_busy, .dmd_busy, .adc_busy, .rank_busy,
    .adc_fitness(adc_fit), .free_slot,
    .eng_start, .eng_mode, .dmd_load, .store_start, .store_slot, .adc_start,
    .rank_clear, .ins_parent, .ins_child, .ins_fit, .ins_slot, .merge,
    .k(iteration), .init_phase, .done, .repeats
  );

  // GA engine
  logic              rd_req, rd_ack, rd_valid;
  logic [SLOT_W-1:0] rd_slot;
  logic [AW-1:0]     rd_word;
  word_t             rd_data;
  logic              eng_we;
  logic [AW-1:0]     eng_addr;
  word_t             eng_din;

  ga_engine #(.ROWS(ROWS), .WPR(WPR), .SEGR(SEGR), .MPIX(MPIX), .NPOP(NPOP),
              .SLOT_W(SLOT_W), .THW(TH_W)) u_engine (
    .clk, .rst_n, .start(eng_start), .mode(eng_mode), .thr(mut_thr),
    .parent_slot, .busy(eng_busy),
    .rnd, .rnd_ready, .rnd_en,
    .rd_req, .rd_slot, .rd_word, .rd_ack, .rd_valid, .rd_data,
    .bram_we(eng_we), .bram_addr(eng_addr), .bram_din(eng_din),
    .slot_a(), .slot_b(), .xo_modes(), .mut_modes()
  );

  // ranking
  ga_ranker #(.NPOP(NPOP), .FW(FIT_W), .SLOT_W(SLOT_W)) u_ranker (
    .clk, .rst_n, .clear(rank_clear), .ins_parent, .ins_child, .ins_fit, .ins_slot,
    .merge, .busy(rank_busy), .parent_slot, .parent_fit, .free_slot,
    .n_parents(), .n_children()
  );
  assign best_fit  = parent_fit[0];
  assign best_slot = parent_slot[0];

  // mask buffer: port A written by the engine, read by the DDR store
  logic          st_bram_en, dmd_bram_en;
  logic [AW-1:0] st_bram_addr, dmd_bram_addr;
  word_t         dout_a, dout_b;

  mask_bram #(.DEPTH(NW), .W(WORD_W)) u_bram (
    .clk,
    .en_a(eng_we || st_bram_en), .we_a(eng_we),
    .addr_a(eng_we ? eng_addr : st_bram_addr), .din_a(eng_din), .dout_a,
    .en_b(dmd_bram_en), .addr_b(dmd_bram_addr), .dout_b
  );

  // DDR
  ddr_interface #(.NW(NW), .SLOT_W(SLOT_W), .ADDR_W(ADDR_W)) u_ddr (
    .clk, .rst_n, .ce50,
    .rd_req, .rd_slot, .rd_word, .rd_ack, .rd_valid, .rd_data,
    .store_start, .store_slot, .store_busy,
    .bram_en(st_bram_en), .bram_addr(st_bram_addr), .bram_dout(dout_a),
    .app_en, .app_cmd, .app_addr, .app_wdata, .app_rdy, .app_rd_valid, .app_rd_data
  );

  // DMD
  dmd_interface #(.ROWS(ROWS), .WPR(WPR)) u_dmd (
    .clk, .rst_n, .load(dmd_load), .busy(dmd_busy),
    .bram_en(dmd_bram_en), .bram_addr(dmd_bram_addr), .bram_dout(dout_b),
    .dmd_dvalid, .dmd_data, .dmd_row, .dmd_row_start, .dmd_show, .frame_cnt()
  );

  // ADC
  adc_interface #(.SAMPLE_CYCLES(SAMPLE_CYCLES), .WINDOW_CYCLES(WINDOW_CYCLES),
                  .DATA_W(10), .ACC_W(FIT_W)) u_adc (
    .clk, .rst_n, .adc_cnv, .adc_drdy, .adc_data,
    .start(adc_start), .busy(adc_busy), .fitness(adc_fit),
    .n_samples(), .last_sample()
  );

endmodule

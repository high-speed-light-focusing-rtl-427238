// tb_ga_top: end-to-end run of the whole design, closed-loop through
// behavioural models of the DDR memory, the ADC and the DMD plus scattering
// medium (optics_model). Reduced sizes keep it short: a 24-row mask
// (2 bands of modes, 128 modes, 192 words), the full population of 16,
// 25 iterations, a faster mutation decay (DECAY = 80) so that the rate
// floor is reached, and shorter ADC/ranking timers.
//
// Checks: every shown frame equals the mask stored in its DDR slot; every
// mode is uniform over its pixels; each fitness equals the samples times
// the detector level; every offspring differs from its two parents only in
// modes counted as mutated; the parent list stays sorted and the best
// fitness never falls; after 25 iterations the best fitness is well above
// the best initial one (the loop focuses light); the final shown mask is
// the best parent; offspring take 16 cycles per word. Then the restart mode
// is run once. Each mechanism (random mask, offspring, crossover, mutation,
// mutation-rate floor, 50 MHz-paced DDR read, mask store, DMD frame, ADC
// window, parent and offspring ranking, merge, restart, final display) is
// counted, and one that never happened is a failure.
module tb_ga_top;
  import ga_pkg::*;
  localparam int ROWS = 24, WPR = 8, SEGR = 12, MPIX = 16, NPOP = 16, NITER = 25;
  localparam int NW = ROWS * WPR, RW = $clog2(ROWS);

  logic clk = 0, rst_n = 0, run;
  logic [11:0] restart_every, iteration;
  logic [79:0] key, iv;
  logic done, init_phase;
  logic [15:0] repeats;
  logic [14:0] mut_thr;
  logic [23:0] best_fit;
  logic [4:0] best_slot;
  logic app_en, app_cmd, app_rdy, app_rd_valid;
  logic [26:0] app_addr;
  logic [127:0] app_wdata, app_rd_data, dmd_data;
  logic adc_cnv, adc_drdy, dmd_dvalid, dmd_row_start, dmd_show;
  logic [9:0] adc_data;
  logic [RW-1:0] dmd_row;
  int level, frames, nonuniform, n_reads, n_writes;
  int checks = 0, failures = 0;

  ga_top #(.ROWS(ROWS), .WPR(WPR), .SEGR(SEGR), .MPIX(MPIX), .NPOP(NPOP), .NITER(NITER),
           .RANK_WAIT(10), .SAMPLE_CYCLES(40), .WINDOW_CYCLES(400), .DECAY(80)) dut (
    .clk, .rst_n, .run, .restart_every, .key, .iv, .done, .init_phase, .iteration, .repeats,
    .mut_thr, .best_fit, .best_slot,
    .app_en, .app_cmd, .app_addr, .app_wdata, .app_rdy, .app_rd_valid, .app_rd_data,
    .adc_cnv, .adc_drdy, .adc_data, .dmd_dvalid, .dmd_data, .dmd_row, .dmd_row_start, .dmd_show);
  ddr_model #(.LAT(4)) ddr (.clk, .app_en, .app_cmd, .app_addr, .app_wdata, .app_rdy,
    .app_rd_valid, .app_rd_data, .n_reads, .n_writes);
  adc_model #(.CONV_CYCLES(10), .HOLD(8)) adc (.clk, .adc_cnv, .level, .adc_drdy, .adc_data);
  optics_model #(.ROWS(ROWS), .WPR(WPR), .SEGR(SEGR), .MPIX(MPIX)) optics (.clk, .dmd_dvalid,
    .dmd_data, .dmd_row, .dmd_show, .level, .frames, .nonuniform);
  always #5 clk = ~clk;

  // mechanism counters
  int m_random = 0, m_offspring = 0, m_xo = 0, m_mut = 0, m_floor = 0, m_store = 0, m_adc = 0;
  int m_insp = 0, m_insc = 0, m_merge = 0, m_copy = 0;
  int gen_t0 = 0, cyc = 0, prev_best = 0, first_best = -1, last_store_slot = 0;
  bit in_gen = 0;
  int n_rows = ROWS, n_wpr = WPR, n_mpw = 128 / MPIX;
  gen_mode_e gen_mode;

  function automatic bit mode_of(logic [127:0] w, int j); return w[j*MPIX]; endfunction

  // compare a DDR slot with the mask shown by the optics model
  task automatic check_slot_vs_shown(input int slot, input string tag);
    int bad;
    bad = 0;
    for (int a = 0; a < NW; a++) if (ddr.peek(slot * NW + a) !== optics.shown_word(a)) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("%s: %0d words of slot %0d differ from the shown mask", tag, bad, slot); end
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (dut.eng_start) begin
      gen_t0 <= cyc; in_gen <= 1; gen_mode <= dut.eng_mode;
      if (dut.eng_mode == GEN_RANDOM) m_random++;
      if (dut.eng_mode == GEN_EVOLVE) m_offspring++;
      if (dut.eng_mode == GEN_COPY) m_copy++;
    end
    if (in_gen && !dut.eng_busy && cyc > gen_t0 + 2) begin
      in_gen <= 0;
      if (gen_mode == GEN_EVOLVE) begin
        int diff;
        logic [127:0] wa, wb, wo;
        checks++;
        if (cyc - gen_t0 < NW * 16 || cyc - gen_t0 > NW * 16 + 24) begin
          failures++; $display("offspring took %0d cycles", cyc - gen_t0);
        end
        if (dut.u_engine.xo_modes > 0) m_xo++;
        if (dut.u_engine.mut_modes > 0) m_mut++;
        // modes that differ from both parents must have been mutated
        diff = 0;
        for (int r = 0; r < n_rows; r += SEGR)
          for (int c = 0; c < n_wpr; c++) begin
            wa = ddr.peek(int'(dut.u_engine.slot_a) * NW + r * WPR + c);
            wb = ddr.peek(int'(dut.u_engine.slot_b) * NW + r * WPR + c);
            wo = dut.u_bram.mem[r * WPR + c];
            for (int j = 0; j < n_mpw; j++)
              if (mode_of(wo, j) != mode_of(wa, j) && mode_of(wo, j) != mode_of(wb, j)) diff++;
          end
        checks++;
        if (diff > int'(dut.u_engine.mut_modes)) begin
          failures++; $display("offspring has %0d modes from neither parent, %0d mutated", diff, dut.u_engine.mut_modes);
        end
      end
    end
    if (dut.store_start) begin m_store++; last_store_slot <= int'(dut.store_slot); end
    if (dut.adc_start) m_adc++;
    if (dut.u_rate.at_floor) m_floor++;
    if (dut.ins_parent || dut.ins_child) begin
      if (dut.ins_parent) m_insp++; else m_insc++;
      checks++;
      if (int'(dut.ins_fit) != int'(dut.u_adc.n_samples) * level) begin
        failures++; $display("fitness %0d, want %0d x %0d", dut.ins_fit, dut.u_adc.n_samples, level);
      end
      check_slot_vs_shown(int'(dut.ins_slot), "ranked mask");
    end
    if (dut.merge) m_merge++;
    if (dut.u_ranker.busy == 0 && !init_phase && m_merge > 0) begin
      for (int i = 1; i < NPOP; i++)
        if (dut.u_ranker.parent_fit[i] > dut.u_ranker.parent_fit[i-1]) begin
          failures++; checks++; $display("parent list not sorted");
        end
    end
  end

  initial begin
    int c, t_iter0, t_iter1;
    key = 80'h0123456789abcdef0123; iv = 80'h00000000000000000042;
    run = 0; restart_every = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run = 1;
    c = 0;
    while (iteration != 1 && c < 5000000) begin @(posedge clk); #1 c++; end
    first_best = int'(best_fit);
    prev_best = first_best;
    $display("initial population ranked after %0d cycles, best fitness %0d", c, first_best);
    t_iter0 = c;
    while (!done && c < 5000000) begin
      @(posedge clk); #1 c++;
      if (dut.merge) begin
        repeat (NPOP) @(posedge clk);
        #1 c += NPOP;
        checks++;
        if (int'(best_fit) < prev_best) begin failures++; $display("best fitness fell %0d -> %0d", prev_best, best_fit); end
        prev_best = int'(best_fit);
        if (m_merge == 1) t_iter0 = c;
        if (m_merge == 2) t_iter1 = c;
        if (iteration % 5 == 0 && !done) $display("iteration %0d best fitness %0d mutation thr %0d", iteration, best_fit, mut_thr);
      end
    end
    $display("one iteration = %0d cycles; final best fitness %0d (initial %0d)", t_iter1 - t_iter0, best_fit, first_best);
    checks++;
    if (!done) begin failures++; $display("run did not finish"); end
    checks++;
    if (int'(best_fit) < 2 * first_best) begin failures++; $display("no focusing: %0d vs %0d", best_fit, first_best); end
    repeat (4) @(posedge clk);
    check_slot_vs_shown(int'(best_slot), "final mask");
    checks++;
    if (nonuniform != 0) begin failures++; $display("%0d non-uniform mode words", nonuniform); end
    // restart mode
    run = 0;
    repeat (20) @(posedge clk);
    #1 restart_every = 2; run = 1;
    while (repeats < 1 && c < 8000000) begin @(posedge clk); #1 c++; end
    run = 0;
    while (!done && c < 8000000) begin @(posedge clk); #1 c++; end
    // mechanisms
    begin
      string names [13] = '{"random mask", "offspring", "crossover", "mutation", "rate floor",
                            "paced DDR read", "mask store", "DMD frame", "ADC window",
                            "parent ranking", "offspring ranking", "merge", "restart"};
      int counts [13];
      counts = '{m_random, m_offspring, m_xo, m_mut, m_floor, n_reads, m_store, frames, m_adc,
                 m_insp, m_insc, m_merge, int'(repeats)};
      for (int i = 0; i < 13; i++) begin
        checks++;
        $display("mechanism %-18s %0d", names[i], counts[i]);
        if (counts[i] == 0) begin failures++; $display("mechanism %s never happened", names[i]); end
      end
      checks++;
      if (m_copy != 2) begin failures++; $display("final display happened %0d times", m_copy); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

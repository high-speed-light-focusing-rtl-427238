// tb_ga_top_full: the whole design at its default sizes (1024x768 mask,
// 64x64 modes, population 16, paper timers), closed-loop through the DDR,
// ADC and optics models, for one complete GA step: the initial population
// of 16 random masks is shown, measured and ranked, then one iteration of
// 16 offspring is made, shown, measured and merged into the population.
//
// Checks: every ranked mask equals the mask shown on the DMD; each fitness
// is the ADC level times 13 or 14 samples (31 us window of 2.3 us samples);
// modes are uniform; an offspring takes 6144 x 16 cycles (80 ns per 128-bit
// word); the mutation rate of iteration 1 is 2000/2^15; the new population
// is sorted and keeps the best initial mask; and the iteration time is
// printed against the paper's 8 ms (it must be within 8 ms +- 15%).
module tb_ga_top_full;
  import ga_pkg::*;
  localparam int NW = 6144;

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
  logic [9:0] dmd_row;
  int level, frames, nonuniform, n_reads, n_writes;
  int checks = 0, failures = 0;

  ga_top dut (
    .clk, .rst_n, .run, .restart_every, .key, .iv, .done, .init_phase, .iteration, .repeats,
    .mut_thr, .best_fit, .best_slot,
    .app_en, .app_cmd, .app_addr, .app_wdata, .app_rdy, .app_rd_valid, .app_rd_data,
    .adc_cnv, .adc_drdy, .adc_data, .dmd_dvalid, .dmd_data, .dmd_row, .dmd_row_start, .dmd_show);
  ddr_model #(.LAT(4)) ddr (.clk, .app_en, .app_cmd, .app_addr, .app_wdata, .app_rdy,
    .app_rd_valid, .app_rd_data, .n_reads, .n_writes);
  adc_model #(.CONV_CYCLES(100), .HOLD(40)) adc (.clk, .adc_cnv, .level, .adc_drdy, .adc_data);
  optics_model optics (.clk, .dmd_dvalid, .dmd_data, .dmd_row, .dmd_show, .level, .frames, .nonuniform);
  always #5 clk = ~clk;

  int cyc = 0, gen_t0 = 0, t_iter0 = 0, t_iter1 = 0, n_ins = 0, n_off = 0, best_init = 0;
  bit in_gen = 0;

  task automatic check_slot_vs_shown(input int slot);
    int bad;
    bad = 0;
    for (int a = 0; a < NW; a++) if (ddr.peek(slot * NW + a) !== optics.shown_word(a)) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("%0d words of slot %0d differ from the shown mask", bad, slot); end
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (dut.eng_start) begin gen_t0 <= cyc; in_gen <= (dut.eng_mode == GEN_EVOLVE); end
    if (in_gen && !dut.eng_busy && cyc > gen_t0 + 2) begin
      in_gen <= 0; n_off++;
      checks++;
      if (cyc - gen_t0 < NW * 16 || cyc - gen_t0 > NW * 16 + 24) begin
        failures++; $display("offspring took %0d cycles", cyc - gen_t0);
      end
      if (n_off == 1) $display("offspring mask: %0d cycles = %0d ns", cyc - gen_t0, (cyc - gen_t0) * 5);
    end
    if (dut.ins_parent || dut.ins_child) begin
      n_ins++;
      checks += 2;
      if (int'(dut.ins_fit) != int'(dut.u_adc.n_samples) * level) begin
        failures++; $display("fitness %0d, want %0d x %0d", dut.ins_fit, dut.u_adc.n_samples, level);
      end
      if (dut.u_adc.n_samples < 13 || dut.u_adc.n_samples > 14) begin
        failures++; $display("%0d samples per window", dut.u_adc.n_samples);
      end
      check_slot_vs_shown(int'(dut.ins_slot));
    end
    if (dut.ins_parent && t_iter0 == 0 && n_ins == 16) t_iter0 <= cyc;
    if (dut.merge) t_iter1 <= cyc;
  end

  initial begin
    int c;
    key = 80'h0f1e2d3c4b5a69788796; iv = 80'h0000000000000000a5a5;
    run = 0; restart_every = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run = 1;
    c = 0;
    while (iteration != 1 && c < 3000000) begin @(posedge clk); #1 c++; end
    best_init = int'(best_fit);
    checks++;
    if (mut_thr != 15'd2000) begin failures++; $display("iteration 1 rate %0d/32768", mut_thr); end
    $display("initial population ranked after %0d cycles (%0d us), best fitness %0d", c, c / 200, best_init);
    while (iteration == 1 && c < 3000000) begin @(posedge clk); #1 c++; end
    repeat (20) @(posedge clk);
    $display("iteration 1 took %0d cycles = %0d us; best fitness %0d", t_iter1 - t_iter0, (t_iter1 - t_iter0) / 200, best_fit);
    checks++;
    if ((t_iter1 - t_iter0) / 200 < 6800 || (t_iter1 - t_iter0) / 200 > 9200) begin
      failures++; $display("iteration time far from 8 ms");
    end
    checks++;
    if (n_ins != 32 || n_off != 16) begin failures++; $display("%0d masks ranked, %0d offspring", n_ins, n_off); end
    checks++;
    if (int'(best_fit) < best_init) begin failures++; $display("best fitness fell"); end
    for (int i = 1; i < 16; i++) begin
      checks++;
      if (dut.u_ranker.parent_fit[i] > dut.u_ranker.parent_fit[i-1]) begin failures++; $display("not sorted"); end
    end
    checks++;
    if (nonuniform != 0) begin failures++; $display("%0d non-uniform mode words", nonuniform); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

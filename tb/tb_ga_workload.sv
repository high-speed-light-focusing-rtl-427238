// tb_ga_workload: the repeated-focusing workload at the full default size
// (1024x768 mask, 64x64 = 4096 modes, population 16, paper timers), closed
// loop through the DDR, ADC and optics models. The GA restarts every
// RESTART iterations, as in the dynamic-medium mode, which restarts every
// 500; here two passes of RESTART iterations are run to keep the simulation
// to about a minute. run is dropped during the second pass, so that pass
// ends with the copy and display of the best mask and done.
//
// Checks, per iteration: the mutation threshold equals 2000 - 12*(k-1)
// (Eq. 4 numerator over 2^15); the best fitness never falls within a pass;
// the iteration takes 8 ms +- 15%. Per pass: the best fitness at the end is
// above the best of the random initial population (the loop focuses). At
// the restart: repeats counts it, the iteration index and the mutation
// threshold start again. At the end: done is raised, the mask on the DMD
// equals the best parent's mask in DDR, every mode is uniform, and the
// number of frames shown is 2 x (16 + 16 x RESTART) + 1.
module tb_ga_workload;
  import ga_pkg::*;
  localparam int NW      = 6144;
  localparam int RESTART = 5;

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

  // per-iteration checks, taken at each merge
  int cyc = 0, t_last = 0, best_prev = 0, best_init = 0, n_merge = 0;
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (dut.merge) begin
      n_merge++;
      checks += 2;
      if (int'(mut_thr) != 2000 - 12 * (int'(iteration) - 1)) begin
        failures++; $display("iteration %0d: threshold %0d", iteration, mut_thr);
      end
      if (t_last != 0 && ((cyc - t_last) / 200 < 6800 || (cyc - t_last) / 200 > 9200)) begin
        failures++; $display("iteration %0d took %0d us", iteration, (cyc - t_last) / 200);
      end
      t_last <= cyc;
    end
  end
  // best fitness after each merge (sampled once the ranker is done)
  always @(negedge dut.u_ranker.busy) begin
    checks++;
    $display("pass %0d iteration %0d: best fitness %0d", repeats + 1, iteration, best_fit);
    if (int'(best_fit) < best_prev) begin failures++; $display("best fitness fell from %0d", best_prev); end
    best_prev = int'(best_fit);
  end

  task automatic wait_cycles_until_iter1(inout int c);
    while (iteration != 1 && c < 40000000) begin @(posedge clk); #1 c++; end
  endtask

  initial begin
    int c, bad, frames0;
    key = 80'h13579bdf02468ace1357; iv = 80'h00000000000000005a5a;
    run = 0; restart_every = 12'(RESTART);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    frames0 = frames;  // pulses seen before reset took hold are not frames
    run = 1;
    c = 0;
    // pass 1
    wait_cycles_until_iter1(c);
    best_init = int'(best_fit); best_prev = best_init; t_last = cyc;
    $display("pass 1: initial best fitness %0d", best_init);
    while (repeats == 0 && c < 40000000) begin @(posedge clk); #1 c++; end
    run = 0;
    checks++;
    if (best_prev <= best_init) begin failures++; $display("pass 1 did not improve: %0d", best_prev); end
    // restart: a new random population, counters start again
    while (iteration != 0 && c < 40000000) begin @(posedge clk); #1 c++; end
    checks += 2;
    if (repeats != 1) begin failures++; $display("repeats %0d", repeats); end
    if (!init_phase) begin failures++; $display("no initial phase after restart"); end
    wait_cycles_until_iter1(c);
    repeat (4) @(posedge clk);
    checks++;
    if (mut_thr != 15'd2000) begin failures++; $display("threshold after restart %0d", mut_thr); end
    best_init = int'(best_fit); best_prev = best_init; t_last = cyc;
    $display("pass 2: initial best fitness %0d", best_init);
    // pass 2 ends with the final display
    while (!done && c < 40000000) begin @(posedge clk); #1 c++; end
    repeat (4) @(posedge clk);
    checks += 5;
    if (!done) begin failures++; $display("done never rose"); end
    if (best_prev <= best_init) begin failures++; $display("pass 2 did not improve: %0d", best_prev); end
    if (iteration != 12'(RESTART)) begin failures++; $display("ended at iteration %0d", iteration); end
    if (frames - frames0 != 2 * (16 + 16 * RESTART) + 1) begin failures++; $display("%0d frames", frames - frames0); end
    if (nonuniform != 0) begin failures++; $display("%0d non-uniform mode words", nonuniform); end
    bad = 0;
    for (int a = 0; a < NW; a++) if (ddr.peek(int'(best_slot) * NW + a) !== optics.shown_word(a)) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("final display differs from the best mask in %0d words", bad); end
    $display("%0d merges, %0d frames, final best fitness %0d, level on display %0d", n_merge, frames - frames0, best_fit, level);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (25000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

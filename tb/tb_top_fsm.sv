// tb_top_fsm: the top-level state machine with the blocks it commands
// replaced by simple stand-ins that stay busy for a random 5..60 cycles
// after each command. Every command is logged as text; the log must match
// the sequence worked out from the parameters (4 masks per population,
// 3 iterations): CLEAR, then per initial parent GEN(random), LOAD+STORE to
// slot j, ADC, PARENT insert; per offspring GEN(evolve), LOAD+STORE to
// free_slot[j], ADC, CHILD insert; MERGE after each iteration; COPY and
// LOAD of the best mask at the end. Also checked: every command is a single
// cycle on a 50 MHz slot, no block is started while another one the step
// waits for is still busy, at least RANK_WAIT 50 MHz cycles follow each
// insert, the fitness passed on is the ADC result, and the restart mode
// (restart_every = 2) clears the population and counts a repeat.
module tb_top_fsm;
  import ga_pkg::*;
  localparam int NPOP = 4, NITER = 3, RW = 5, SW = 3;
  logic clk = 0, rst_n = 0, ce50, run;
  logic [11:0] restart_every, k;
  logic eng_busy, store_busy, dmd_busy, adc_busy, rank_busy;
  logic [23:0] adc_fitness, ins_fit;
  logic [SW-1:0] free_slot [NPOP];
  logic eng_start, dmd_load, store_start, adc_start, rank_clear, ins_parent, ins_child, merge;
  gen_mode_e eng_mode;
  logic [SW-1:0] store_slot, ins_slot;
  logic init_phase, done;
  logic [15:0] repeats;
  int checks = 0, failures = 0;
  string log_q [$], exp_q [$];

  top_fsm #(.NPOP(NPOP), .NITER(NITER), .RANK_WAIT(RW), .SLOT_W(SW)) dut (.clk, .rst_n, .ce50, .run,
    .restart_every, .eng_busy, .store_busy, .dmd_busy, .adc_busy, .rank_busy, .adc_fitness, .free_slot,
    .eng_start, .eng_mode, .dmd_load, .store_start, .store_slot, .adc_start, .rank_clear,
    .ins_parent, .ins_child, .ins_fit, .ins_slot, .merge, .k, .init_phase, .done, .repeats);
  always #5 clk = ~clk;

  logic [1:0] div = 0;
  always @(posedge clk) div <= div + 1;
  assign ce50 = (div == 2'd3);

  int eb = 0, sb = 0, db = 0, ab = 0, rb = 0, since_ins = 1000, last_slot = 0;
  assign eng_busy = eb > 0; assign store_busy = sb > 0; assign dmd_busy = db > 0;
  assign adc_busy = ab > 0; assign rank_busy = rb > 0;

  always @(posedge clk) if (rst_n) begin
    int n_cmd;
    n_cmd = eng_start + dmd_load + adc_start + rank_clear + ins_parent + ins_child + merge;
    if (n_cmd > 0) begin
      checks++;
      if (!ce50) begin failures++; $display("command off a 50 MHz slot"); end
      if (eng_busy || store_busy || dmd_busy || adc_busy || rank_busy) begin
        failures++; $display("command while a block is busy");
      end
    end
    if (eng_start) begin
      checks++;
      if (since_ins < RW * 4) begin failures++; $display("rank wait only %0d cycles", since_ins); end
    end
    if (rank_clear) log_q.push_back("CLEAR");
    if (eng_start)  log_q.push_back(eng_mode == GEN_RANDOM ? "GENR" : eng_mode == GEN_EVOLVE ? "GENE" : "COPY");
    if (dmd_load && store_start) log_q.push_back($sformatf("SHOW%0d", store_slot));
    else if (dmd_load) log_q.push_back("LOAD");
    else if (store_start) log_q.push_back("STORE");
    if (adc_start)  log_q.push_back("ADC");
    if (ins_parent || ins_child) begin
      log_q.push_back($sformatf("%s%0d", ins_parent ? "P" : "C", ins_slot));
      checks++;
      if (ins_fit != adc_fitness) begin failures++; $display("fitness not passed on"); end
    end
    if (merge) log_q.push_back("MERGE");
    // stand-ins
    eb <= eng_start ? 5 + int'($urandom % 56) : (eb > 0 ? eb - 1 : 0);
    sb <= store_start ? 5 + int'($urandom % 56) : (sb > 0 ? sb - 1 : 0);
    db <= dmd_load ? 5 + int'($urandom % 56) : (db > 0 ? db - 1 : 0);
    ab <= adc_start ? 5 + int'($urandom % 56) : (ab > 0 ? ab - 1 : 0);
    rb <= merge ? 2 : (rb > 0 ? rb - 1 : 0);
    if (adc_start) adc_fitness <= 24'($urandom);
    since_ins <= (ins_parent || ins_child) ? 0 : since_ins + 1;
    if (merge) for (int i = 0; i < NPOP; i++) free_slot[i] <= SW'($urandom);
  end

  task automatic expect_run(input int iters, input bit final_show);
    exp_q.push_back("CLEAR");
    for (int j = 0; j < NPOP; j++) begin
      exp_q.push_back("GENR"); exp_q.push_back($sformatf("SHOW%0d", j));
      exp_q.push_back("ADC"); exp_q.push_back($sformatf("P%0d", j));
    end
    for (int it = 0; it < iters; it++) begin
      for (int j = 0; j < NPOP; j++) begin
        exp_q.push_back("GENE"); exp_q.push_back("SHOW?");
        exp_q.push_back("ADC"); exp_q.push_back("C?");
      end
      exp_q.push_back("MERGE");
    end
    if (final_show) begin exp_q.push_back("COPY"); exp_q.push_back("LOAD"); end
  endtask

  // free_slot is random, so offspring slots are checked as "the slot stored
  // is the slot inserted"
  task automatic compare_logs();
    string last_show;
    checks++;
    if (log_q.size() != exp_q.size()) begin
      failures++; $display("log has %0d entries, want %0d", log_q.size(), exp_q.size());
    end
    for (int i = 0; i < exp_q.size() && i < log_q.size(); i++) begin
      checks++;
      if (exp_q[i] == "SHOW?") begin
        if (log_q[i].substr(0, 3) != "SHOW") begin failures++; $display("entry %0d: %s want SHOW", i, log_q[i]); end
        last_show = log_q[i].substr(4, log_q[i].len() - 1);
      end else if (exp_q[i] == "C?") begin
        if (log_q[i] != {"C", last_show}) begin failures++; $display("entry %0d: %s want C%s", i, log_q[i], last_show); end
      end else if (log_q[i] != exp_q[i]) begin
        failures++; if (failures < 10) $display("entry %0d: %s want %s", i, log_q[i], exp_q[i]);
      end
    end
    log_q.delete(); exp_q.delete();
  endtask

  initial begin
    int c;
    run = 0; restart_every = 0; adc_fitness = 0;
    for (int i = 0; i < NPOP; i++) free_slot[i] = SW'(NPOP + i);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // normal run: NITER iterations then the best mask
    run = 1;
    c = 0;
    while (!done && c < 100000) begin @(posedge clk); #1 c++; end
    checks++;
    if (!done || k != 12'(NITER)) begin failures++; $display("done=%0d k=%0d", done, k); end
    expect_run(NITER, 1);
    compare_logs();
    run = 0;
    repeat (20) @(posedge clk);
    // restart mode: two repeats of 2 iterations, then run falls
    #1 restart_every = 2; run = 1;
    c = 0;
    while (repeats < 2 && c < 100000) begin @(posedge clk); #1 c++; end
    run = 0;
    c = 0;
    while (!done && c < 100000) begin @(posedge clk); #1 c++; end
    checks++;
    if (repeats != 2 || !done) begin failures++; $display("repeats=%0d done=%0d", repeats, done); end
    expect_run(2, 0); expect_run(2, 0); expect_run(2, 1);
    compare_logs();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

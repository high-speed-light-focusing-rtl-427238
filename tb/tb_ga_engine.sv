// tb_ga_engine: drives the GA engine with a 3-band mask (36 rows x 8 words),
// random parents in 32 memory slots and random vectors supplied by the
// testbench. Every consumed random vector is logged; from the log the
// testbench recomputes, independently of the engine, the parent choice and
// the mode-by-mode crossover and mutation, and compares every word written
// to the mask buffer. It also checks that each 16x12-pixel mode is uniform,
// the number of vectors consumed, the crossover/mutation statistics and
// the timing: 1 cycle per word for random masks and 16 cycles per word
// (80 ns at 200 MHz) for offspring when parent reads are paced at 50 MHz
// with a 20 ns read.
module tb_ga_engine;
  import ga_pkg::*;
  localparam int ROWS = 36, WPR = 8, SEGR = 12, MPIX = 16, NPOP = 16, SLOT_W = 5;
  localparam int NW = ROWS * WPR, AW = $clog2(NW), MPW = 8;

  logic clk = 0, rst_n = 0;
  logic start, busy, rnd_ready, rnd_en;
  gen_mode_e mode;
  logic [14:0] thr;
  logic [SLOT_W-1:0] parent_slot [NPOP];
  word_t rnd;
  logic rd_req, rd_ack, rd_valid;
  logic [SLOT_W-1:0] rd_slot, slot_a, slot_b;
  logic [AW-1:0] rd_word, bram_addr;
  word_t rd_data, bram_din;
  logic bram_we;
  logic [31:0] xo_modes, mut_modes;
  int checks = 0, failures = 0;

  ga_engine #(.ROWS(ROWS), .WPR(WPR), .SEGR(SEGR), .MPIX(MPIX), .NPOP(NPOP), .SLOT_W(SLOT_W)) dut (
    .clk, .rst_n, .start, .mode, .thr, .parent_slot, .busy, .rnd, .rnd_ready, .rnd_en,
    .rd_req, .rd_slot, .rd_word, .rd_ack, .rd_valid, .rd_data,
    .bram_we, .bram_addr, .bram_din, .slot_a, .slot_b, .xo_modes, .mut_modes);
  always #5 clk = ~clk;

  word_t mem [32][NW];
  word_t outm [NW];
  word_t vlog [$];
  logic  rnd_random;   // throttle rnd_ready
  // loop bounds as variables keep the simulator from unrolling the loops
  int n_rows = ROWS, n_wpr = WPR, n_mpw = MPW, n_mpix = MPIX, n_slots = 32;

  // random source
  always @(posedge clk) begin
    if (rnd_en && rnd_ready) begin
      vlog.push_back(rnd);
      rnd <= {$urandom, $urandom, $urandom, $urandom};
    end
    rnd_ready <= rnd_random ? (($urandom % 3) != 0) : 1'b1;
  end

  // memory: a read is taken on a 50 MHz slot and answered 5 cycles later
  logic [1:0] div = 0;
  int pend = 0;
  logic [SLOT_W-1:0] p_slot; logic [AW-1:0] p_word;
  assign rd_ack = rd_req && (div == 2'd3) && (pend == 0);
  always @(posedge clk) begin
    div <= div + 1;
    rd_valid <= 1'b0;
    if (rd_ack) begin pend <= 5; p_slot <= rd_slot; p_word <= rd_word; end
    else if (pend > 1) pend <= pend - 1;
    else if (pend == 1) begin pend <= 0; rd_valid <= 1'b1; rd_data <= mem[p_slot][p_word]; end
    if (bram_we) outm[bram_addr] <= bram_din;
  end

  function automatic logic mode_bit(word_t w, int j);
    return w[j*MPIX];
  endfunction

  task automatic run_mask(input gen_mode_e m, input logic [14:0] t, output int cycles);
    int vi, base_v, ra, rb, sa, sb, exp_xo, exp_mut;
    logic sel, mut, bit_e;
    word_t w;
    vlog.delete();
    mode = m; thr = t;
    @(posedge clk); #1 start = 1;
    @(posedge clk); #1 start = 0;
    cycles = 1;
    while (busy) begin @(posedge clk); #1 cycles++; end
    // reference
    base_v = (m == GEN_RANDOM) ? 0 : 1;
    ra = 0; rb = 0;
    if (m != GEN_RANDOM) begin
      ra = int'(vlog[0][2:0]); rb = int'(vlog[0][5:3]);
      if (rb == ra) rb = (ra + 1) % 8;
    end
    sa = (m == GEN_COPY) ? int'(parent_slot[0]) : int'(parent_slot[ra]);
    sb = int'(parent_slot[rb]);
    if (m != GEN_RANDOM) begin
      checks++;
      if (slot_a != 5'(sa) || (m == GEN_EVOLVE && slot_b != 5'(sb))) begin
        failures++; $display("parent slots %0d %0d want %0d %0d", slot_a, slot_b, sa, sb);
      end
    end
    checks++;
    if (vlog.size() != ((m == GEN_COPY) ? 1 : base_v + (ROWS / SEGR) * WPR)) begin
      failures++; $display("consumed %0d vectors", vlog.size());
    end
    exp_xo = 0; exp_mut = 0;
    for (int r = 0; r < n_rows; r++)
      for (int c = 0; c < n_wpr; c++) begin
        for (int j = 0; j < n_mpw; j++) begin
          vi = base_v + (r / SEGR) * WPR + c;
          if (m == GEN_COPY) begin sel = 0; mut = 0; end
          else begin
            sel = vlog[vi][j*16 + 15];
            mut = vlog[vi][j*16 +: 15] < t;
          end
          if (r % SEGR == 0 && m == GEN_EVOLVE) begin exp_xo += sel; exp_mut += mut; end
          for (int p = 0; p < n_mpix; p++) begin
            if (m == GEN_RANDOM) bit_e = sel;
            else bit_e = (sel ? mem[sb][r*WPR + c][j*MPIX + p] : mem[sa][r*WPR + c][j*MPIX + p]) ^ mut;
            w[j*MPIX + p] = bit_e;
          end
        end
        checks++;
        if (outm[r*WPR + c] !== w) begin
          failures++;
          if (failures < 8) $display("mode %0d word r=%0d c=%0d got %h want %h", m, r, c, outm[r*WPR+c], w);
        end
        // every mode uniform over its pixels and rows
        for (int j = 0; j < n_mpw; j++) begin
          checks++;
          if (outm[r*WPR + c][j*MPIX +: MPIX] != {MPIX{mode_bit(outm[(r - r % SEGR)*WPR + c], j)}}) begin
            failures++; $display("mode not uniform r=%0d c=%0d j=%0d", r, c, j);
          end
        end
      end
    if (m == GEN_EVOLVE) begin
      checks++;
      if (xo_modes != 32'(exp_xo) || mut_modes != 32'(exp_mut)) begin
        failures++; $display("stats xo %0d/%0d mut %0d/%0d", xo_modes, exp_xo, mut_modes, exp_mut);
      end
    end
  endtask

  initial begin
    int cyc, perm [32];
    start = 0; mode = GEN_RANDOM; thr = 0; rnd_random = 0;
    rnd = {$urandom, $urandom, $urandom, $urandom};
    for (int i = 0; i < 32; i++) perm[i] = i;
    perm.shuffle();
    for (int i = 0; i < NPOP; i++) parent_slot[i] = 5'(perm[i]);
    // parents: uniform random modes
    for (int s = 0; s < n_slots; s++)
      for (int r = 0; r < n_rows; r++)
        for (int c = 0; c < n_wpr; c++)
          for (int j = 0; j < n_mpw; j++) begin
            logic b;
            if (r % SEGR == 0) b = 1'($urandom); else b = mem[s][(r - r % SEGR)*WPR + c][j*MPIX];
            mem[s][r*WPR + c][j*MPIX +: MPIX] = {MPIX{b}};
          end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run_mask(GEN_RANDOM, 15'd0, cyc);
    checks++;
    if (cyc < NW || cyc > NW + 2) begin failures++; $display("random mask took %0d cycles", cyc); end
    run_mask(GEN_EVOLVE, 15'd2000, cyc);
    checks++;
    if (cyc < NW * 16 - 4 || cyc > NW * 16 + 8) begin failures++; $display("offspring took %0d cycles, want ~%0d", cyc, NW*16); end
    $display("offspring mask: %0d cycles for %0d words", cyc, NW);
    run_mask(GEN_EVOLVE, 15'd393, cyc);
    run_mask(GEN_EVOLVE, 15'd32767, cyc);
    run_mask(GEN_EVOLVE, 15'd0, cyc);
    run_mask(GEN_COPY, 15'd2000, cyc);
    rnd_random = 1;
    run_mask(GEN_RANDOM, 15'd0, cyc);
    for (int n = 0; n < 3; n++) begin
      perm.shuffle();
      for (int i = 0; i < NPOP; i++) parent_slot[i] = 5'(perm[i]);
      run_mask(GEN_EVOLVE, 15'($urandom % 4000), cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_ga_ranker: fills the parent list with 16 random fitness values, then
// runs 30 GA iterations of 16 offspring each. After every insertion the
// sorted lists are compared with a reference kept by the testbench (a
// plain array re-sorted with a stable sort); after every merge the new
// parent list must be the better half of the old parents plus the better
// half of the offspring, sorted, and the free list must hold exactly the
// slots of the discarded masks. Duplicate fitness values are frequent so
// that ties are exercised; slots must stay a permutation of 0..31.
module tb_ga_ranker;
  localparam int NPOP = 16, FW = 24, SW = 5, HALF = NPOP / 2;
  logic clk = 0, rst_n = 0;
  logic clear, ins_parent, ins_child, merge, busy;
  logic [FW-1:0] ins_fit;
  logic [SW-1:0] ins_slot;
  logic [SW-1:0] parent_slot [NPOP];
  logic [FW-1:0] parent_fit [NPOP];
  logic [SW-1:0] free_slot [NPOP];
  logic [4:0] n_parents, n_children;
  int checks = 0, failures = 0;

  ga_ranker #(.NPOP(NPOP), .FW(FW), .SLOT_W(SW)) dut (.clk, .rst_n, .clear, .ins_parent, .ins_child,
    .ins_fit, .ins_slot, .merge, .busy, .parent_slot, .parent_fit, .free_slot, .n_parents, .n_children);
  always #5 clk = ~clk;

  typedef struct { int fit; int slot; int seq; } ent_t;
  ent_t par [$], chi [$];
  int seq = 0;

  function automatic void ssort(ref ent_t q [$]);  // stable: fit desc, then insertion order
    for (int i = 1; i < q.size(); i++)
      for (int j = i; j > 0; j--)
        if (q[j].fit > q[j-1].fit || (q[j].fit == q[j-1].fit && q[j].seq < q[j-1].seq)) begin
          ent_t t; t = q[j]; q[j] = q[j-1]; q[j-1] = t;
        end
  endfunction

  task automatic pulse_ins(input bit parent, input int fit, input int slot);
    ent_t e;
    e.fit = fit; e.slot = slot; e.seq = seq++;
    ins_fit = FW'(fit); ins_slot = SW'(slot);
    ins_parent = parent; ins_child = !parent;
    @(posedge clk); #1 ins_parent = 0; ins_child = 0;
    if (parent) begin par.push_back(e); ssort(par); end
    else begin chi.push_back(e); ssort(chi); end
  endtask

  task automatic compare_parents(input string tag);
    checks++;
    if (int'(n_parents) != par.size()) begin failures++; $display("%s: n_parents %0d want %0d", tag, n_parents, par.size()); end
    for (int i = 0; i < par.size(); i++) begin
      checks++;
      if (int'(parent_fit[i]) != par[i].fit || int'(parent_slot[i]) != par[i].slot) begin
        failures++;
        if (failures < 10) $display("%s: rank %0d got (%0d,%0d) want (%0d,%0d)", tag, i,
                                    parent_fit[i], parent_slot[i], par[i].fit, par[i].slot);
      end
    end
  endtask

  initial begin
    int fr [$];
    int wait_c;
    ent_t np [$];
    bit seen [32];
    clear = 0; ins_parent = 0; ins_child = 0; merge = 0; ins_fit = 0; ins_slot = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    clear = 1; @(posedge clk); #1 clear = 0;
    for (int i = 0; i < NPOP; i++) begin
      checks++;
      if (int'(free_slot[i]) != NPOP + i) begin failures++; $display("initial free slot %0d", i); end
    end
    for (int i = 0; i < NPOP; i++) begin
      pulse_ins(1, int'($urandom % 40), i);
      compare_parents("init");
    end
    for (int it = 0; it < 30; it++) begin
      fr.delete();
      for (int i = 0; i < NPOP; i++) fr.push_back(int'(free_slot[i]));
      for (int i = 0; i < NPOP; i++) begin
        pulse_ins(0, int'($urandom % 40) + it, fr[i]);
        checks++;
        if (int'(n_children) != i + 1) begin failures++; $display("n_children %0d", n_children); end
      end
      // reference merge
      np.delete();
      for (int i = 0; i < HALF; i++) np.push_back(par[i]);
      for (int i = 0; i < HALF; i++) begin ent_t e; e = chi[i]; e.seq = seq++; np.push_back(e); end
      ssort(np);
      fr.delete();
      for (int i = 0; i < HALF; i++) fr.push_back(par[HALF + i].slot);
      for (int i = 0; i < HALF; i++) fr.push_back(chi[HALF + i].slot);
      merge = 1; @(posedge clk); #1 merge = 0;
      wait_c = 0;
      while (busy) begin @(posedge clk); #1 wait_c++; end
      checks++;
      if (wait_c != HALF) begin failures++; $display("merge busy %0d cycles", wait_c); end
      par = np; chi.delete();
      compare_parents("merge");
      foreach (seen[s]) seen[s] = 0;
      for (int i = 0; i < NPOP; i++) begin
        checks++;
        if (int'(free_slot[i]) != fr[i]) begin failures++; $display("free slot %0d got %0d want %0d", i, free_slot[i], fr[i]); end
        seen[free_slot[i]] = 1; seen[parent_slot[i]] = 1;
      end
      checks++;
      if (seen.sum() with (int'(item)) != 32) begin failures++; $display("slots are not a permutation"); end
      checks++;
      if (n_children != 0) begin failures++; $display("offspring list not cleared"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

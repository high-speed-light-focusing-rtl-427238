// ga_ranker: ranking and replacement of the GA population.
//
// The masks live in 2*NPOP DDR slots. The ranker keeps two lists of
// (fitness, slot) pairs sorted best first: the parents of the current
// population and the offspring measured so far in this iteration. A
// measured mask is put into its list by a one-cycle sorted insertion (ties go
// behind the entries already there). When all offspring of an iteration are
// ranked, merge forms the next population: the better half of the parents
// and the better half of the offspring, sorted again. The slots of the worse
// half of both lists become the free list, and offspring j of the next
// iteration is written to free_slot[j].
//
// Interface (all commands are one-cycle pulses, at most one per cycle):
//   clear       empty both lists; free_slot[j] = NPOP + j, so the initial
//               parents use slots 0..NPOP-1 and the first offspring the rest;
//   ins_parent  insert (ins_fit, ins_slot) into the parent list;
//   ins_child   insert (ins_fit, ins_slot) into the offspring list;
//   merge       replace the parents as above; busy for the NPOP/2 cycles after the merge pulse.
// parent_slot/parent_fit give the parents by rank (index 0 is best).
//
// From the paper: ranking by measured intensity, and the better half of the
// offspring replacing the worse half of the parents. This design's choices:
// the slot bookkeeping, insertion sorting and tie order.
module ga_ranker
  import ga_pkg::*;
#(
  parameter int unsigned NPOP   = POP,
  parameter int unsigned FW     = FIT_W,
  parameter int unsigned SLOT_W = $clog2(2*POP),
  localparam int unsigned HALF  = NPOP / 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              ins_parent,
  input  logic              ins_child,
  input  logic [FW-1:0]     ins_fit,
  input  logic [SLOT_W-1:0] ins_slot,
  input  logic              merge,
  output logic              busy,
  output logic [SLOT_W-1:0] parent_slot [NPOP],
  output logic [FW-1:0]     parent_fit  [NPOP],
  output logic [SLOT_W-1:0] free_slot   [NPOP],
  output logic [$clog2(NPOP+1)-1:0] n_parents,
  output logic [$clog2(NPOP+1)-1:0] n_children
);

  typedef struct packed {
    logic              valid;
    logic [FW-1:0]     fit;
    logic [SLOT_W-1:0] slot;
  } entry_t;

  entry_t par_q [NPOP];
  entry_t chi_q [NPOP];
  logic   merging_q;
  logic [$clog2(HALF+1)-1:0] mstep_q;

  // Sorted insertion of one entry into one list, dropping the last entry.
  entry_t ins_e;
  logic   ins_to_par;
  entry_t src   [NPOP];
  entry_t dst   [NPOP];

  always_comb begin
    logic [NPOP-1:0] ahead;  // entry i stays ahead of the new one
    int unsigned     pos;
    if (merging_q) begin
      ins_e      = chi_q[mstep_q];
      ins_to_par = 1'b1;
    end else begin
      ins_e      = '{valid: 1'b1, fit: ins_fit, slot: ins_slot};
      ins_to_par = ins_parent;
    end
    src = ins_to_par ? par_q : chi_q;
    pos = 0;
    for (int unsigned i = 0; i < NPOP; i++) begin
      ahead[i] = src[i].valid && (src[i].fit >= ins_e.fit);
      if (ahead[i]) pos = i + 1;
    end
    for (int unsigned i = 0; i < NPOP; i++) begin
      if (i < pos)       dst[i] = src[i];
      else if (i == pos) dst[i] = ins_e;
      else               dst[i] = src[i-1];
    end
  end

  assign busy = merging_q;

  always_comb begin
    n_parents  = '0;
    n_children = '0;
    for (int unsigned i = 0; i < NPOP; i++) begin
      parent_slot[i] = par_q[i].slot;
      parent_fit[i]  = par_q[i].fit;
      n_parents      = n_parents  + par_q[i].valid;
      n_children     = n_children + chi_q[i].valid;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      merging_q <= 1'b0;
      mstep_q   <= '0;
      for (int unsigned i = 0; i < NPOP; i++) begin
        par_q[i]     <= '0;
        chi_q[i]     <= '0;
        free_slot[i] <= SLOT_W'(NPOP + i);
      end
    end else if (clear) begin
      merging_q <= 1'b0;
      for (int unsigned i = 0; i < NPOP; i++) begin
        par_q[i]     <= '0;
        chi_q[i]     <= '0;
        free_slot[i] <= SLOT_W'(NPOP + i);
      end
    end else if (merging_q) begin
      // insert the better half of the offspring, one per cycle
      par_q <= dst;
      if (32'(mstep_q) == HALF - 1) begin
        merging_q <= 1'b0;
        for (int unsigned i = 0; i < NPOP; i++) chi_q[i] <= '0;
      end
      mstep_q <= mstep_q + 1'b1;
    end else if (merge) begin
      // worse half of parents and offspring give their slots back
      for (int unsigned i = 0; i < HALF; i++) begin
        free_slot[i]        <= par_q[HALF + i].slot;
        free_slot[HALF + i] <= chi_q[HALF + i].slot;
        par_q[HALF + i]     <= '0;
      end
      merging_q <= 1'b1;
      mstep_q   <= '0;
    end else if (ins_parent) begin
      par_q <= dst;
    end else if (ins_child) begin
      chi_q <= dst;
    end
  end

endmodule

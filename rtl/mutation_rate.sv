// mutation_rate: the linearly decaying mutation rate of Eq. (4).
//
//   R(k) = (KAPPA_START - (k-1)*TAU) / 2^TH_W   while that exceeds R_end,
//   R(k) = R_END_NUM / 2^TH_W                    afterwards.
//
// The rate leaves the module as its numerator thr over 2^TH_W, so a mode is
// mutated when a uniform TH_W-bit random number is below thr. The GA engine
// makes that comparison. With the defaults (2000, 12, 2^15) the rate starts at
// 0.061 and reaches the floor 0.012 at iteration 135.
//
// Interface: k is the 1-based GA iteration index; thr and at_floor are
// registered and follow k one cycle later. k = 0 is treated like k = 1.
//
// The constants and the formula follow the paper. The floor numerator 393
// (0.012 * 2^15 rounded down) and the one-cycle register are this design's
// choices.
module mutation_rate
  import ga_pkg::*;
#(
  parameter int unsigned KAPPA = KAPPA_START,
  parameter int unsigned DECAY = TAU,
  parameter int unsigned R_END = R_END_NUM,
  parameter int unsigned THW   = TH_W,
  parameter int unsigned K_W   = 12
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [K_W-1:0] k,
  output logic [THW-1:0] thr,
  output logic           at_floor
);

  logic [31:0] dec, num;
  logic        floor_hit;

  always_comb begin
    dec       = (k == '0) ? 32'd0 : 32'(k - 1'b1) * DECAY;
    floor_hit = (dec >= KAPPA) || ((KAPPA - dec) <= R_END);
    num       = floor_hit ? R_END : (KAPPA - dec);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      thr      <= THW'(KAPPA);
      at_floor <= 1'b0;
    end else begin
      thr      <= num[THW-1:0];
      at_floor <= floor_hit;
    end
  end

endmodule

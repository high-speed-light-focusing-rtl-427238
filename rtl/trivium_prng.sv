// trivium_prng: Trivium stream cipher used as the random-number source of the
// GA (initial masks, parent selection, crossover and mutation decisions).
//
// Trivium keeps a 288-bit state in three shift registers (93, 84 and 111
// bits). Each round emits one key-stream bit and shifts each register by one
// with a nonlinear feedback taken from the other registers. This module
// unrolls BITS rounds so that a whole BITS-bit random vector is available
// every clock cycle; with the default BITS = 128 that is one 128-bit vector
// per 200 MHz cycle, the rate the GA needs for one 128-bit mask word.
//
// Interface: while rst_n is low the state is loaded from key/iv in the
// standard Trivium way (key in s1..s80, iv in s94..s173, s286..s288 = 1).
// After reset the module runs the standard 4*288 = 1152 blank rounds
// (ceil(1152/BITS) cycles) and then raises ready. rnd holds the next BITS
// key-stream bits (rnd[0] first); a cycle with ready && en consumes them and
// the next vector is shown in the following cycle.
//
// The paper names Trivium as its random source; the unrolling width,
// key/IV ports and warm-up handling are this design's choices.
module trivium_prng #(
  parameter int unsigned BITS = 128
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [79:0]     key,
  input  logic [79:0]     iv,
  input  logic            en,
  output logic            ready,
  output logic [BITS-1:0] rnd
);

  localparam int unsigned WARM_CYCLES = (1152 + BITS - 1) / BITS;

  // s[1] .. s[288] as in the cipher's specification; s[0] unused.
  logic [288:0] s_q, s_next;
  logic [$clog2(WARM_CYCLES+1)-1:0] warm_q;

  always_comb begin
    logic [288:0] s;
    logic t1, t2, t3;
    s   = s_q;
    rnd = '0;
    for (int unsigned r = 0; r < BITS; r++) begin
      t1 = s[66] ^ s[93];
      t2 = s[162] ^ s[177];
      t3 = s[243] ^ s[288];
      rnd[r] = t1 ^ t2 ^ t3;
      t1 = t1 ^ (s[91] & s[92]) ^ s[171];
      t2 = t2 ^ (s[175] & s[176]) ^ s[264];
      t3 = t3 ^ (s[286] & s[287]) ^ s[69];
      s[93:2]    = s[92:1];    s[1]   = t3;
      s[177:95]  = s[176:94];  s[94]  = t1;
      s[288:179] = s[287:178]; s[178] = t2;
    end
    s_next = s;
  end

  assign ready = (warm_q == WARM_CYCLES[$bits(warm_q)-1:0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_q          <= '0;
      s_q[80:1]    <= key;
      s_q[173:94]  <= iv;
      s_q[288:286] <= 3'b111;
      warm_q       <= '0;
    end else if (!ready) begin
      s_q    <= s_next;
      warm_q <= warm_q + 1'b1;
    end else if (en) begin
      s_q <= s_next;
    end
  end

endmodule

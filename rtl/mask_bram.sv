// mask_bram: dual-port block RAM holding one DMD mask (1024x768 pixels as
// 6144 words of 128 bits).
//
// Port A reads and writes: the GA engine writes each new mask word through
// it, and the DDR interface reads the finished mask back through it to store
// it in DDR memory. Port B only reads: the DMD interface streams the mask to
// the DMD controller through it. Both ports work in the same clock, with one
// cycle of read latency. Port A is read-first: a read and a write to the same
// address in one cycle return the old word.
//
// That the buffer is dual-ported and holds one full mask follows the paper;
// the port roles, latency and read-first behaviour are this design's choices.
module mask_bram #(
  parameter int unsigned DEPTH = 6144,
  parameter int unsigned W     = 128,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  // port A: read/write
  input  logic          en_a,
  input  logic          we_a,
  input  logic [AW-1:0] addr_a,
  input  logic [W-1:0]  din_a,
  output logic [W-1:0]  dout_a,
  // port B: read
  input  logic          en_b,
  input  logic [AW-1:0] addr_b,
  output logic [W-1:0]  dout_b
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en_a) begin
      dout_a <= mem[addr_a];
      if (we_a) mem[addr_a] <= din_a;
    end
  end

  always_ff @(posedge clk) begin
    if (en_b) dout_b <= mem[addr_b];
  end

endmodule

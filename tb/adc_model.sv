// adc_model: behavioural model of the external 10-bit ADC. CONV_CYCLES
// after each adc_cnv pulse it puts the conversion of the input level on
// adc_data and holds adc_drdy high for HOLD cycles. The level is an integer
// 0..1023 (0..3.3 V); NOISE adds a uniform error of +-NOISE codes, clipped.
module adc_model #(
  parameter int CONV_CYCLES = 40,
  parameter int HOLD        = 20,
  parameter int NOISE       = 0
) (
  input  logic       clk,
  input  logic       adc_cnv,
  input  int         level,
  output logic       adc_drdy,
  output logic [9:0] adc_data
);
  int cnt = -1, hold = 0;
  initial begin adc_drdy = 0; adc_data = 0; end
  always @(posedge clk) begin
    int v;
    if (adc_cnv) cnt <= CONV_CYCLES;
    else if (cnt > 0) cnt <= cnt - 1;
    if (cnt == 1) begin
      v = level;
      if (NOISE > 0) v = v + int'($urandom % (2 * NOISE + 1)) - NOISE;
      if (v < 0) v = 0;
      if (v > 1023) v = 1023;
      adc_data <= 10'(v);
      adc_drdy <= 1'b1;
      hold <= HOLD;
    end else if (hold > 1) hold <= hold - 1;
    else if (hold == 1) begin hold <= 0; adc_drdy <= 1'b0; end
  end
endmodule

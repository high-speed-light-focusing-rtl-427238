// adc_interface: reads the photodetector intensity from the external ADC and
// accumulates it into the fitness of the mask on display.
//
// The ADC converts continuously: every SAMPLE_CYCLES clock cycles
// (2.3 us at 200 MHz) this module pulses adc_cnv for one cycle. The ADC
// answers by raising adc_drdy with a 10-bit result on adc_data, held while
// adc_drdy is high. adc_drdy comes from outside the clock domain, so it
// passes through a two-stage synchroniser, and the data is taken on the
// synchronised rising edge. After start, every sample whose edge falls
// within the next WINDOW_CYCLES cycles (31 us) is added up; at the end of
// the window fitness holds the sum and n_samples the number of samples, and
// busy falls. With the defaults a window holds 13 or 14 samples.
//
// From the paper: 10-bit data every 2.3 us, accumulated over 31 us. This
// design's choices: the convert/data-ready handshake, the synchroniser and
// summing instead of averaging (the ranking only compares values).
module adc_interface
  import ga_pkg::*;
#(
  parameter int unsigned SAMPLE_CYCLES = 460,
  parameter int unsigned WINDOW_CYCLES = 6200,
  parameter int unsigned DATA_W        = 10,
  parameter int unsigned ACC_W         = FIT_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // external ADC
  output logic              adc_cnv,
  input  logic              adc_drdy,
  input  logic [DATA_W-1:0] adc_data,
  // accumulation
  input  logic              start,
  output logic              busy,
  output logic [ACC_W-1:0]  fitness,
  output logic [7:0]        n_samples,
  output logic [DATA_W-1:0] last_sample
);

  logic [$clog2(SAMPLE_CYCLES)-1:0]   cnv_cnt_q;
  logic [$clog2(WINDOW_CYCLES+1)-1:0] win_q;
  logic [2:0]                         drdy_sync_q;
  logic                               sample_edge;

  assign sample_edge = drdy_sync_q[1] && !drdy_sync_q[2];
  assign busy        = (win_q != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnv_cnt_q   <= '0;
      adc_cnv     <= 1'b0;
      drdy_sync_q <= '0;
      win_q       <= '0;
      fitness     <= '0;
      n_samples   <= '0;
      last_sample <= '0;
    end else begin
      // free-running conversion clock
      adc_cnv <= (cnv_cnt_q == '0);
      cnv_cnt_q <= (32'(cnv_cnt_q) == SAMPLE_CYCLES - 1) ? '0 : cnv_cnt_q + 1'b1;
      drdy_sync_q <= {drdy_sync_q[1:0], adc_drdy};
      if (sample_edge) last_sample <= adc_data;
      // accumulation window
      if (start && !busy) begin
        win_q     <= ($bits(win_q))'(WINDOW_CYCLES);
        fitness   <= '0;
        n_samples <= '0;
      end else if (busy) begin
        win_q <= win_q - 1'b1;
        if (sample_edge) begin
          fitness   <= fitness + ACC_W'(adc_data);
          n_samples <= n_samples + 1'b1;
        end
      end
    end
  end

endmodule

// tb_adc_interface: the ADC interface with the ADC model at the paper's
// rates (2.3 us sampling = 460 cycles, 31 us window = 6200 cycles). The
// testbench logs the time and value of every sample the model delivers and
// sums, for each of 8 windows started at random times, the samples whose
// data-ready edge lies inside the window (edge at cycle c is counted when
// start_cycle - 1 <= c <= start_cycle + WINDOW - 2, given the two-stage
// synchroniser's delay). It checks sum, count (13 or 14), the window
// length and the conversion pulse period.
module tb_adc_interface;
  localparam int SAMPLE = 460, WINDOW = 6200;
  logic clk = 0, rst_n = 0;
  logic adc_cnv, adc_drdy, start, busy;
  logic [9:0] adc_data, last_sample;
  logic [23:0] fitness;
  logic [7:0] n_samples;
  int level = 0;
  int checks = 0, failures = 0;
  int cyc = 0, last_cnv = -1;
  int edge_t [$], edge_v [$];
  logic drdy_d = 0;

  adc_interface #(.SAMPLE_CYCLES(SAMPLE), .WINDOW_CYCLES(WINDOW)) dut (.clk, .rst_n, .adc_cnv,
    .adc_drdy, .adc_data, .start, .busy, .fitness, .n_samples, .last_sample);
  adc_model #(.CONV_CYCLES(37), .HOLD(25)) adc (.clk, .adc_cnv, .level, .adc_drdy, .adc_data);
  always #5 clk = ~clk;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    level <= int'($urandom % 1024);
    drdy_d <= adc_drdy;
    if (adc_drdy && !drdy_d) begin edge_t.push_back(cyc); edge_v.push_back(int'(adc_data)); end
    if (rst_n && adc_cnv) begin
      if (last_cnv >= 0) begin
        checks++;
        if (cyc - last_cnv != SAMPLE) begin failures++; $display("cnv period %0d", cyc - last_cnv); end
      end
      last_cnv <= cyc;
    end
  end

  initial begin
    int s, exp_sum, exp_n, len;
    start = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 8; n++) begin
      repeat (int'($urandom % 700) + 1) @(posedge clk);
      #1 start = 1;
      s = cyc;
      @(posedge clk); #1 start = 0;
      len = 1;
      while (busy) begin @(posedge clk); #1 len++; end
      repeat (5) @(posedge clk);
      exp_sum = 0; exp_n = 0;
      foreach (edge_t[i])
        if (edge_t[i] >= s - 1 && edge_t[i] <= s + WINDOW - 2) begin exp_sum += edge_v[i]; exp_n++; end
      checks += 3;
      if (int'(fitness) != exp_sum || int'(n_samples) != exp_n) begin
        failures++; $display("window %0d: sum %0d/%0d n %0d/%0d", n, fitness, exp_sum, n_samples, exp_n);
      end
      if (exp_n < 13 || exp_n > 14) begin failures++; $display("%0d samples in 31 us", exp_n); end
      if (len != WINDOW + 1) begin failures++; $display("window %0d cycles", len); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (70000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

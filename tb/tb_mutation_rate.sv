// tb_mutation_rate: checks Eq. (4) for k = 0 .. 400 against the formula
// evaluated in real arithmetic: R = (2000 - (k-1)*12)/2^15 while above
// R_end = 0.012, else R_end. The numerator must equal R*2^15 for the
// decaying part and floor(0.012*2^15) on the floor, with the floor first
// reached at iteration 135, and the initial rate must round to 0.061.
module tb_mutation_rate;
  logic clk = 0, rst_n = 0;
  logic [11:0] k;
  logic [14:0] thr;
  logic at_floor;
  int checks = 0, failures = 0;
  int first_floor = -1;

  mutation_rate dut (.clk, .rst_n, .k, .thr, .at_floor);
  always #5 clk = ~clk;

  initial begin
    real r, r0, rend;
    int exp_thr;
    k = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    rend = 0.012;
    for (int kk = 0; kk <= 400; kk++) begin
      k = 12'(kk);
      @(posedge clk); #1;
      r = (2000.0 - 12.0 * ((kk == 0 ? 1 : kk) - 1)) / 32768.0;
      if (r > rend) exp_thr = int'(r * 32768.0);
      else          exp_thr = int'($floor(rend * 32768.0));
      checks++;
      if (int'(thr) != exp_thr || at_floor != (r <= rend)) begin
        failures++;
        $display("k=%0d thr=%0d want %0d floor=%0d", kk, thr, exp_thr, at_floor);
      end
      if (at_floor && first_floor < 0) first_floor = kk;
      if (kk == 1) begin
        r0 = real'(thr) / 32768.0;
        checks++;
        if (r0 < 0.0605 || r0 >= 0.0615) begin failures++; $display("R0 = %f", r0); end
      end
    end
    checks++;
    if (first_floor != 135) begin failures++; $display("floor reached at %0d", first_floor); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

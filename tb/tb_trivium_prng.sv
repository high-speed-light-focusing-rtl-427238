// tb_trivium_prng: checks the 128-bit-per-cycle Trivium generator against a
// one-round-at-a-time reference written from the cipher's specification
// (three registers of 93, 84 and 111 bits kept as separate variables).
// It checks the warm-up length (9 cycles) and 40 consecutive vectors, with
// gaps where en is low, for two key/IV pairs.
module tb_trivium_prng;
  logic clk = 0, rst_n = 0;
  logic [79:0] key, iv;
  logic en, ready;
  logic [127:0] rnd;
  int checks = 0, failures = 0;

  trivium_prng #(.BITS(128)) dut (.clk, .rst_n, .key, .iv, .en, .ready, .rnd);
  always #5 clk = ~clk;

  // reference: registers A (93), B (84), C (111); index 1 = first cell
  logic [1:93]  ra;
  logic [1:84]  rb;
  logic [1:111] rc;
  function automatic logic ref_round();
    logic t1, t2, t3, z;
    t1 = ra[66] ^ ra[93];
    t2 = rb[69] ^ rb[84];
    t3 = rc[66] ^ rc[111];
    z  = t1 ^ t2 ^ t3;
    t1 = t1 ^ (ra[91] & ra[92]) ^ rb[78];
    t2 = t2 ^ (rb[82] & rb[83]) ^ rc[87];
    t3 = t3 ^ (rc[109] & rc[110]) ^ ra[69];
    ra = {t3, ra[1:92]};
    rb = {t1, rb[1:83]};
    rc = {t2, rc[1:110]};
    return z;
  endfunction

  task automatic run_pair(input logic [79:0] k, input logic [79:0] v);
    logic [127:0] exp_v;
    int waited;
    key = k; iv = v; en = 0;
    rst_n = 0;
    @(posedge clk); @(posedge clk);
    #1 rst_n = 1;
    ra = '0; rb = '0; rc = '0;
    for (int i = 0; i < 80; i++) begin ra[i+1] = k[i]; rb[i+1] = v[i]; end
    rc[109] = 1; rc[110] = 1; rc[111] = 1;
    for (int i = 0; i < 1152; i++) void'(ref_round());
    waited = 0;
    while (!ready) begin @(posedge clk); #1 waited++; end
    checks++;
    if (waited != 9) begin failures++; $display("warm-up took %0d cycles, want 9", waited); end
    for (int n = 0; n < 40; n++) begin
      for (int b = 0; b < 128; b++) exp_v[b] = ref_round();
      checks++;
      if (rnd !== exp_v) begin failures++; $display("vector %0d mismatch %h vs %h", n, rnd, exp_v); end
      if (n % 3 == 2) begin en = 0; @(posedge clk); #1; end  // idle cycle keeps the vector
      checks++;
      if (rnd !== exp_v) begin failures++; $display("vector %0d changed while idle", n); end
      en = 1; @(posedge clk); #1 en = 0;
    end
  endtask

  initial begin
    run_pair(80'h0, 80'h0);
    run_pair({$urandom, $urandom, 16'($urandom)}, {$urandom, $urandom, 16'($urandom)});
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

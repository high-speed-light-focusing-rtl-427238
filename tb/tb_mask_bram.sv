// tb_mask_bram: random traffic on both ports of the mask buffer, checked
// against a shadow array: port A writes and reads (read-first, one cycle of
// latency), port B reads, disabled ports hold their output.
module tb_mask_bram;
  localparam int DEPTH = 6144;
  logic clk = 0;
  logic en_a, we_a, en_b;
  logic [12:0] addr_a, addr_b;
  logic [127:0] din_a, dout_a, dout_b;
  logic [127:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  mask_bram #(.DEPTH(DEPTH), .W(128)) dut (.clk, .en_a, .we_a, .addr_a, .din_a, .dout_a,
                                           .en_b, .addr_b, .dout_b);
  always #5 clk = ~clk;

  function automatic logic [127:0] rnd128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    logic [127:0] exp_a, exp_b, hold_a, hold_b;
    logic chk_a, chk_b;
    en_a = 0; we_a = 0; en_b = 0; addr_a = 0; addr_b = 0; din_a = 0;
    // fill everything through port A
    for (int i = 0; i < DEPTH; i++) begin
      shadow[i] = rnd128();
      en_a = 1; we_a = 1; addr_a = 13'(i); din_a = shadow[i];
      @(posedge clk); #1;
    end
    we_a = 0; en_a = 0;
    for (int n = 0; n < 20000; n++) begin
      hold_a = dout_a; hold_b = dout_b;
      en_a = ($urandom % 4) != 0; we_a = ($urandom % 2) != 0;
      en_b = ($urandom % 4) != 0;
      addr_a = 13'($urandom % DEPTH);
      addr_b = (n % 7 == 0) ? addr_a : 13'($urandom % DEPTH);
      din_a = rnd128();
      chk_a = en_a; chk_b = en_b;
      exp_a = en_a ? shadow[addr_a] : hold_a;
      exp_b = en_b ? shadow[addr_b] : hold_b;
      @(posedge clk); #1;
      if (en_a && we_a) shadow[addr_a] = din_a;
      checks += 2;
      if (dout_a !== exp_a) begin failures++; if (failures < 10) $display("A mismatch n=%0d", n); end
      if (dout_b !== exp_b) begin failures++; if (failures < 10) $display("B mismatch n=%0d", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

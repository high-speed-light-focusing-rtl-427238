// tb_dmd_interface: loads three random masks (24 rows x 8 words) from a
// behavioural mask buffer and checks the stream the DMD controller sees:
// every word in row order with the right row number and row-start flag,
// no gaps, dmd_show one cycle after the last word and nowhere else, the
// frame counter, and the load time of ROWS*WPR + 3 cycles.
module tb_dmd_interface;
  localparam int ROWS = 24, WPR = 8, NW = ROWS * WPR, AW = 8;
  logic clk = 0, rst_n = 0;
  logic load, busy, bram_en, dmd_dvalid, dmd_row_start, dmd_show;
  logic [AW-1:0] bram_addr;
  logic [127:0] bram_dout, dmd_data;
  logic [4:0] dmd_row;
  logic [15:0] frame_cnt;
  logic [127:0] buffer [NW];
  int checks = 0, failures = 0;

  dmd_interface #(.ROWS(ROWS), .WPR(WPR)) dut (.clk, .rst_n, .load, .busy, .bram_en, .bram_addr,
    .bram_dout, .dmd_dvalid, .dmd_data, .dmd_row, .dmd_row_start, .dmd_show, .frame_cnt);
  always #5 clk = ~clk;
  always @(posedge clk) if (bram_en) bram_dout <= buffer[bram_addr];

  int got = 0, shows = 0, last_word_cyc = 0, cyc = 0, show_cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && dmd_dvalid) begin
      checks++;
      if (dmd_data !== buffer[got] || int'(dmd_row) != got / WPR || dmd_row_start != (got % WPR == 0)) begin
        failures++;
        if (failures < 10) $display("word %0d: row %0d start %0d data ok %0d", got, dmd_row, dmd_row_start, dmd_data === buffer[got]);
      end
      got <= got + 1;
      last_word_cyc <= cyc;
    end
    if (rst_n && dmd_show) begin
      shows <= shows + 1;
      show_cyc <= cyc;
      checks++;
      if (got != NW || cyc != last_word_cyc + 1) begin failures++; $display("show after %0d words", got); end
    end
  end

  initial begin
    int c;
    load = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 3; n++) begin
      for (int i = 0; i < NW; i++) buffer[i] = {$urandom, $urandom, $urandom, $urandom};
      got = 0;
      @(posedge clk); #1 load = 1;
      @(posedge clk); #1 load = 0;
      c = 1;
      while (busy) begin @(posedge clk); #1 c++; end
      checks++;
      if (c != NW + 3) begin failures++; $display("load took %0d cycles, want %0d", c, NW + 3); end
      repeat (3) @(posedge clk);
      #1 checks++;
      if (got != NW || shows != n + 1 || int'(frame_cnt) != n + 1) begin
        failures++; $display("frame %0d: %0d words, %0d shows, frame_cnt %0d", n, got, shows, frame_cnt);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_ddr_interface: the DDR interface between a behavioural mask buffer and
// the DDR model. Stores: five random masks go to random slots, with and
// without back-pressure on app_rdy; memory contents are compared word by
// word with the slot*NW+word address map, and an unstalled store must take
// NW+1 cycles. Reads: 200 random parent reads; each must be accepted only
// on a 50 MHz slot and return the stored word.
module tb_ddr_interface;
  localparam int NW = 96, AW = 7, SW = 5, AD = 27;
  logic clk = 0, rst_n = 0, ce50;
  logic rd_req, rd_ack, rd_valid, store_start, store_busy, bram_en;
  logic [SW-1:0] rd_slot, store_slot;
  logic [AW-1:0] rd_word, bram_addr;
  logic [127:0] rd_data, bram_dout, app_wdata, app_rd_data;
  logic app_en, app_cmd, app_rdy, app_rd_valid, stall;
  logic [AD-1:0] app_addr;
  int n_reads, n_writes;
  int checks = 0, failures = 0;
  logic [127:0] buffer [NW];
  logic [1:0] div = 0;

  ddr_interface #(.NW(NW), .SLOT_W(SW), .ADDR_W(AD)) dut (.clk, .rst_n, .ce50,
    .rd_req, .rd_slot, .rd_word, .rd_ack, .rd_valid, .rd_data,
    .store_start, .store_slot, .store_busy, .bram_en, .bram_addr, .bram_dout,
    .app_en, .app_cmd, .app_addr, .app_wdata, .app_rdy(app_rdy), .app_rd_valid, .app_rd_data);
  ddr_model #(.ADDR_W(AD), .LAT(4), .STALL(0)) mem0 (.clk, .app_en(app_en && app_rdy), .app_cmd, .app_addr,
    .app_wdata, .app_rdy(), .app_rd_valid, .app_rd_data, .n_reads, .n_writes);
  always #5 clk = ~clk;
  always @(posedge clk) div <= div + 1;
  assign ce50 = (div == 2'd3);
  always @(posedge clk) app_rdy <= stall ? (($urandom % 4) != 0) : 1'b1;
  always @(posedge clk) if (bram_en) bram_dout <= buffer[bram_addr];

  initial begin
    int cyc, slot, word, lat;
    rd_req = 0; store_start = 0; rd_slot = 0; rd_word = 0; store_slot = 0; stall = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 5; n++) begin
      for (int i = 0; i < NW; i++) buffer[i] = {$urandom, $urandom, $urandom, $urandom};
      stall = (n >= 3);
      slot = int'($urandom % 32);
      @(posedge clk); #1 store_start = 1; store_slot = SW'(slot);
      @(posedge clk); #1 store_start = 0;
      cyc = 1;
      while (store_busy) begin @(posedge clk); #1 cyc++; end
      if (!stall) begin
        checks++;
        if (cyc != NW + 2) begin failures++; $display("store took %0d cycles, want %0d", cyc, NW + 2); end
      end
      for (int i = 0; i < NW; i++) begin
        checks++;
        if (mem0.peek(slot * NW + i) !== buffer[i]) begin
          failures++; if (failures < 10) $display("slot %0d word %0d wrong", slot, i);
        end
      end
    end
    stall = 0;
    for (int n = 0; n < 200; n++) begin
      slot = int'($urandom % 32); word = int'($urandom % NW);
      @(posedge clk); #1 rd_req = 1; rd_slot = SW'(slot); rd_word = AW'(word);
      #1;
      while (!rd_ack) begin @(posedge clk); #1; end
      checks++;
      if (!ce50) begin failures++; $display("read accepted off a 50 MHz slot"); end
      @(posedge clk); #1 rd_req = 0;
      lat = 1;
      while (!rd_valid) begin @(posedge clk); #1 lat++; end
      checks++;
      if (rd_data !== mem0.peek(slot * NW + word)) begin failures++; $display("read %0d/%0d wrong", slot, word); end
    end
    checks++;
    if (n_reads != 200) begin failures++; $display("%0d reads issued", n_reads); end
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

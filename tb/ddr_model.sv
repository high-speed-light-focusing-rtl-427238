// ddr_model: behavioural model of the DDR2 memory and its controller as
// seen through the controller's command port. A command is taken in any
// cycle with app_en && app_rdy; a read returns its word LAT cycles later on
// app_rd_valid/app_rd_data (in order, one read in flight at a time is all
// the design uses); a write stores app_wdata at once. Words never written
// read as zero. app_rdy is always high unless STALL is set, then it drops
// in about one cycle of four. Counters report the traffic.
module ddr_model #(
  parameter int ADDR_W = 27,
  parameter int LAT    = 4,
  parameter bit STALL  = 0
) (
  input  logic              clk,
  input  logic              app_en,
  input  logic              app_cmd,
  input  logic [ADDR_W-1:0] app_addr,
  input  logic [127:0]      app_wdata,
  output logic              app_rdy,
  output logic              app_rd_valid,
  output logic [127:0]      app_rd_data,
  output int                n_reads,
  output int                n_writes
);
  logic [127:0] mem [int];
  int           cnt = 0;
  logic [127:0] rdata;
  initial begin
    app_rdy = 1; app_rd_valid = 0; app_rd_data = '0; n_reads = 0; n_writes = 0;
  end
  always @(posedge clk) begin
    app_rd_valid <= 1'b0;
    if (app_en && app_rdy) begin
      if (app_cmd) begin
        rdata    = mem.exists(int'(app_addr)) ? mem[int'(app_addr)] : '0;
        cnt      <= LAT;
        n_reads  <= n_reads + 1;
        app_rd_data <= rdata;
      end else begin
        mem[int'(app_addr)] = app_wdata;
        n_writes <= n_writes + 1;
      end
    end
    if (cnt > 1) cnt <= cnt - 1;
    else if (cnt == 1) begin cnt <= 0; app_rd_valid <= 1'b1; end
    app_rdy <= STALL ? (($urandom % 4) != 0) : 1'b1;
  end
  function automatic logic [127:0] peek(int addr);
    return mem.exists(addr) ? mem[addr] : '0;
  endfunction
endmodule

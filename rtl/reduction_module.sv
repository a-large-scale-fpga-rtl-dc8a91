// reduction_module: second trigger stage, used for the theta plane only. It
// receives the 64 bits of two first-stage modules, regenerates the gates and
// halves the channel count by ORing neighbouring bits (2:1), so one output bit
// stands for 12 fibre channels. The 32-bit result goes to the coincidence
// stage (fanned out to several modules outside this block); its OR feeds a
// monitor output and the rate counter.
// Timing: dout 3 clocks after din, or_out 4 clocks after din.
module reduction_module
  import kaos_pkg::*;
#(
  parameter int unsigned MODULE_ID = 24
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cfg_we,
  input  logic [AW-1:0]      cfg_addr,
  input  logic [31:0]        cfg_wdata,
  output logic [31:0]        cfg_rdata,
  input  logic [2*BUS_W-1:0] din,
  output logic [BUS_W-1:0]   dout,
  output logic               or_out,
  output logic [31:0]        rate
);
  reg_array_t        regs;
  logic              tbl_we;
  logic [TBL_AW-1:0] tbl_addr;
  logic [31:0]       tbl_wdata, total;
  logic [2*BUS_W-1:0] gated;

  trigger_controller #(.MODULE_ID(MODULE_ID), .RST_MUX(32'd0)) u_ctrl (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata, .regs,
    .rate, .total, .tbl_we, .tbl_addr, .tbl_wdata);

  gate_generator #(.N(2*BUS_W), .WW(8)) u_gate (
    .clk, .rst_n, .width(regs[REG_GATE_WIDTH][7:0]), .din, .dout(gated));

  or_reduction #(.N(2*BUS_W), .R(2)) u_red (.clk, .rst_n, .din(gated), .dout);

  or_unit #(.W(BUS_W)) u_or (.clk, .rst_n, .din(dout), .dout(or_out));

  rate_counter #(.CW(32)) u_rate (
    .clk, .rst_n, .window(regs[REG_RATE_WINDOW]), .din(or_out), .rate, .total);
endmodule

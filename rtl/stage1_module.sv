// stage1_module: first trigger stage, one module per 192 neighbouring fibre
// channels of a plane (six 32-channel input cables).
// Signal path: channel mapping -> gate generator -> cluster finder -> 6:1 OR
// reduction -> pulse-width discriminator, or for raw signals gate generator ->
// 6:1 OR reduction; the multiplexer picks one of the two 32-bit results, which
// is delayed and sent to the next stage. The multiplexer output is also ORed
// into one monitor signal that feeds the rate counter. The trigger controller
// holds all run-time parameters (gate length, cluster size bounds, PWD delay,
// select, output delay, rate window) and the channel-map table.
// The block structure follows the published stage diagram; the clocked
// implementation and register map are this design's own.
// Timing (clocks from din to dout): raw 6 + OUT_DELAY, clusters 8 + OUT_DELAY;
// or_out is 1 clock after the multiplexer (6 or 8 clocks after din).
module stage1_module
  import kaos_pkg::*;
#(
  parameter int unsigned MODULE_ID = 0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cfg_we,
  input  logic [AW-1:0]         cfg_addr,
  input  logic [31:0]           cfg_wdata,
  output logic [31:0]           cfg_rdata,
  input  logic [CH_PER_MOD-1:0] din,
  output logic [BUS_W-1:0]      dout,
  output logic                  or_out,
  output logic [31:0]           rate
);
  localparam int unsigned N = CH_PER_MOD;

  reg_array_t        regs;
  logic              tbl_we;
  logic [TBL_AW-1:0] tbl_addr;
  logic [31:0]       tbl_wdata, total;
  logic [N-1:0]      mapped, gated, clus;
  logic [BUS_W-1:0]  raw6, clus6, clus_pwd, muxed;

  trigger_controller #(.MODULE_ID(MODULE_ID), .RST_MUX(32'(S1_CLUSTER))) u_ctrl (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata, .regs,
    .rate, .total, .tbl_we, .tbl_addr, .tbl_wdata);

  channel_mapping #(.N(N)) u_map (
    .clk, .rst_n, .tbl_we, .tbl_addr(tbl_addr[7:0]), .tbl_wdata(tbl_wdata[7:0]),
    .din, .dout(mapped));

  gate_generator #(.N(N), .WW(8)) u_gate (
    .clk, .rst_n, .width(regs[REG_GATE_WIDTH][7:0]), .din(mapped), .dout(gated));

  cluster_finder #(.N(N), .SMIN(3), .SMAX(5)) u_cf (
    .clk, .rst_n, .size_lo(regs[REG_CLUSTER_MIN][3:0]),
    .size_hi(regs[REG_CLUSTER_MAX][3:0]), .din(gated), .dout(clus));

  or_reduction #(.N(N), .R(6)) u_red_raw (.clk, .rst_n, .din(gated), .dout(raw6));
  or_reduction #(.N(N), .R(6)) u_red_clu (.clk, .rst_n, .din(clus),  .dout(clus6));

  pwd #(.N(BUS_W), .DMAX(15)) u_pwd (
    .clk, .rst_n, .delay(regs[REG_PWD_DELAY][3:0]), .din(clus6), .dout(clus_pwd));

  bus_mux #(.W(BUS_W), .NIN(2)) u_mux (
    .clk, .rst_n, .sel(regs[REG_MUX_SEL][2:0]), .din({clus_pwd, raw6}), .dout(muxed));

  delay_line #(.W(BUS_W), .DMAX(31)) u_dly (
    .clk, .rst_n, .delay(regs[REG_OUT_DELAY][4:0]), .din(muxed), .dout(dout));

  or_unit #(.W(BUS_W)) u_or (.clk, .rst_n, .din(muxed), .dout(or_out));

  rate_counter #(.CW(32)) u_rate (
    .clk, .rst_n, .window(regs[REG_RATE_WINDOW]), .din(or_out), .rate, .total);
endmodule

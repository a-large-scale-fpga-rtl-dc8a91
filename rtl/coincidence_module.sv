// coincidence_module: third trigger stage. Input: 64 x-plane bits (two
// first-stage modules, 6 channels per bit, din[63:0]) and 128 theta-plane bits
// (four reduction-stage outputs, 12 channels per bit, din[191:64]). After the
// gate generator five units work in parallel and the multiplexer chooses one
// for the 32-bit output:
//   0  6:1 OR reduction of all 192 bits
//   1  x AND theta temporal coincidence (result on bit 0)
//   2  2:1 OR reduction of the x bits
//   3  4:1 OR reduction of the theta bits
//   4  coincidence (acceptance) matrix, reset selection
// The output is ORed into a monitor signal that feeds the rate counter. The
// matrix is loaded through the controller's table window.
// Timing: dout 4 clocks after din for selects 0-3, 5 clocks for the matrix.
module coincidence_module
  import kaos_pkg::*;
#(
  parameter int unsigned MODULE_ID = 30
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
  reg_array_t        regs;
  logic              tbl_we;
  logic [TBL_AW-1:0] tbl_addr;
  logic [31:0]       tbl_wdata, total;
  logic [CH_PER_MOD-1:0] gated;
  logic [NX_BINS-1:0]    gx;
  logic [NT_BINS-1:0]    gt;
  logic [BUS_W-1:0]      red6, red2x, red4t, mat;
  logic                  xt;

  assign gx = gated[NX_BINS-1:0];
  assign gt = gated[CH_PER_MOD-1:NX_BINS];

  trigger_controller #(.MODULE_ID(MODULE_ID), .RST_MUX(32'(S3_MATRIX))) u_ctrl (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata, .regs,
    .rate, .total, .tbl_we, .tbl_addr, .tbl_wdata);

  gate_generator #(.N(CH_PER_MOD), .WW(8)) u_gate (
    .clk, .rst_n, .width(regs[REG_GATE_WIDTH][7:0]), .din, .dout(gated));

  or_reduction #(.N(CH_PER_MOD), .R(6)) u_red6  (.clk, .rst_n, .din(gated), .dout(red6));
  x_theta_coincidence #(.NX(NX_BINS), .NT(NT_BINS)) u_xt (.clk, .rst_n, .x(gx), .t(gt), .dout(xt));
  or_reduction #(.N(NX_BINS), .R(2)) u_red2x (.clk, .rst_n, .din(gx), .dout(red2x));
  or_reduction #(.N(NT_BINS), .R(4)) u_red4t (.clk, .rst_n, .din(gt), .dout(red4t));
  coincidence_matrix #(.NX(NX_BINS), .NT(NT_BINS), .NOUT(BUS_W)) u_mat (
    .clk, .rst_n, .tbl_we, .tbl_addr, .tbl_wdata, .x(gx), .t(gt), .dout(mat));

  bus_mux #(.W(BUS_W), .NIN(5)) u_mux (
    .clk, .rst_n, .sel(regs[REG_MUX_SEL][2:0]),
    .din({mat, red4t, red2x, {(BUS_W-1){1'b0}}, xt, red6}), .dout);

  or_unit #(.W(BUS_W)) u_or (.clk, .rst_n, .din(dout), .dout(or_out));

  rate_counter #(.CW(32)) u_rate (
    .clk, .rst_n, .window(regs[REG_RATE_WINDOW]), .din(or_out), .rate, .total);
endmodule

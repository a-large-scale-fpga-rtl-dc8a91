// output_module: last trigger stage, a single module receiving the 32-bit
// outputs of the six coincidence modules (192 bits). After the gate generator
// two units work in parallel: a 6:1 OR reduction followed by an OR of the
// whole bus (the "x OR theta" style trigger), and an x AND theta coincidence.
// The multiplexer chooses the first level trigger (flt) sent to the trigger
// control system; flt also feeds the rate counter. The reduced 32-bit bus is
// brought out for monitoring.
// Which input cables carry x-plane information for the coincidence unit is not
// fixed by the source; here the X_MASK register marks them (bit i = cable i,
// bits 32*i..32*i+31), all other cables count as theta.
// Timing: flt 5 clocks after din via the OR path (select 0, reset value),
// 4 clocks via the coincidence (select 1); red_out 3 clocks after din.
module output_module
  import kaos_pkg::*;
#(
  parameter int unsigned MODULE_ID = 36
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cfg_we,
  input  logic [AW-1:0]         cfg_addr,
  input  logic [31:0]           cfg_wdata,
  output logic [31:0]           cfg_rdata,
  input  logic [CH_PER_MOD-1:0] din,
  output logic [BUS_W-1:0]      red_out,
  output logic                  flt,
  output logic [31:0]           rate
);
  localparam int unsigned NCAB = CH_PER_MOD / BUS_W;

  reg_array_t        regs;
  logic              tbl_we;
  logic [TBL_AW-1:0] tbl_addr;
  logic [31:0]       tbl_wdata, total;
  logic [CH_PER_MOD-1:0] gated, xsel;
  logic                  any, xt;

  always_comb
    for (int i = 0; i < int'(NCAB); i++) xsel[i*BUS_W +: BUS_W] = {BUS_W{regs[REG_X_MASK][i]}};

  trigger_controller #(.MODULE_ID(MODULE_ID), .RST_MUX(32'(S4_OR))) u_ctrl (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata, .regs,
    .rate, .total, .tbl_we, .tbl_addr, .tbl_wdata);

  gate_generator #(.N(CH_PER_MOD), .WW(8)) u_gate (
    .clk, .rst_n, .width(regs[REG_GATE_WIDTH][7:0]), .din, .dout(gated));

  or_reduction #(.N(CH_PER_MOD), .R(6)) u_red6 (.clk, .rst_n, .din(gated), .dout(red_out));
  or_unit #(.W(BUS_W)) u_or (.clk, .rst_n, .din(red_out), .dout(any));
  x_theta_coincidence #(.NX(CH_PER_MOD), .NT(CH_PER_MOD)) u_xt (
    .clk, .rst_n, .x(gated & xsel), .t(gated & ~xsel), .dout(xt));

  bus_mux #(.W(1), .NIN(2)) u_mux (
    .clk, .rst_n, .sel(regs[REG_MUX_SEL][2:0]), .din({xt, any}), .dout(flt));

  rate_counter #(.CW(32)) u_rate (
    .clk, .rst_n, .window(regs[REG_RATE_WINDOW]), .din(flt), .rate, .total);
endmodule

// kaos_trigger: the complete electron-arm trigger of 37 modules in four
// stages, processing 2 x 2304 fibre channels.
//   x plane      : 12 first-stage modules (192 channels each)
//   theta plane  : 12 first-stage modules, then 6 reduction modules (2:1)
//   coincidence  : 6 modules; module c takes x first-stage modules 2c and 2c+1
//                  (384 x channels) and four consecutive reduction modules
//                  starting at THETA_BASE[c] (1536 theta channels)
//   output       : 1 module taking the six coincidence outputs, producing flt
// Every module-to-module link is a 32-bit bus (one VHDCI cable).
// Configuration: cfg_sel selects the module (0-11 x stage 1, 12-23 theta
// stage 1, 24-29 reduction, 30-35 coincidence, 36 output), then cfg_we /
// cfg_addr / cfg_wdata / cfg_rdata act on that module's registers.
// The theta window per coincidence module and the module numbering are this
// design's choices; the stage structure, module counts and widths follow the
// published system.
// Timing with reset parameters (clusters, PWD delay 2, matrix, OR output,
// output delay 0): a track whose clusters arrive in both planes at the same
// time gives flt 23 clocks later: first stage 8 + 2 (PWD removes the leading
// clocks), theta reduction 3, coincidence 5, output 5. The x path is 3 clocks
// shorter; the coincidence-stage gates (8 clocks) cover the difference, and
// the first-stage output delay can re-align the planes.
module kaos_trigger
  import kaos_pkg::*;
#(
  parameter int unsigned NCH = 2304,
  parameter int unsigned THETA_BASE [6] = '{0, 0, 1, 2, 2, 2}
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [5:0]       cfg_sel,
  input  logic             cfg_we,
  input  logic [AW-1:0]    cfg_addr,
  input  logic [31:0]      cfg_wdata,
  output logic [31:0]      cfg_rdata,
  input  logic [NCH-1:0]   x_in,
  input  logic [NCH-1:0]   t_in,
  output logic             flt,
  output logic [36:0]      or_mon,
  output logic [BUS_W-1:0] out_bus
);
  localparam int unsigned NS1 = NCH / CH_PER_MOD;   // 12 first-stage modules per plane
  localparam int unsigned NRED = NS1 / 2;            // 6 reduction modules
  localparam int unsigned NCO = NS1 / 2;             // 6 coincidence modules
  localparam int unsigned NMOD = 2 * NS1 + NRED + NCO + 1;

  logic [BUS_W-1:0] xo [NS1];
  logic [BUS_W-1:0] to [NS1];
  logic [BUS_W-1:0] ro [NRED];
  logic [BUS_W-1:0] co [NCO];
  logic [31:0]      rd [NMOD];
  logic [31:0]      rate_unused [NMOD];

  for (genvar i = 0; i < NS1; i++) begin : g_x
    stage1_module #(.MODULE_ID(i)) u (
      .clk, .rst_n, .cfg_we(cfg_we && cfg_sel == 6'(i)), .cfg_addr, .cfg_wdata,
      .cfg_rdata(rd[i]), .din(x_in[i*CH_PER_MOD +: CH_PER_MOD]), .dout(xo[i]),
      .or_out(or_mon[i]), .rate(rate_unused[i]));
  end

  for (genvar i = 0; i < NS1; i++) begin : g_t
    stage1_module #(.MODULE_ID(NS1 + i)) u (
      .clk, .rst_n, .cfg_we(cfg_we && cfg_sel == 6'(NS1 + i)), .cfg_addr, .cfg_wdata,
      .cfg_rdata(rd[NS1+i]), .din(t_in[i*CH_PER_MOD +: CH_PER_MOD]), .dout(to[i]),
      .or_out(or_mon[NS1+i]), .rate(rate_unused[NS1+i]));
  end

  for (genvar r = 0; r < NRED; r++) begin : g_r
    localparam int unsigned ID = 2 * NS1 + r;
    reduction_module #(.MODULE_ID(ID)) u (
      .clk, .rst_n, .cfg_we(cfg_we && cfg_sel == 6'(ID)), .cfg_addr, .cfg_wdata,
      .cfg_rdata(rd[ID]), .din({to[2*r+1], to[2*r]}), .dout(ro[r]),
      .or_out(or_mon[ID]), .rate(rate_unused[ID]));
  end

  for (genvar c = 0; c < NCO; c++) begin : g_c
    localparam int unsigned ID = 2 * NS1 + NRED + c;
    localparam int unsigned B  = THETA_BASE[c];
    coincidence_module #(.MODULE_ID(ID)) u (
      .clk, .rst_n, .cfg_we(cfg_we && cfg_sel == 6'(ID)), .cfg_addr, .cfg_wdata,
      .cfg_rdata(rd[ID]),
      .din({ro[B+3], ro[B+2], ro[B+1], ro[B], xo[2*c+1], xo[2*c]}),
      .dout(co[c]), .or_out(or_mon[ID]), .rate(rate_unused[ID]));
  end

  output_module #(.MODULE_ID(NMOD - 1)) u_out (
    .clk, .rst_n, .cfg_we(cfg_we && cfg_sel == 6'(NMOD - 1)), .cfg_addr, .cfg_wdata,
    .cfg_rdata(rd[NMOD-1]), .din({co[5], co[4], co[3], co[2], co[1], co[0]}),
    .red_out(out_bus), .flt, .rate(rate_unused[NMOD-1]));
  assign or_mon[NMOD-1] = flt;

  assign cfg_rdata = (int'(cfg_sel) < int'(NMOD)) ? rd[cfg_sel] : 32'h0;

  initial assert (NCH == 12 * CH_PER_MOD)
    else $error("kaos_trigger: the 37-module wiring needs 12 first-stage modules per plane");
endmodule

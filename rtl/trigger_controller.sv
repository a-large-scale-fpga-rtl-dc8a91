// trigger_controller: the register file of one trigger module, giving on-line
// access to its trigger parameters over the crate bus.
// The bus is a simple synchronous word-addressed port standing in for VME:
// a write with cfg_we lands on the next clock edge, reads are combinational.
//   0x0000..0x0007  parameter registers (kaos_pkg::reg_idx_e), read/write
//   0x0010 rate, 0x0011 total count, 0x0012 module id   read only
//   0x1000..0x1FFF  table window: the write is forwarded on tbl_we/tbl_addr/
//                   tbl_wdata (channel map or acceptance matrix), reads give 0
// The register map and reset values are this design's own.
module trigger_controller
  import kaos_pkg::*;
#(
  parameter int unsigned MODULE_ID = 0,
  parameter logic [31:0] RST_MUX   = 32'd1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [AW-1:0]     cfg_addr,
  input  logic [31:0]       cfg_wdata,
  output logic [31:0]       cfg_rdata,
  output reg_array_t        regs,
  input  logic [31:0]       rate,
  input  logic [31:0]       total,
  output logic              tbl_we,
  output logic [TBL_AW-1:0] tbl_addr,
  output logic [31:0]       tbl_wdata
);
  localparam reg_array_t RST = '{RST_GATE_WIDTH, RST_CLUSTER_MIN, RST_CLUSTER_MAX,
                                 RST_PWD_DELAY, RST_MUX, RST_OUT_DELAY,
                                 RST_RATE_WINDOW, RST_X_MASK};

  logic in_tbl;
  assign in_tbl = (cfg_addr[AW-1:TBL_AW] == ADDR_TBL[AW-1:TBL_AW]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      regs <= RST;
    end else if (cfg_we && cfg_addr < AW'(NREG)) begin
      regs[cfg_addr[2:0]] <= cfg_wdata;
    end
  end

  // table writes are registered so the table sees them one clock later
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tbl_we    <= 1'b0;
      tbl_addr  <= '0;
      tbl_wdata <= '0;
    end else begin
      tbl_we    <= cfg_we && in_tbl;
      tbl_addr  <= cfg_addr[TBL_AW-1:0];
      tbl_wdata <= cfg_wdata;
    end
  end

  always_comb begin
    if (cfg_addr < AW'(NREG))      cfg_rdata = regs[cfg_addr[2:0]];
    else if (cfg_addr == ADDR_RATE)  cfg_rdata = rate;
    else if (cfg_addr == ADDR_TOTAL) cfg_rdata = total;
    else if (cfg_addr == ADDR_ID)    cfg_rdata = 32'(MODULE_ID);
    else                             cfg_rdata = '0;
  end
endmodule

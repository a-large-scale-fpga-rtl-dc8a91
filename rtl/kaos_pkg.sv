// kaos_pkg: constants, register map and types shared by the electron-arm
// fibre-detector trigger. Channel counts (192 per first-stage module, 32-bit
// inter-module buses, 2304 channels per plane, 6-channel x and 12-channel theta
// resolution of the acceptance test) follow the published system. The register
// map, reset values and select encodings are this design's own choices.
package kaos_pkg;

  localparam int unsigned CH_PER_MOD = 192;   // channels per first-stage module
  localparam int unsigned BUS_W      = 32;    // one 32-channel VHDCI cable
  localparam int unsigned NX_BINS    = 64;    // x bins per coincidence module (384 ch / 6)
  localparam int unsigned NT_BINS    = 128;   // theta bins per coincidence module (1536 ch / 12)

  localparam int unsigned NREG       = 8;     // writable parameter registers per module
  localparam int unsigned AW         = 16;    // configuration bus address width
  localparam int unsigned TBL_AW     = 12;    // table index width

  // Writable parameter registers (word addresses)
  typedef enum logic [2:0] {
    REG_GATE_WIDTH  = 3'd0,  // gate generator length, clocks
    REG_CLUSTER_MIN = 3'd1,  // smallest accepted cluster size
    REG_CLUSTER_MAX = 3'd2,  // largest accepted cluster size
    REG_PWD_DELAY   = 3'd3,  // pulse-width discriminator delay, clocks
    REG_MUX_SEL     = 3'd4,  // output multiplexer select
    REG_OUT_DELAY   = 3'd5,  // output delay, clocks
    REG_RATE_WINDOW = 3'd6,  // rate counter window, clocks
    REG_X_MASK      = 3'd7   // output stage: which input cables carry x
  } reg_idx_e;

  // Read-only status registers
  localparam logic [AW-1:0] ADDR_RATE  = 16'h0010;
  localparam logic [AW-1:0] ADDR_TOTAL = 16'h0011;
  localparam logic [AW-1:0] ADDR_ID    = 16'h0012;
  // Table window (channel map in stage 1, acceptance matrix in stage 3)
  localparam logic [AW-1:0] ADDR_TBL   = 16'h1000;

  typedef logic [31:0] reg_array_t [NREG];

  // Reset values of the parameter registers
  localparam logic [31:0] RST_GATE_WIDTH  = 32'd8;
  localparam logic [31:0] RST_CLUSTER_MIN = 32'd3;
  localparam logic [31:0] RST_CLUSTER_MAX = 32'd5;
  localparam logic [31:0] RST_PWD_DELAY   = 32'd2;
  localparam logic [31:0] RST_OUT_DELAY   = 32'd0;
  localparam logic [31:0] RST_RATE_WINDOW = 32'd400_000_000;  // 1 s at 400 MHz
  localparam logic [31:0] RST_X_MASK      = 32'h07;

  // Multiplexer selects
  typedef enum logic [2:0] {S1_RAW = 3'd0, S1_CLUSTER = 3'd1} s1_sel_e;
  typedef enum logic [2:0] {
    S3_RED6 = 3'd0, S3_XT = 3'd1, S3_RED2X = 3'd2, S3_RED4T = 3'd3, S3_MATRIX = 3'd4
  } s3_sel_e;
  typedef enum logic [2:0] {S4_OR = 3'd0, S4_XT = 3'd1} s4_sel_e;

endpackage

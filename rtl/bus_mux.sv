// bus_mux: output multiplexer of a trigger module; chooses which logic unit
// drives the module output. Input i occupies din[i*W +: W]. A select beyond
// NIN-1 drives zero (this design's choice). Timing: one register stage.
module bus_mux #(
  parameter int unsigned W   = 32,
  parameter int unsigned NIN = 5
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [2:0]       sel,
  input  logic [NIN*W-1:0] din,
  output logic [W-1:0]     dout
);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)                 dout <= '0;
    else if (int'(sel) < int'(NIN)) dout <= din[sel*W +: W];
    else                        dout <= '0;
endmodule

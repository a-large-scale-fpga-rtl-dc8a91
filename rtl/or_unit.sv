// or_unit: ORs a whole bus into one logic signal. Every module drives such a
// signal to a front-panel output and to its rate counter; in the output stage
// it forms the "x OR theta" trigger. Timing: one register stage.
module or_unit #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] din,
  output logic         dout
);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) dout <= 1'b0;
    else        dout <= |din;
endmodule

// x_theta_coincidence: position-independent temporal coincidence between the
// two detector planes: high when any x bit and any theta bit are active in the
// same clock. The temporal window comes from the gates in front of it.
// Timing: one register stage.
module x_theta_coincidence #(
  parameter int unsigned NX = 64,
  parameter int unsigned NT = 128
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [NX-1:0] x,
  input  logic [NT-1:0] t,
  output logic          dout
);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) dout <= 1'b0;
    else        dout <= (|x) && (|t);
endmodule

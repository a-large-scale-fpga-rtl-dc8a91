// or_reduction: R:1 channel reduction. Output bit k is the OR of the R
// neighbouring input channels k*R .. k*R+R-1 (used as 6:1, 4:1 and 2:1 units).
// Timing: one register stage.
module or_reduction #(
  parameter int unsigned N = 192,
  parameter int unsigned R = 6
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [N-1:0]   din,
  output logic [N/R-1:0] dout
);
  logic [N/R-1:0] red;

  always_comb
    for (int k = 0; k < int'(N / R); k++) red[k] = |din[k*R +: R];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) dout <= '0;
    else        dout <= red;

  initial assert (N % R == 0) else $error("or_reduction: N must be a multiple of R");
endmodule

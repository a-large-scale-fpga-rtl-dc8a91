// coincidence_matrix: acceptance test for reconstructed tracks. The allowed
// combinations of x bin and theta bin are stored in a binary matrix M
// (NX rows of NT bits, computed off-line and loaded over the bus). x bin i is
// accepted when x[i] is hit and some theta bin j with M[i][j] = 1 is hit.
// Output bit k reports x bins 2k and 2k+1 (NOUT = NX/2 bits, a choice of this
// design that fits the 32-bit output bus).
// Matrix load: word w of row i sits at table index i*(NT/32)+w, bit b of the
// word is theta bin 32*w+b. The matrix is cleared at reset.
// Timing: two register stages (row test, then bin pairing).
module coincidence_matrix #(
  parameter int unsigned NX   = 64,
  parameter int unsigned NT   = 128,
  parameter int unsigned NOUT = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            tbl_we,
  input  logic [11:0]     tbl_addr,
  input  logic [31:0]     tbl_wdata,
  input  logic [NX-1:0]   x,
  input  logic [NT-1:0]   t,
  output logic [NOUT-1:0] dout
);
  localparam int unsigned WPR = NT / 32;  // words per row
  localparam int unsigned XPB = NX / NOUT; // x bins per output bit

  logic [NT-1:0] m [NX];
  logic [NX-1:0] acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NX); i++) m[i] <= '0;
    end else if (tbl_we && int'(tbl_addr) < int'(NX * WPR)) begin
      m[int'(tbl_addr) / WPR][(int'(tbl_addr) % WPR) * 32 +: 32] <= tbl_wdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc  <= '0;
      dout <= '0;
    end else begin
      for (int i = 0; i < int'(NX); i++) acc[i] <= x[i] && |(t & m[i]);
      for (int k = 0; k < int'(NOUT); k++) dout[k] <= |acc[k*XPB +: XPB];
    end
  end

  initial assert (NT % 32 == 0 && NX % NOUT == 0)
    else $error("coincidence_matrix: NT must be a multiple of 32 and NX of NOUT");
endmodule

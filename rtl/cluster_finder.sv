// cluster_finder: finds clusters of exactly n neighbouring active channels.
// For each anchor channel c and each size n in SMIN..SMAX, a window of n
// channels starting at c - floor((n-1)/2) must be all active while the channel
// just below and just above the window are inactive (one AND per size with two
// inverted inputs). The size is accepted when size_lo <= n <= size_hi (the
// "cluster size selection" lines), and the accepted sizes are ORed into dout[c].
// With SMIN..SMAX = 3..5 the windows for one anchor are c-1..c+1, c-1..c+2 and
// c-2..c+2, as in the published logic diagram. Channels outside the module are
// taken as inactive (this design's choice); as a consequence no cluster can be
// anchored on the first or last channel, whose outputs stay low.
// Timing: one register stage.
module cluster_finder #(
  parameter int unsigned N    = 192,
  parameter int unsigned SMIN = 3,
  parameter int unsigned SMAX = 5
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [3:0]   size_lo,
  input  logic [3:0]   size_hi,
  input  logic [N-1:0] din,
  output logic [N-1:0] dout
);
  // channel i with out-of-range positions reading as inactive
  function automatic logic ch(input logic [N-1:0] v, input int i);
    return (i >= 0 && i < int'(N)) ? v[i] : 1'b0;
  endfunction

  logic [N-1:0] hit;

  always_comb begin
    for (int c = 0; c < int'(N); c++) begin
      hit[c] = 1'b0;
      for (int n = int'(SMIN); n <= int'(SMAX); n++) begin
        automatic int  s   = c - (n - 1) / 2;
        automatic logic win = !ch(din, s - 1) && !ch(din, s + n);
        for (int k = 0; k < n; k++) win = win && ch(din, s + k);
        if (win && n >= int'(size_lo) && n <= int'(size_hi)) hit[c] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) dout <= '0;
    else        dout <= hit;
endmodule

// pwd: pulse-width discriminator. Each signal is split in two, one copy is
// delayed by 'delay' clocks and both are ANDed, so only pulses longer than the
// delay give an output; a pulse of L clocks leaves L-delay clocks (none if
// L <= delay). The delay is a shift register with a run-time tap.
// Timing: one register stage after the AND.
module pwd #(
  parameter int unsigned N    = 32,
  parameter int unsigned DMAX = 15
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [3:0]   delay,
  input  logic [N-1:0] din,
  output logic [N-1:0] dout
);
  logic [N-1:0] hist [DMAX];   // hist[k] = din delayed by k+1 clocks
  logic [N-1:0] dly;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(DMAX); k++) hist[k] <= '0;
    end else begin
      hist[0] <= din;
      for (int k = 1; k < int'(DMAX); k++) hist[k] <= hist[k-1];
    end
  end

  always_comb begin
    if (delay == 0)                 dly = din;
    else if (int'(delay) <= int'(DMAX)) dly = hist[delay - 1];
    else                            dly = hist[DMAX-1];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) dout <= '0;
    else        dout <= din & dly;
endmodule

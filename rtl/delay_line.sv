// delay_line: programmable delay of the first-stage output bus, used to align
// the timing of the modules and planes before transmission.
// A shift register of DMAX words; dout = din delayed by delay+1 clocks
// (delay = 0 gives one register stage). Depth and reset value (0) are this
// design's choice.
module delay_line #(
  parameter int unsigned W    = 32,
  parameter int unsigned DMAX = 31
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [4:0]   delay,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);
  logic [W-1:0] sr [DMAX+1];   // sr[k] = din delayed by k+1 clocks

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k <= int'(DMAX); k++) sr[k] <= '0;
    end else begin
      sr[0] <= din;
      for (int k = 1; k <= int'(DMAX); k++) sr[k] <= sr[k-1];
    end
  end

  always_comb dout = (int'(delay) <= int'(DMAX)) ? sr[delay] : sr[DMAX];
endmodule

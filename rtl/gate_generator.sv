// gate_generator: turns each input rising edge into a gate of fixed,
// programmable length so that signals of neighbouring channels, which arrive
// with slightly different delays, overlap in the logic that follows.
// Per channel the asynchronous input is sampled once; a rising edge reloads a
// down-counter with 'width' and the output is high while the counter is
// non-zero (retriggerable one-shot). width = 0 disables the channel.
// Timing: dout rises 2 clocks after din rises and stays high for exactly
// 'width' clocks after the last rising edge. The one-shot form is this design's
// choice; the source only names the block.
module gate_generator #(
  parameter int unsigned N  = 192,
  parameter int unsigned WW = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [WW-1:0] width,
  input  logic [N-1:0]  din,
  output logic [N-1:0]  dout
);
  logic [N-1:0]  s1, s2;
  logic [WW-1:0] cnt [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= '0;
      s2 <= '0;
      for (int i = 0; i < N; i++) cnt[i] <= '0;
    end else begin
      s1 <= din;
      s2 <= s1;
      for (int i = 0; i < N; i++) begin
        if (s1[i] && !s2[i])  cnt[i] <= width;
        else if (cnt[i] != 0) cnt[i] <= cnt[i] - 1'b1;
      end
    end
  end

  always_comb
    for (int i = 0; i < N; i++) dout[i] = (cnt[i] != '0);
endmodule

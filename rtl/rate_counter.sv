// rate_counter: counts rising edges of a monitored signal. A window timer runs
// for 'window' clocks; at its end the edge count of that window is copied to
// 'rate' and the count restarts, so 'rate' holds edges per window (the trigger
// rate when the window is one second). 'total' counts edges since reset.
// Both counts saturate. The window scheme is this design's choice.
// Timing: an edge is counted 1 clock after it occurs; 'rate' updates on the
// clock after the last clock of a window.
module rate_counter #(
  parameter int unsigned CW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [31:0]   window,
  input  logic          din,
  output logic [CW-1:0] rate,
  output logic [CW-1:0] total
);
  logic          din_q;
  logic [31:0]   timer;
  logic [CW-1:0] cnt;
  logic          edge_s;

  assign edge_s = din && !din_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      din_q <= 1'b0;
      timer <= '0;
      cnt   <= '0;
      rate  <= '0;
      total <= '0;
    end else begin
      din_q <= din;
      if (edge_s && total != '1) total <= total + 1'b1;
      if (timer + 1 >= window) begin
        timer <= '0;
        rate  <= (edge_s && cnt != '1) ? cnt + 1'b1 : cnt;
        cnt   <= '0;
      end else begin
        timer <= timer + 1;
        if (edge_s && cnt != '1) cnt <= cnt + 1'b1;
      end
    end
  end
endmodule

// channel_mapping: reorders the discriminator channels of one first-stage
// module into the geometric order of the fibre columns.
// Each output channel o takes input channel map[o]; the map is a run-time table
// written over the configuration bus (tbl_we/tbl_addr = output index,
// tbl_wdata = source index) and resets to the identity. The real anode-to-fibre
// map of the detector is not published, which is why it is a table here.
// Timing: one register stage, dout follows din after 1 clock.
module channel_mapping #(
  parameter int unsigned N = 192
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         tbl_we,
  input  logic [7:0]   tbl_addr,
  input  logic [7:0]   tbl_wdata,
  input  logic [N-1:0] din,
  output logic [N-1:0] dout
);
  logic [7:0] map_q [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < N; o++) map_q[o] <= 8'(o);
    end else if (tbl_we && int'(tbl_addr) < N && int'(tbl_wdata) < N) begin
      map_q[tbl_addr] <= tbl_wdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dout <= '0;
    else for (int o = 0; o < N; o++) dout[o] <= din[map_q[o]];
  end
endmodule

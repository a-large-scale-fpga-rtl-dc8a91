// tb_gate_generator: random sparse pulses on all channels with a changing gate
// length. The expected output is derived from the time of each channel's last
// rising edge: high exactly when that edge was sampled 2..width+1 clocks ago.
module tb_gate_generator;
  localparam int N = 192;
  logic clk = 0, rst_n = 0;
  logic [7:0] width = 8'd8;
  logic [N-1:0] din = '0, dout;
  int checks = 0, failures = 0;
  int last_edge [N];
  logic [N-1:0] prev = '0;
  int t = 0, opened = 0;

  gate_generator #(.N(N), .WW(8)) dut (.*);

  always #5 clk = ~clk;
  initial begin #500000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input logic c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL t=%0d %s", t, msg); end
  endtask

  initial begin
    for (int i = 0; i < N; i++) last_edge[i] = -1000;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (t = 0; t < 1500; t++) begin
      // drive input for this cycle (value applies from this negedge)
      if (t % 300 == 0) width = 8'($urandom_range(1, 12));
      for (int i = 0; i < N; i++) din[i] = ($urandom_range(99) < 20) ? ~prev[i] : prev[i];
      @(negedge clk);
      // output after this edge: an edge driven at cycle k appears at k+2 .. k+1+width
      if (t > 20 && t % 300 > 14)
        for (int i = 0; i < N; i++) begin
          logic exp;
          exp = (t + 1 - last_edge[i] >= 2) && (t + 1 - last_edge[i] <= int'(width) + 1);
          if (exp) opened++;
          chk(dout[i] == exp, $sformatf("ch %0d", i));
        end
      for (int i = 0; i < N; i++) if (din[i] && !prev[i]) last_edge[i] = t;
      prev = din;
    end
    chk(opened > 1000, "gates were exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_or_reduction: 6:1 reduction of 192 channels with random and one-hot
// inputs; each output bit is compared with the OR of its six channels.
module tb_or_reduction;
  localparam int N = 192, R = 6;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] din = '0;
  logic [N/R-1:0] dout, exp;
  int checks = 0, failures = 0;

  or_reduction #(.N(N), .R(R)) dut (.*);

  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input logic c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < N + 500; v++) begin
      if (v < N) din = N'(1) << v;
      else din = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom} &
                 {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom} &
                 {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      exp = '0;
      for (int i = 0; i < N; i++) if (din[i]) exp[i / R] = 1'b1;
      @(negedge clk);
      chk(dout == exp, $sformatf("v=%0d", v));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

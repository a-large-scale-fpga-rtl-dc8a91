// tb_or_unit: zero, one-hot and random 32-bit words; the output is the OR of
// the word one clock later.
module tb_or_unit;
  localparam int W = 32;
  logic clk = 0, rst_n = 0;
  logic [W-1:0] din = '0;
  logic dout;
  int checks = 0, failures = 0;

  or_unit #(.W(W)) dut (.*);

  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input logic c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < 600; v++) begin
      logic e;
      if (v % 3 == 0) din = '0;
      else if (v < 100) din = W'(1) << (v % W);
      else din = $urandom & $urandom & $urandom & $urandom;
      e = 1'b0;
      for (int i = 0; i < W; i++) e = e | din[i];
      @(negedge clk);
      chk(dout == e, $sformatf("v=%0d", v));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

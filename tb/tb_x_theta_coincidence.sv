// tb_x_theta_coincidence: sparse random x and theta patterns, including
// one-plane-only cases; the output must be (any x) AND (any theta).
module tb_x_theta_coincidence;
  localparam int NX = 64, NT = 128;
  logic clk = 0, rst_n = 0;
  logic [NX-1:0] x = '0;
  logic [NT-1:0] t = '0;
  logic dout;
  int checks = 0, failures = 0, ncoinc = 0, nsingle = 0;

  x_theta_coincidence #(.NX(NX), .NT(NT)) dut (.*);

  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input logic c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < 2000; v++) begin
      logic e;
      x = '0; t = '0;
      if ($urandom_range(1)) x[$urandom_range(NX - 1)] = 1'b1;
      if ($urandom_range(1)) t[$urandom_range(NT - 1)] = 1'b1;
      e = (x != 0) && (t != 0);
      if (e) ncoinc++; else if (x != 0 || t != 0) nsingle++;
      @(negedge clk);
      chk(dout == e, $sformatf("v=%0d", v));
    end
    chk(ncoinc > 100 && nsingle > 100, "both cases seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

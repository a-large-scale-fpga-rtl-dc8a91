// tb_delay_line: random words through every delay setting; the output must
// equal the input of delay+1 clocks earlier.
module tb_delay_line;
  localparam int W = 32;
  logic clk = 0, rst_n = 0;
  logic [4:0] delay = 0;
  logic [W-1:0] din = '0, dout;
  int checks = 0, failures = 0;
  logic [W-1:0] hist [$];

  delay_line #(.W(W), .DMAX(31)) dut (.*);

  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input logic c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    for (int k = 0; k < 40; k++) hist.push_front('0);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int d = 0; d < 32; d++) begin
      delay = 5'(d);
      for (int v = 0; v < 100; v++) begin
        din = $urandom;
        hist.push_front(din);
        void'(hist.pop_back());
        @(negedge clk);
        chk(dout == hist[d], $sformatf("d=%0d v=%0d", d, v));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

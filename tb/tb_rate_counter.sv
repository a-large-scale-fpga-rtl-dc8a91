// tb_rate_counter: a window of W clocks; in each window a known number of
// pulses (random lengths, placed away from the window borders) is driven. The
// latched rate must equal that number after each window and the total must be
// the running sum.
module tb_rate_counter;
  localparam int W = 64;
  logic clk = 0, rst_n = 0;
  logic [31:0] window = W;
  logic din = 0;
  logic [31:0] rate, total;
  int checks = 0, failures = 0, sum = 0;

  rate_counter #(.CW(32)) dut (.*);

  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input logic c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;            // window 1 = posedges 1..W after this point
    for (int w = 0; w < 50; w++) begin
      int k, c;
      k = $urandom_range(0, 12);
      c = 0;
      // clocks of this window: 4 quiet, k pulses of 1..2 clocks + 1..2 low, rest quiet
      repeat (4) begin @(negedge clk); c++; end
      for (int p = 0; p < k; p++) begin
        int hi, lo;
        hi = $urandom_range(1, 2);
        lo = $urandom_range(1, 2);
        din = 1; repeat (hi) begin @(negedge clk); c++; end
        din = 0; repeat (lo) begin @(negedge clk); c++; end
      end
      while (c < W) begin @(negedge clk); c++; end
      sum += k;
      chk(rate == 32'(k), $sformatf("window %0d rate=%0d exp=%0d", w, rate, k));
      chk(total == 32'(sum), $sformatf("window %0d total=%0d exp=%0d", w, total, sum));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

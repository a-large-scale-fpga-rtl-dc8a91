// tb_cluster_finder: random hit patterns and random size bounds. The expected
// output is computed from maximal runs of active channels: a run of length L
// in [size_lo, size_hi] and in 3..5 marks its anchor a + (L-1)/2.
module tb_cluster_finder;
  localparam int N = 192;
  logic clk = 0, rst_n = 0;
  logic [3:0] size_lo = 3, size_hi = 5;
  logic [N-1:0] din = '0, dout, exp;
  int checks = 0, failures = 0, nclus = 0, nrej = 0;

  cluster_finder #(.N(N), .SMIN(3), .SMAX(5)) dut (.*);

  always #5 clk = ~clk;
  initial begin #500000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input logic c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic logic [N-1:0] model(input logic [N-1:0] v, input int lo, input int hi);
    logic [N-1:0] r = '0;
    int i = 0;
    while (i < N) begin
      if (v[i]) begin
        int a = i;
        while (i < N && v[i]) i++;
        if ((i - a) >= lo && (i - a) <= hi && (i - a) >= 3 && (i - a) <= 5) r[a + (i - a - 1) / 2] = 1'b1;
      end else i++;
    end
    return r;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < 3000; v++) begin
      if (v % 500 == 0) begin
        size_lo = 4'($urandom_range(1, 5));
        size_hi = 4'($urandom_range(3, 7));
      end
      // build runs of random length separated by gaps
      din = '0;
      for (int i = $urandom_range(2); i < N; ) begin
        int len;
        len = $urandom_range(1, 8);
        for (int k = 0; k < len && i + k < N; k++) din[i + k] = 1'b1;
        i += len + $urandom_range(1, 6);
      end
      exp = model(din, int'(size_lo), int'(size_hi));
      @(negedge clk);
      chk(dout == exp, $sformatf("v=%0d lo=%0d hi=%0d", v, size_lo, size_hi));
      nclus += $countones(exp);
      nrej  += $countones(model(din, 3, 5) & ~exp);
    end
    chk(nclus > 1000 && nrej > 100, $sformatf("clusters found %0d and rejected by the bounds %0d", nclus, nrej));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

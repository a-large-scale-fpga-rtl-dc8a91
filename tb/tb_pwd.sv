// tb_pwd: directed pulses of every length against every delay (a pulse of L
// clocks must leave max(L-delay, 0) clocks), then random traffic compared with
// din(t) AND din(t-delay) kept in a history buffer.
module tb_pwd;
  localparam int N = 32;
  logic clk = 0, rst_n = 0;
  logic [3:0] delay = 0;
  logic [N-1:0] din = '0, dout;
  int checks = 0, failures = 0;
  logic [N-1:0] hist [$];

  pwd #(.N(N), .DMAX(15)) dut (.*);

  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input logic c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // directed: pulse length L on bit 3, count output clocks
    for (int d = 0; d <= 15; d += 1)
      for (int L = 1; L <= 18; L += 1) begin
        int cnt;
        cnt = 0;
        delay = 4'(d);
        din = '0;
        repeat (18) @(negedge clk);
        for (int k = 0; k < L + 20; k++) begin
          din[3] = (k < L);
          @(negedge clk);
          if (dout[3]) cnt++;
        end
        chk(cnt == ((L > d) ? L - d : 0), $sformatf("d=%0d L=%0d cnt=%0d", d, L, cnt));
      end
    // random
    for (int k = 0; k < 40; k++) hist.push_front('0);
    din = '0;
    repeat (20) @(negedge clk);
    for (int v = 0; v < 3000; v++) begin
      logic [N-1:0] nv;
      if (v % 500 == 0) delay = 4'($urandom_range(15));
      nv = din ^ ($urandom & $urandom & $urandom);
      din = nv;
      hist.push_front(din);
      void'(hist.pop_back());
      @(negedge clk);
      if (v % 500 > 16) chk(dout == (hist[0] & hist[delay]), $sformatf("random v=%0d", v));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_stage1_module: drives hit patterns into one first-stage module and checks
// which output bit fires, when, and for how long, for: a size-4 cluster, too
// large and too small clusters, changed size bounds, a short overlap removed by
// the PWD (and passed with PWD delay 0), the raw path, the output delay, a
// channel-map entry, and the OR output / total counter read over the bus.
// Reference timing (gate 8, PWD delay 2, output delay 0): cluster output
// starts 10 clocks after the input and lasts 8-2 = 6 clocks; raw output
// starts 6 clocks after the input and lasts 8 clocks.
module tb_stage1_module;
  import kaos_pkg::*;
  logic clk = 0, rst_n = 0, cfg_we = 0;
  logic [AW-1:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0, cfg_rdata, rate;
  logic [191:0] din = '0;
  logic [31:0] dout;
  logic or_out, or_q = 0;
  int checks = 0, failures = 0, or_edges = 0;
  int first, cnt;
  logic [31:0] bits;

  stage1_module #(.MODULE_ID(3)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin or_q <= or_out; if (or_out && !or_q) or_edges++; end
  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input logic c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic wr(input logic [AW-1:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  function automatic logic [191:0] run(input int lo, input int hi);
    logic [191:0] p = '0;
    for (int i = lo; i <= hi; i++) p[i] = 1'b1;
    return p;
  endfunction

  // apply pa at clock 0, add pb at clock dt, hold everything 20 clocks
  task automatic shot(input logic [191:0] pa, input logic [191:0] pb, input int dt);
    first = -1; cnt = 0; bits = '0;
    for (int k = 0; k < 60; k++) begin
      din = (k < 20 ? pa : '0) | ((k >= dt && k < 20) ? pb : '0);
      @(negedge clk);
      if (dout != 0) begin
        if (first < 0) first = k + 1;
        cnt++;
        bits |= dout;
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    // size-4 cluster at channels 30..33: anchor 31 -> bit 5
    shot(run(30, 33), '0, 0);
    chk(first == 10 && cnt == 6 && bits == 32'h20, $sformatf("size 4 cluster first=%0d cnt=%0d bits=%h", first, cnt, bits));
    // size 7 and size 2: rejected
    shot(run(60, 66), '0, 0);
    chk(cnt == 0, "size 7 rejected");
    shot(run(60, 61), '0, 0);
    chk(cnt == 0, "size 2 rejected");
    // two clusters of size 3 and 5 in one event: anchors 121 (bit 20), 182 (bit 30)
    shot(run(120, 122) | run(180, 184), '0, 0);
    chk(cnt == 6 && bits == 32'h4010_0000, $sformatf("sizes 3 and 5 bits=%h", bits));
    // lower bound 4: size 3 now rejected, size 4 still found
    wr(16'(REG_CLUSTER_MIN), 4);
    shot(run(120, 122), '0, 0);
    chk(cnt == 0, "size 3 rejected with lower bound 4");
    shot(run(120, 123), '0, 0);
    chk(cnt == 6 && bits == 32'h0010_0000, "size 4 found with lower bound 4");
    wr(16'(REG_CLUSTER_MIN), 3);
    // short overlap: channel 92 starts 7 clocks late -> 1-clock cluster, PWD removes it
    shot(run(90, 91), run(92, 92), 7);
    chk(cnt == 0, $sformatf("short cluster suppressed by PWD cnt=%0d", cnt));
    wr(16'(REG_PWD_DELAY), 0);
    shot(run(90, 91), run(92, 92), 7);
    chk(cnt == 1 && bits == 32'h8000, $sformatf("short cluster passes without PWD cnt=%0d bits=%h", cnt, bits));
    wr(16'(REG_PWD_DELAY), 2);
    // raw path: a single channel 100 -> bit 16
    wr(16'(REG_MUX_SEL), 32'(S1_RAW));
    shot(run(100, 100), '0, 0);
    chk(first == 6 && cnt == 8 && bits == 32'h1_0000, $sformatf("raw first=%0d cnt=%0d bits=%h", first, cnt, bits));
    // output delay 5
    wr(16'(REG_OUT_DELAY), 5);
    shot(run(100, 100), '0, 0);
    chk(first == 11 && cnt == 8, $sformatf("delayed raw first=%0d", first));
    wr(16'(REG_OUT_DELAY), 0);
    // channel map: output 10 takes input 150 -> bits 1 and 25
    wr(ADDR_TBL | 16'd10, 150);
    shot(run(150, 150), '0, 0);
    chk(bits == 32'h0200_0002, $sformatf("mapped bits=%h", bits));
    // gate width 3 shortens the raw output
    wr(16'(REG_GATE_WIDTH), 3);
    shot(run(100, 100), '0, 0);
    chk(cnt == 3, "gate width 3");
    // monitor: counted OR edges against the total register, module id
    repeat (5) @(negedge clk);
    cfg_addr = ADDR_TOTAL; #1;
    chk(cfg_rdata == 32'(or_edges) && or_edges == 8, $sformatf("total=%0d edges=%0d", cfg_rdata, or_edges));
    cfg_addr = ADDR_ID; #1;
    chk(cfg_rdata == 3, "module id");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_kaos_trigger: end-to-end test of the full 37-module trigger at its
// default size (2 x 2304 channels). Particle tracks are injected as fibre
// clusters in both planes; the test follows each through first stage,
// theta reduction, coincidence matrix and output stage, and checks the first
// level trigger (flt). Each mechanism is counted and must occur at least once:
//   matrix accept (flt 23 clocks after the hits), matrix reject, single plane,
//   cluster-size reject, PWD suppression of a short cluster, raw mode,
//   x AND theta mode of the coincidence stage, x AND theta mode of the output
//   stage, output delay, and the trigger count read from the output module.
module tb_kaos_trigger;
  import kaos_pkg::*;
  localparam int NCH = 2304;
  logic clk = 0, rst_n = 0, cfg_we = 0;
  logic [5:0] cfg_sel = 0;
  logic [AW-1:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0, cfg_rdata;
  logic [NCH-1:0] x_in = '0, t_in = '0;
  logic flt;
  logic [36:0] or_mon;
  logic [31:0] out_bus;
  int checks = 0, failures = 0, ntrig = 0;
  int first, cnt;
  int n_accept = 0, n_reject = 0, n_single = 0, n_size = 0, n_pwd = 0, n_raw = 0,
      n_xt3 = 0, n_xt4 = 0, n_delay = 0, n_count = 0;
  int theta_base [6] = '{0, 0, 1, 2, 2, 2};

  kaos_trigger dut (.*);

  always #5 clk = ~clk;
  initial begin #3000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input logic c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic wr(input int sel, input logic [AW-1:0] a, input logic [31:0] d);
    @(negedge clk); cfg_sel = 6'(sel); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  // x bin (0..63) of x channel ch inside its coincidence module, and the module
  function automatic int xmod(input int ch);  return (ch / 192) / 2; endfunction
  function automatic int xbin(input int ch);  return ((ch / 192) % 2) * 32 + (ch % 192) / 6; endfunction
  // theta: stage-1 module j, reduction r = j/2, bit ((j%2)*32 + b)/2
  function automatic int tred(input int ch);  return (ch / 192) / 2; endfunction
  function automatic int tbit(input int ch);  return (((ch / 192) % 2) * 32 + (ch % 192) / 6) / 2; endfunction
  function automatic int tbin(input int c, input int ch); return (tred(ch) - theta_base[c]) * 32 + tbit(ch); endfunction

  // allow (x channel, theta channel) in the matrix of the coincidence module of x
  task automatic allow(input int xc, input int tc);
    int c, i, j;
    c = xmod(xc); i = xbin(xc); j = tbin(c, tc);
    wr(30 + c, ADDR_TBL | 16'(i * 4 + j / 32), 32'(1) << (j % 32));
  endtask

  // x cluster [xa, xa+xn) whose last channel starts at clock xd, theta cluster [ta, ta+tn) from clock 0,
  // each held 12 clocks; n < 0 means none
  task automatic event_(input int xa, input int xn, input int xd, input int ta, input int tn);
    first = -1; cnt = 0;
    for (int k = 0; k < 70; k++) begin
      x_in = '0; t_in = '0;
      if (k < 12)
        for (int q = 0; q < tn; q++) t_in[ta + q] = 1'b1;
      if (k < 12)                          // last channel starts xd clocks late
        for (int q = 0; q < xn; q++) if (q < xn - 1 || k >= xd) x_in[xa + q] = 1'b1;
      @(negedge clk);
      if (flt) begin
        if (first < 0) first = k + 1;
        cnt++;
      end
    end
    if (cnt > 0) ntrig++;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    // read module ids across the crate
    for (int m = 0; m < 37; m++) begin
      cfg_sel = 6'(m); cfg_addr = ADDR_ID; #1;
      chk(cfg_rdata == 32'(m), $sformatf("module id %0d", m));
    end
    // output stage: x AND theta needs the coincidence matrix output (default)
    allow(1000, 1200);
    // coincidence stage outputs -> output stage OR (default)
    event_(999, 4, 0, 1199, 4);        // anchors 1000 and 1200
    chk(first == 23 && cnt > 0, $sformatf("matrix accept first=%0d cnt=%0d", first, cnt));
    if (first == 23) n_accept++;
    event_(999, 4, 0, 1599, 4);
    chk(cnt == 0, "matrix reject"); if (cnt == 0) n_reject++;
    event_(999, 4, 0, 0, 0);
    chk(cnt == 0, "x plane only"); if (cnt == 0) n_single++;
    event_(0, 0, 0, 1199, 4);
    chk(cnt == 0, "theta plane only"); if (cnt == 0) n_single++;
    event_(997, 7, 0, 1199, 4);
    chk(cnt == 0, "x cluster of 7 rejected"); if (cnt == 0) n_size++;
    // x cluster whose last channel arrives 7 clocks late: 1-clock overlap
    event_(999, 3, 7, 1199, 4);
    chk(cnt == 0, "short x cluster removed by PWD"); if (cnt == 0) n_pwd++;
    wr(xmod(1000) * 2 + 1000 / 192 % 2, 16'(REG_PWD_DELAY), 0);
    event_(999, 3, 7, 1199, 4);
    chk(cnt > 0, "short x cluster kept without PWD");
    wr(1000 / 192, 16'(REG_PWD_DELAY), 2);
    // raw mode on x module 5: a single hit channel (no cluster) triggers
    event_(1000, 1, 0, 1199, 4);
    chk(cnt == 0, "single channel is no cluster");
    wr(1000 / 192, 16'(REG_MUX_SEL), 32'(S1_RAW));
    event_(1000, 1, 0, 1199, 4);
    chk(cnt > 0, "raw mode triggers on a single channel"); if (cnt > 0) n_raw++;
    wr(1000 / 192, 16'(REG_MUX_SEL), 32'(S1_CLUSTER));
    // output delay on the x module: x normally reaches the coincidence stage
    // 3 clocks before theta; delayed by 5 it becomes the later one by 2
    wr(1000 / 192, 16'(REG_OUT_DELAY), 5);
    event_(999, 4, 0, 1199, 4);
    chk(first == 25 && cnt > 0, $sformatf("x delayed by 5: first=%0d", first)); if (first == 25) n_delay++;
    wr(1000 / 192, 16'(REG_OUT_DELAY), 0);
    // coincidence stage in x AND theta mode: position independent
    for (int c = 0; c < 6; c++) wr(30 + c, 16'(REG_MUX_SEL), 32'(S3_XT));
    event_(999, 4, 0, 1599, 4);
    chk(cnt > 0, "x AND theta in coincidence stage"); if (cnt > 0) n_xt3++;
    // output stage x AND theta: modules 0-2 send x (2:1), 3-5 theta (4:1)
    for (int c = 0; c < 3; c++) wr(30 + c, 16'(REG_MUX_SEL), 32'(S3_RED2X));
    for (int c = 3; c < 6; c++) wr(30 + c, 16'(REG_MUX_SEL), 32'(S3_RED4T));
    wr(36, 16'(REG_MUX_SEL), 32'(S4_XT));
    event_(999, 4, 0, 1599, 4);         // x in module 2, theta 1599 in reduction 4 (module 3..5)
    chk(cnt > 0, "x AND theta in output stage"); if (cnt > 0) n_xt4++;
    event_(1500, 4, 0, 0, 0);
    chk(cnt == 0, "output stage x AND theta: x only");
    // trigger count of the output module
    repeat (5) @(negedge clk);
    cfg_sel = 36; cfg_addr = ADDR_TOTAL; #1;
    chk(cfg_rdata == 32'(ntrig), $sformatf("flt count %0d vs %0d", cfg_rdata, ntrig));
    if (cfg_rdata == 32'(ntrig)) n_count++;
    $display("mechanisms: accept=%0d reject=%0d single=%0d size=%0d pwd=%0d raw=%0d delay=%0d xt3=%0d xt4=%0d count=%0d",
             n_accept, n_reject, n_single, n_size, n_pwd, n_raw, n_delay, n_xt3, n_xt4, n_count);
    chk(n_accept > 0 && n_reject > 0 && n_single > 0 && n_size > 0 && n_pwd > 0 && n_raw > 0 &&
        n_delay > 0 && n_xt3 > 0 && n_xt4 > 0 && n_count > 0, "every mechanism occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

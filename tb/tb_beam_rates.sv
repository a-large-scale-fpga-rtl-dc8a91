// tb_beam_rates: beam-test style workload on the full 37-module trigger.
// A synthetic event stream mixes the signal types seen in the in-beam tests:
// single random hits, wide clusters from particles at large angles, clusters
// in one plane only, real tracks (clusters in both planes at an allowed x/theta
// combination) and random cluster pairs outside the acceptance. Events are
// placed in separate 48-clock slots so every expected count is exact.
// The same stream is run three times:
//   pass 0  first stage raw, output OR          -> raw signal counts per plane
//   pass 1  clusters, matrix, output OR         -> cluster counts, tracks (flt)
//   pass 2  clusters, coincidence 6:1, output OR-> x OR theta (flt)
// Counts are read from the modules' total registers over the bus and compared
// with the numbers of injected events; the rate reductions are printed.
// The mix of event types is synthetic, chosen to exercise every type often.
module tb_beam_rates;
  import kaos_pkg::*;
  localparam int NCH = 2304, SLOTS = 600, SLOT = 48;
  logic clk = 0, rst_n = 0, cfg_we = 0;
  logic [5:0] cfg_sel = 0;
  logic [AW-1:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0, cfg_rdata;
  logic [NCH-1:0] x_in = '0, t_in = '0;
  logic flt;
  logic [36:0] or_mon;
  logic [31:0] out_bus;
  int checks = 0, failures = 0;
  int theta_base [6] = '{0, 0, 1, 2, 2, 2};
  // event list: type, x anchor, x size, theta anchor, theta size
  int ev_type [SLOTS], ev_xa [SLOTS], ev_xn [SLOTS], ev_ta [SLOTS], ev_tn [SLOTS];
  int n_xraw = 0, n_traw = 0, n_xclu = 0, n_tclu = 0, n_trk = 0, n_or = 0;

  kaos_trigger dut (.*);

  always #5 clk = ~clk;
  initial begin #60000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input logic c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic wr(input int sel, input logic [AW-1:0] a, input logic [31:0] d);
    @(negedge clk); cfg_sel = 6'(sel); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic rd(input int sel, input logic [AW-1:0] a, output int v);
    @(negedge clk); cfg_sel = 6'(sel); cfg_addr = a; #1 v = int'(cfg_rdata);
  endtask

  // channel at the centre of a 6-channel group, inside one first-stage module
  function automatic int group_ch(input int module_idx, input int b);
    return module_idx * 192 + b * 6 + 2;
  endfunction

  // theta anchor for theta bin j of coincidence module c (12-channel bins)
  function automatic int theta_ch(input int c, input int j);
    int r, q;
    r = theta_base[c] + j / 32;
    q = 2 * (j % 32);                 // first-stage bit pair of reduction bit
    return group_ch(2 * r + q / 32, q % 32);
  endfunction

  function automatic int rnd_size(); return $urandom_range(3, 5); endfunction

  task automatic make_events();
    for (int s = 0; s < SLOTS; s++) begin
      int p, c, i, j, m;
      p = $urandom_range(99);
      ev_xn[s] = 0; ev_tn[s] = 0; ev_xa[s] = 0; ev_ta[s] = 0;
      m = $urandom_range(11);
      if (p < 30)      begin ev_type[s] = 0; ev_xa[s] = group_ch(m, $urandom_range(1, 30)); ev_xn[s] = 1; end
      else if (p < 55) begin ev_type[s] = 1; ev_ta[s] = group_ch(m, $urandom_range(1, 30)); ev_tn[s] = 1; end
      else if (p < 63) begin ev_type[s] = 2; ev_xa[s] = group_ch(m, $urandom_range(2, 29)); ev_xn[s] = $urandom_range(7, 9); end
      else if (p < 70) begin ev_type[s] = 3; ev_ta[s] = group_ch(m, $urandom_range(2, 29)); ev_tn[s] = $urandom_range(7, 9); end
      else if (p < 80) begin ev_type[s] = 4; ev_xa[s] = group_ch(m, $urandom_range(1, 30)); ev_xn[s] = rnd_size(); end
      else if (p < 88) begin ev_type[s] = 5; ev_ta[s] = group_ch(m, $urandom_range(1, 30)); ev_tn[s] = rnd_size(); end
      else begin
        // x bin i of module c; allowed theta bins are |j - 2i| <= 2
        c = $urandom_range(5); i = $urandom_range(1, 62);
        if (i % 32 == 0 || i % 32 == 31) i++;
        if (p < 94) begin ev_type[s] = 6; j = 2 * i + $urandom_range(0, 4) - 2; end
        else        begin ev_type[s] = 7; j = (2 * i + 40) % 128; end
        if (j < 0) j = 0;
        if (j > 127) j = 127;
        ev_xa[s] = group_ch(2 * c + i / 32, i % 32); ev_xn[s] = rnd_size();
        ev_ta[s] = theta_ch(c, j);                    ev_tn[s] = rnd_size();
      end
    end
  endtask

  task automatic play();
    for (int s = 0; s < SLOTS; s++)
      for (int k = 0; k < SLOT; k++) begin
        x_in = '0; t_in = '0;
        if (k < 4) begin
          for (int q = 0; q < ev_xn[s]; q++) x_in[ev_xa[s] - (ev_xn[s] - 1) / 2 + q] = 1'b1;
          for (int q = 0; q < ev_tn[s]; q++) t_in[ev_ta[s] - (ev_tn[s] - 1) / 2 + q] = 1'b1;
        end
        @(negedge clk);
      end
    repeat (40) @(negedge clk);
  endtask

  task automatic sum_totals(input int lo, input int hi, output int n);
    int v;
    n = 0;
    for (int m = lo; m <= hi; m++) begin rd(m, ADDR_TOTAL, v); n += v; end
  endtask

  task automatic reset_dut();
    @(negedge clk); rst_n = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (2) @(negedge clk);
  endtask

  task automatic load_matrix();
    for (int c = 0; c < 6; c++)
      for (int i = 0; i < 64; i++)
        for (int w = 0; w < 4; w++) begin
          logic [31:0] d;
          for (int b = 0; b < 32; b++) begin
            int j;
            j = 32 * w + b;
            d[b] = (j - 2 * i >= -2) && (j - 2 * i <= 2);
          end
          if (d != 0) wr(30 + c, ADDR_TBL | 16'(i * 4 + w), d);
        end
  endtask

  initial begin
    int a, b, f;
    make_events();
    for (int s = 0; s < SLOTS; s++) begin
      if (ev_xn[s] > 0) n_xraw++;
      if (ev_tn[s] > 0) n_traw++;
      if (ev_xn[s] >= 3 && ev_xn[s] <= 5) n_xclu++;
      if (ev_tn[s] >= 3 && ev_tn[s] <= 5) n_tclu++;
      if (ev_type[s] == 6) n_trk++;
      if (ev_type[s] >= 4) n_or++;
    end
    // pass 0: raw signals
    reset_dut();
    for (int m = 0; m < 24; m++) wr(m, 16'(REG_MUX_SEL), 32'(S1_RAW));
    play();
    sum_totals(0, 11, a); sum_totals(12, 23, b);
    chk(a == n_xraw, $sformatf("raw x %0d exp %0d", a, n_xraw));
    chk(b == n_traw, $sformatf("raw theta %0d exp %0d", b, n_traw));
    // pass 1: clusters and acceptance matrix
    reset_dut();
    load_matrix();
    play();
    sum_totals(0, 11, a); sum_totals(12, 23, b); rd(36, ADDR_TOTAL, f);
    chk(a == n_xclu, $sformatf("x clusters %0d exp %0d", a, n_xclu));
    chk(b == n_tclu, $sformatf("theta clusters %0d exp %0d", b, n_tclu));
    chk(f == n_trk, $sformatf("accepted tracks %0d exp %0d", f, n_trk));
    // pass 2: x OR theta
    reset_dut();
    for (int c = 0; c < 6; c++) wr(30 + c, 16'(REG_MUX_SEL), 32'(S3_RED6));
    play();
    rd(36, ADDR_TOTAL, f);
    chk(f == n_or, $sformatf("x OR theta %0d exp %0d", f, n_or));
    $display("workload: slots=%0d raw x=%0d raw theta=%0d clusters x=%0d theta=%0d x-or-theta=%0d tracks=%0d",
             SLOTS, n_xraw, n_traw, n_xclu, n_tclu, n_or, n_trk);
    $display("reduction raw x -> clusters x = 1:%0.1f, clusters -> accepted tracks = 1:%0.1f",
             real'(n_xraw) / real'(n_xclu), real'(n_or) / real'(n_trk > 0 ? n_trk : 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_reduction_module: random sparse pulses on the 64 inputs; every output bit
// must be the OR of two neighbouring gated inputs, 3 clocks after the inputs.
// The gates are modelled from each input's last rising edge. Also checks the
// OR output and the rate registers read over the bus.
module tb_reduction_module;
  import kaos_pkg::*;
  logic clk = 0, rst_n = 0, cfg_we = 0;
  logic [AW-1:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0, cfg_rdata, rate;
  logic [63:0] din = '0, prev = '0;
  logic [31:0] dout;
  logic or_out, or_q = 0;
  int checks = 0, failures = 0, or_edges = 0, active = 0;
  int last_edge [64], prev_edge [64];
  int width = 8;

  reduction_module #(.MODULE_ID(24)) dut (.*);

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

  initial begin
    for (int i = 0; i < 64; i++) begin last_edge[i] = -1000; prev_edge[i] = -1000; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    wr(16'(REG_GATE_WIDTH), 5); width = 5;
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < 64; i++) din[i] = ($urandom_range(99) < 3) ? ~prev[i] : prev[i];
      @(negedge clk);
      // the gate of input i is high at this check if one of its last two
      // rising edges was driven 2..width+1 clocks ago (gate 2 clocks, 2:1 1 clock)
      if (t > 10) begin
        logic [31:0] e;
        e = '0;
        for (int i = 0; i < 64; i++)
          if (((t - last_edge[i]) >= 2 && (t - last_edge[i]) <= width + 1) ||
              ((t - prev_edge[i]) >= 2 && (t - prev_edge[i]) <= width + 1)) e[i / 2] = 1'b1;
        if (e != 0) active++;
        chk(dout == e, $sformatf("t=%0d dout=%h exp=%h", t, dout, e));
      end
      for (int i = 0; i < 64; i++) if (din[i] && !prev[i]) begin prev_edge[i] = last_edge[i]; last_edge[i] = t; end
      prev = din;
    end
    chk(active > 500, "outputs exercised");
    din = '0;
    repeat (20) @(negedge clk);
    cfg_addr = ADDR_TOTAL; #1;
    chk(cfg_rdata == 32'(or_edges) && or_edges > 3, $sformatf("total=%0d edges=%0d", cfg_rdata, or_edges));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

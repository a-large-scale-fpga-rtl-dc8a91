// tb_output_module: single pulses on the six input cables. With the OR
// selection any cable gives a first level trigger 5 clocks later; with the
// x AND theta selection (cables 0-2 x, 3-5 theta by X_MASK) only an x cable
// together with a theta cable does, 4 clocks later. Also checks the reduced
// bus and the trigger count read back as total.
module tb_output_module;
  import kaos_pkg::*;
  logic clk = 0, rst_n = 0, cfg_we = 0;
  logic [AW-1:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0, cfg_rdata, rate;
  logic [191:0] din = '0;
  logic [31:0] red_out;
  logic flt;
  int checks = 0, failures = 0, ntrig = 0;
  int first, cnt;
  logic [31:0] rbits;

  output_module #(.MODULE_ID(36)) dut (.*);

  always #5 clk = ~clk;
  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input logic c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic wr(input logic [AW-1:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic shot(input int b0, input int b1);
    first = -1; cnt = 0; rbits = '0;
    for (int k = 0; k < 40; k++) begin
      din = '0;
      if (k < 2 && b0 >= 0) din[b0] = 1'b1;
      if (k < 2 && b1 >= 0) din[b1] = 1'b1;
      @(negedge clk);
      rbits |= red_out;
      if (flt) begin
        if (first < 0) first = k + 1;
        cnt++;
      end
    end
    if (cnt > 0) ntrig++;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    shot(7, -1);
    chk(first == 5 && cnt == 8 && rbits == 32'h2, $sformatf("OR first=%0d cnt=%0d red=%h", first, cnt, rbits));
    shot(150, -1);
    chk(first == 5 && rbits == 32'h0200_0000, "OR theta cable");
    wr(16'(REG_MUX_SEL), 32'(S4_XT));
    shot(7, -1);
    chk(cnt == 0, "x alone");
    shot(150, -1);
    chk(cnt == 0, "theta alone");
    shot(7, 40);
    chk(cnt == 0, "two x cables");
    shot(7, 150);
    chk(first == 4 && cnt == 8, $sformatf("x and theta first=%0d cnt=%0d", first, cnt));
    wr(16'(REG_X_MASK), 32'h3f);
    shot(7, 150);
    chk(cnt == 0, "all cables x: no theta");
    repeat (3) @(negedge clk);
    cfg_addr = ADDR_TOTAL; #1;
    chk(cfg_rdata == 32'(ntrig) && ntrig == 3, $sformatf("total=%0d n=%0d", cfg_rdata, ntrig));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_trigger_controller: reset values, write/read-back of all parameter
// registers, status registers, unmapped addresses and the forwarding of table
// writes (one clock later, only for addresses in the table window).
module tb_trigger_controller;
  import kaos_pkg::*;
  logic clk = 0, rst_n = 0, cfg_we = 0;
  logic [AW-1:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0, cfg_rdata, rate = 32'h1234, total = 32'h5678;
  reg_array_t regs;
  logic tbl_we;
  logic [TBL_AW-1:0] tbl_addr;
  logic [31:0] tbl_wdata;
  int checks = 0, failures = 0;
  logic [31:0] shadow [NREG];

  trigger_controller #(.MODULE_ID(17), .RST_MUX(32'd4)) dut (.*);

  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input logic c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    shadow = '{32'd8, 32'd3, 32'd5, 32'd2, 32'd4, 32'd0, 32'd400000000, 32'h7};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < NREG; r++) begin
      cfg_addr = AW'(r); #1;
      chk(cfg_rdata == shadow[r], $sformatf("reset value reg %0d = %0h", r, cfg_rdata));
      chk(regs[r] == shadow[r], $sformatf("regs[%0d]", r));
    end
    for (int v = 0; v < 200; v++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = AW'($urandom_range(NREG - 1)); cfg_wdata = $urandom;
      shadow[cfg_addr] = cfg_wdata;
      @(negedge clk);
      cfg_we = 0;
      for (int r = 0; r < NREG; r++) begin
        cfg_addr = AW'(r); #1;
        chk(cfg_rdata == shadow[r] && regs[r] == shadow[r], $sformatf("reg %0d", r));
      end
    end
    cfg_addr = ADDR_RATE;  #1 chk(cfg_rdata == 32'h1234, "rate");
    cfg_addr = ADDR_TOTAL; #1 chk(cfg_rdata == 32'h5678, "total");
    cfg_addr = ADDR_ID;    #1 chk(cfg_rdata == 32'd17, "id");
    cfg_addr = 16'h0100;   #1 chk(cfg_rdata == 0, "unmapped");
    // write to an unmapped address changes nothing and is not forwarded
    @(negedge clk); cfg_we = 1; cfg_addr = 16'h0009; cfg_wdata = 32'hdead;
    @(negedge clk); cfg_we = 0;
    chk(tbl_we == 0, "no table write for register space");
    for (int r = 0; r < NREG; r++) chk(regs[r] == shadow[r], "unmapped write ignored");
    // table writes
    for (int v = 0; v < 50; v++) begin
      logic [11:0] a;
      logic [31:0] d;
      a = 12'($urandom); d = $urandom;
      @(negedge clk); cfg_we = 1; cfg_addr = {4'h1, a}; cfg_wdata = d;
      @(negedge clk); cfg_we = 0;
      chk(tbl_we && tbl_addr == a && tbl_wdata == d, "table write forwarded");
      @(negedge clk);
      chk(!tbl_we, "table write single clock");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_coincidence_module: loads an acceptance matrix with one allowed
// combination (x bin 10, theta bin 40) and checks, for single x+theta hits,
// each multiplexer selection: matrix accept / reject, x AND theta, 2:1 x,
// 4:1 theta and 6:1 reductions, with their latencies (4 clocks, 5 for the
// matrix) and the gate length (8 clocks).
module tb_coincidence_module;
  import kaos_pkg::*;
  logic clk = 0, rst_n = 0, cfg_we = 0;
  logic [AW-1:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0, cfg_rdata, rate;
  logic [191:0] din = '0;
  logic [31:0] dout;
  logic or_out;
  int checks = 0, failures = 0;
  int first, cnt;
  logic [31:0] bits;

  coincidence_module #(.MODULE_ID(30)) dut (.*);

  always #5 clk = ~clk;
  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input logic c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic wr(input logic [AW-1:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  // x bin xb (-1: none) and theta bin tb (-1: none), pulse of 3 clocks
  task automatic shot(input int xb, input int tb);
    first = -1; cnt = 0; bits = '0;
    for (int k = 0; k < 40; k++) begin
      din = '0;
      if (k < 3 && xb >= 0) din[xb] = 1'b1;
      if (k < 3 && tb >= 0) din[64 + tb] = 1'b1;
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
    // matrix row 10: theta bin 40 allowed (word 1, bit 8)
    wr(ADDR_TBL | 16'(10 * 4 + 1), 32'h0000_0100);
    // default selection: matrix
    shot(10, 40);
    chk(first == 5 && cnt == 8 && bits == 32'h20, $sformatf("matrix accept first=%0d cnt=%0d bits=%h", first, cnt, bits));
    shot(10, 41);
    chk(cnt == 0, "matrix reject wrong theta");
    shot(12, 40);
    chk(cnt == 0, "matrix reject wrong x");
    shot(10, -1);
    chk(cnt == 0, "matrix needs both planes");
    // x AND theta
    wr(16'(REG_MUX_SEL), 32'(S3_XT));
    shot(12, 100);
    chk(first == 4 && cnt == 8 && bits == 32'h1, $sformatf("x&theta first=%0d bits=%h", first, bits));
    shot(12, -1);
    chk(cnt == 0, "x alone no coincidence");
    // 2:1 x
    wr(16'(REG_MUX_SEL), 32'(S3_RED2X));
    shot(13, 100);
    chk(first == 4 && bits == 32'h40, $sformatf("2:1 x bits=%h", bits));
    // 4:1 theta
    wr(16'(REG_MUX_SEL), 32'(S3_RED4T));
    shot(13, 100);
    chk(first == 4 && bits == 32'(1) << 25, $sformatf("4:1 theta bits=%h", bits));
    // 6:1 of all 192 bits: x bin 13 -> bit 2, theta bin 100 (bit 164) -> bit 27
    wr(16'(REG_MUX_SEL), 32'(S3_RED6));
    shot(13, 100);
    chk(first == 4 && bits == (32'h4 | 32'(1) << 27), $sformatf("6:1 bits=%h", bits));
    // gate width 2
    wr(16'(REG_GATE_WIDTH), 2);
    shot(13, -1);
    chk(cnt == 2, "gate width 2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

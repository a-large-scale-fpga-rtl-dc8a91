// tb_bus_mux: five random 32-bit inputs, every select value including the
// out-of-range ones; the registered output is compared one clock later.
module tb_bus_mux;
  localparam int W = 32, NIN = 5;
  logic clk = 0, rst_n = 0;
  logic [2:0] sel = 0;
  logic [NIN*W-1:0] din = '0;
  logic [W-1:0] dout, exp;
  int checks = 0, failures = 0;

  bus_mux #(.W(W), .NIN(NIN)) dut (.*);

  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input logic c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    chk(dout == '0, "reset");
    rst_n = 1;
    for (int v = 0; v < 2000; v++) begin
      sel = 3'($urandom_range(7));
      din = {$urandom, $urandom, $urandom, $urandom, $urandom};
      case (sel)
        3'd0: exp = din[31:0];
        3'd1: exp = din[63:32];
        3'd2: exp = din[95:64];
        3'd3: exp = din[127:96];
        3'd4: exp = din[159:128];
        default: exp = '0;
      endcase
      @(negedge clk);
      chk(dout == exp, $sformatf("sel=%0d", sel));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

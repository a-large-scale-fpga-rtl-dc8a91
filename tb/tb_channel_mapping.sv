// tb_channel_mapping: checks the reset identity map, then programs a random
// map over the table port and compares every output with the input channel it
// should copy, one clock later.
module tb_channel_mapping;
  localparam int N = 192;
  logic clk = 0, rst_n = 0, tbl_we = 0;
  logic [7:0] tbl_addr = 0, tbl_wdata = 0;
  logic [N-1:0] din = '0, dout;
  int checks = 0, failures = 0;
  int map [N];

  channel_mapping #(.N(N)) dut (.*);

  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input logic c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask


  initial begin
    for (int o = 0; o < N; o++) map[o] = o;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // identity after reset
    for (int v = 0; v < 20; v++) begin
      @(negedge clk); din = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      @(negedge clk); chk(dout == din, "identity map");
    end
    // random map
    for (int o = 0; o < N; o++) begin
      map[o] = $urandom_range(N - 1);
      @(negedge clk); tbl_we = 1; tbl_addr = 8'(o); tbl_wdata = 8'(map[o]);
    end
    @(negedge clk); tbl_we = 0;
    // out-of-range writes must be ignored
    @(negedge clk); tbl_we = 1; tbl_addr = 8'd200; tbl_wdata = 8'd3;
    @(negedge clk); tbl_we = 1; tbl_addr = 8'd5;   tbl_wdata = 8'd250;
    @(negedge clk); tbl_we = 0;
    for (int v = 0; v < 50; v++) begin
      @(negedge clk); din = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      @(negedge clk);
      for (int o = 0; o < N; o++) chk(dout[o] == din[map[o]], $sformatf("map out %0d", o));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

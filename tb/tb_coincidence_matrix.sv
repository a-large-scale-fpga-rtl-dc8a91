// tb_coincidence_matrix: loads a random sparse acceptance matrix word by word,
// then applies random x/theta hit patterns. Expected output: bit k set if
// some hit pair (x bin i, theta bin j) with i/2 == k has M[i][j] = 1.
// The result must appear 2 clocks after the inputs (checked at the first
// falling edge after the second rising edge).
module tb_coincidence_matrix;
  localparam int NX = 64, NT = 128, NOUT = 32;
  logic clk = 0, rst_n = 0, tbl_we = 0;
  logic [11:0] tbl_addr = 0;
  logic [31:0] tbl_wdata = 0;
  logic [NX-1:0] x = '0;
  logic [NT-1:0] t = '0;
  logic [NOUT-1:0] dout;
  int checks = 0, failures = 0, nacc = 0, nrej = 0;
  bit m [NX][NT];
  logic [NOUT-1:0] expq [$];

  coincidence_matrix #(.NX(NX), .NT(NT), .NOUT(NOUT)) dut (.*);

  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input logic c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // cleared matrix: nothing accepted
    x = '1; t = '1;
    repeat (3) @(negedge clk);
    chk(dout == 0, "empty matrix rejects all");
    // load: a band around theta = 2*x plus random extras
    for (int i = 0; i < NX; i++)
      for (int j = 0; j < NT; j++)
        m[i][j] = ((j - 2 * i) >= -3 && (j - 2 * i) <= 3) || ($urandom_range(99) < 2);
    for (int i = 0; i < NX; i++)
      for (int w = 0; w < NT / 32; w++) begin
        @(negedge clk);
        tbl_we = 1; tbl_addr = 12'(i * (NT / 32) + w);
        for (int b = 0; b < 32; b++) tbl_wdata[b] = m[i][32 * w + b];
      end
    @(negedge clk); tbl_we = 0;
    x = 0; t = 0; @(negedge clk); @(negedge clk);
    for (int k = 0; k < 1; k++) expq.push_back('0);
    for (int v = 0; v < 3000; v++) begin
      logic [NOUT-1:0] e;
      x = '0; t = '0;
      repeat ($urandom_range(1, 3)) x[$urandom_range(NX - 1)] = 1'b1;
      repeat ($urandom_range(1, 3)) t[$urandom_range(NT - 1)] = 1'b1;
      e = '0;
      for (int i = 0; i < NX; i++)
        for (int j = 0; j < NT; j++)
          if (x[i] && t[j] && m[i][j]) e[i / 2] = 1'b1;
      if (e != 0) nacc++; else nrej++;
      expq.push_back(e);
      @(negedge clk);
      chk(dout == expq.pop_front(), $sformatf("v=%0d", v));
    end
    chk(nacc > 100 && nrej > 100, "accepted and rejected tracks seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

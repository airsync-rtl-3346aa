// pn_correlator_tb: noise, then the preamble rotated by a random carrier
// phase; detect must be high exactly 2 cycles after the last chip and
// nowhere else.
module pn_correlator_tb;
  import airsync_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, detect;
  cplx_t in_data = '0;
  logic [15:0] threshold = 16'd300, metric;
  int cyc = 0, expect_at = -1, n_det = 0;

  pn_correlator #(.LEN(PN_LEN), .IN_W(8)) dut (.*);

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n) begin
    if (detect) n_det++;
    if (cyc == expect_at) begin
      checks++;
      if (!detect) begin failures++; $display("FAIL no detect at %0d metric %0d", cyc, metric); end
    end else if (detect) begin
      checks++; failures++; $display("FAIL false detect at %0d", cyc);
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 8; trial++) begin
      real th;
      th = 6.2831853 * $urandom_range(0, 999) / 1000.0;
      repeat (100 + $urandom_range(0, 50)) begin
        @(negedge clk);
        in_valid = 1;
        in_data.re = 16'(int'($urandom_range(0, 1200)) - 600);
        in_data.im = 16'(int'($urandom_range(0, 1200)) - 600);
      end
      for (int c = 0; c < PN_LEN; c++) begin
        real a;
        a = (pn_chip(c) ? -1.0 : 1.0) * 4096.0;
        @(negedge clk);
        in_data.re = 16'($rtoi(a * $cos(th)) + int'($urandom_range(0, 400)) - 200);
        in_data.im = 16'($rtoi(a * $sin(th)) + int'($urandom_range(0, 400)) - 200);
        if (c == PN_LEN - 1) expect_at = cyc + 2;
      end
    end
    repeat (150) @(negedge clk);
    checks++;
    if (n_det != 8) begin failures++; $display("FAIL %0d detections", n_det); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

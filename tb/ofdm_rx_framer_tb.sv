// ofdm_rx_framer_tb: a stream of symbols with random samples; the captured
// block must be the 64 samples after the cyclic prefix, out_valid exactly
// one cycle after the last sample, and nothing when capture is low.
module ofdm_rx_framer_tb;
  import airsync_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, capture = 0, out_valid;
  cplx_t in_data, out_data [N_FFT];
  logic [6:0] sym_pos = 0;
  cplx_t sent [SYM_LEN];

  ofdm_rx_framer #(.N(N_FFT), .CP(CP_LEN)) dut (.*);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 6; s++) begin
      bit cap;
      cap = (s != 3);
      for (int p = 0; p < SYM_LEN; p++) begin
        @(negedge clk);
        checks++;
        if (out_valid != (p == 0 && s > 0 && s != 4)) begin failures++; $display("FAIL out_valid s=%0d p=%0d", s, p); end
        if (out_valid) begin
          for (int n = 0; n < N_FFT; n++) begin
            checks++;
            if (out_data[n] != sent[CP_LEN + n]) begin failures++; $display("FAIL data %0d", n); end
          end
        end
        in_valid = 1; capture = cap; sym_pos = 7'(p);
        in_data = cplx_t'($urandom);
        sent[p] = in_data;
      end
    end
    @(negedge clk);
    checks++;
    if (!out_valid) begin failures++; $display("FAIL last"); end
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

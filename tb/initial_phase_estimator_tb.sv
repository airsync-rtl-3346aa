// initial_phase_estimator_tb: stored estimate = measured phase minus the
// known header phase (0 or pi by hdr_sign), all_valid only after every
// subcarrier was written, clear empties it.
module initial_phase_estimator_tb;
  import airsync_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear = 0, wr_en = 0, all_valid;
  logic [3:0] wr_idx, rd_idx;
  phase_t wr_phase, rd_phase;
  phase_t meas [16];

  initial_phase_estimator #(.NSC(16)) dut (.*);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 3; r++) begin
      @(negedge clk) clear = 1;
      @(negedge clk) clear = 0;
      checks++;
      if (all_valid) begin failures++; $display("FAIL valid after clear"); end
      for (int i = 15; i >= 0; i--) begin
        meas[i] = phase_t'($urandom_range(0, 65535));
        wr_en = 1; wr_idx = 4'(i); wr_phase = meas[i];
        @(negedge clk);
        wr_en = 0;
        checks++;
        if (all_valid != (i == 0)) begin failures++; $display("FAIL all_valid at %0d", i); end
      end
      for (int i = 0; i < 16; i++) begin
        rd_idx = 4'(i);
        #1;
        checks++;
        if (rd_phase != meas[i] - (hdr_sign(i) ? 16'h8000 : 16'h0)) begin
          failures++; $display("FAIL sc %0d: %0d", i, rd_phase);
        end
      end
    end
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

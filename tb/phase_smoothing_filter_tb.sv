// phase_smoothing_filter_tb: pilots with per-pilot offsets, a constant drift
// and small jitter; the slope must equal the sum of the last four per-symbol
// advances summed over the pilots (reference model below), t_sym must count
// symbols since the header, and slope_ready must rise after four symbols.
module phase_smoothing_filter_tb;
  import airsync_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ref_start = 0, in_valid = 0, in_last = 0, slope_valid, slope_ready;
  logic [1:0] in_idx;
  phase_t in_phase;
  logic signed [19:0] slope;
  logic [15:0] t_sym;

  phase_smoothing_filter #(.NUM_P(4), .WIN(4), .T_W(16)) dut (.*);

  int adv_hist [$];
  initial begin
    int ph [4], prev [4], drift;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      drift = (f == 0) ? 700 : -1234;       // phase units per symbol
      adv_hist.delete();
      for (int p = 0; p < 4; p++) ph[p] = 1000 * p + 20000 * f;
      @(negedge clk) ref_start = 1;
      @(negedge clk) ref_start = 0;
      for (int t = 0; t <= 10; t++) begin
        int sum;
        sum = 0;
        for (int p = 0; p < 4; p++) begin
          int jit;
          jit = int'($urandom_range(0, 20)) - 10;
          if (t > 0) ph[p] = ph[p] + drift + jit;
        end
        for (int p = 0; p < 4; p++) begin
          @(negedge clk);
          in_valid = 1; in_idx = 2'(3 - p); in_phase = phase_t'(ph[3 - p] & 16'hffff);
          in_last = (p == 3);
        end
        @(negedge clk) in_valid = 0; in_last = 0;
        for (int p = 0; p < 4; p++) begin
          if (t > 0) sum += ph[p] - prev[p];
          prev[p] = ph[p];
        end
        if (t > 0) begin
          int want;
          adv_hist.push_front(sum);
          if (adv_hist.size() > 4) void'(adv_hist.pop_back());
          want = 0;
          foreach (adv_hist[k]) want += adv_hist[k];
          while (!slope_valid) @(negedge clk);
          checks++;
          if (slope != 20'(want)) begin failures++; $display("FAIL t=%0d slope %0d want %0d", t, slope, want); end
          checks++;
          if (t_sym != 16'(t)) begin failures++; $display("FAIL t_sym %0d want %0d", t_sym, t); end
          checks++;
          if (slope_ready != (t >= 4)) begin failures++; $display("FAIL ready at t=%0d", t); end
        end
        repeat (5) @(negedge clk);
      end
      // mean slope per symbol is within rounding of the drift
      checks++;
      if ((slope >>> 4) > drift + 4 || (slope >>> 4) < drift - 4) begin failures++; $display("FAIL mean slope"); end
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

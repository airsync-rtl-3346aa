// cordic_vectoring_tb: phase of random complex samples against $atan2, the
// tag pass-through, back-to-back throughput and the ITER+1 cycle latency.
module cordic_vectoring_tb;
  import airsync_pkg::*;
  localparam int ITER = 14;
  localparam real PI = 3.14159265358979;
  localparam int NV = 200;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, out_valid;
  cplx_t in_data;
  logic [5:0] in_tag = 0, out_tag;
  phase_t out_phase;

  cordic_vectoring #(.ITER(ITER), .TAG_W(6)) dut (.*);

  cplx_t  vec [NV];
  int     sent_at [NV];
  int     cyc = 0, got = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    real want, err;
    int i;
    i = int'(out_tag) + 64 * (got / 64);
    want = $atan2(real'(vec[i].im), real'(vec[i].re)) / (2.0 * PI) * 65536.0;
    err = real'(out_phase) - want;
    while (err > 32768.0) err -= 65536.0;
    while (err < -32768.0) err += 65536.0;
    checks++;
    if (err > 8.0 || err < -8.0) begin failures++; $display("FAIL %0d: phase %0d want %f", i, out_phase, want); end
    checks++;
    if (cyc - sent_at[i] != ITER + 1) begin failures++; $display("FAIL latency %0d", cyc - sent_at[i]); end
    got++;
  end

  initial begin
    for (int i = 0; i < NV; i++) begin
      real a, m;
      a = real'($urandom_range(0, 99999)) / 100000.0 * 2.0 * PI;
      m = 2000.0 + real'($urandom_range(0, 28000));
      if (i < 4) a = real'(i) * PI / 2.0;   // the axes
      vec[i].re = 16'($rtoi(m * $cos(a)));
      vec[i].im = 16'($rtoi(m * $sin(a)));
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NV; i++) begin
      @(negedge clk);
      in_valid = 1; in_data = vec[i]; in_tag = 6'(i % 64); sent_at[i] = cyc;
    end
    @(negedge clk) in_valid = 0;
    repeat (ITER + 5) @(posedge clk);
    checks++;
    if (got != NV) begin failures++; $display("FAIL got %0d results", got); end
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

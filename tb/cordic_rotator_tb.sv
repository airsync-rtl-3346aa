// cordic_rotator_tb: rotation of random samples by random phases against a
// floating-point rotation (gain removed), tags and the ITER+2 cycle latency.
module cordic_rotator_tb;
  import airsync_pkg::*;
  localparam int ITER = 14;
  localparam real PI = 3.14159265358979;
  localparam int NV = 200;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, out_valid;
  cplx_t in_data, out_data;
  phase_t in_phase;
  logic [5:0] in_tag = 0, out_tag;

  cordic_rotator #(.ITER(ITER), .TAG_W(6)) dut (.*);

  cplx_t  vec [NV];
  phase_t ph [NV];
  int     sent_at [NV];
  int     cyc = 0, got = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    real a, wr, wi;
    int i;
    i = int'(out_tag) + 64 * (got / 64);
    a  = real'(ph[i]) / 65536.0 * 2.0 * PI;
    wr = real'(vec[i].re) * $cos(a) - real'(vec[i].im) * $sin(a);
    wi = real'(vec[i].re) * $sin(a) + real'(vec[i].im) * $cos(a);
    checks++;
    if ((real'(out_data.re) - wr) > 10.0 || (wr - real'(out_data.re)) > 10.0 ||
        (real'(out_data.im) - wi) > 10.0 || (wi - real'(out_data.im)) > 10.0) begin
      failures++;
      $display("FAIL %0d: got %h want (%f,%f) ph %0d in %h", i, out_data, wr, wi, ph[i], vec[i]);
    end
    checks++;
    if (cyc - sent_at[i] != ITER + 2) begin failures++; $display("FAIL latency %0d got=%0d tag=%0d cyc=%0d", cyc - sent_at[i], got, out_tag, cyc); end
    got++;
  end

  initial begin
    for (int i = 0; i < NV; i++) begin
      vec[i].re = 16'($signed(16'($urandom_range(0, 65535))) >>> 1);
      vec[i].im = 16'($signed(16'($urandom_range(0, 65535))) >>> 1);
      ph[i]     = phase_t'($urandom_range(0, 65535));
      if (i < 4) ph[i] = phase_t'(i * 16384);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NV; i++) begin
      @(negedge clk);
      in_valid = 1; in_data = vec[i]; in_phase = ph[i]; in_tag = 6'(i % 64); sent_at[i] = cyc;
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

// fft_tb: checks the forward and inverse FFT against a direct DFT computed
// in floating point, including the 1/N scaling and the LOG2N+1 cycle latency.
module fft_tb;
  import airsync_pkg::*;
  localparam int N = 16;   // reduced from 64 to keep the C++ build of this test short
  localparam real PI = 3.14159265358979;
  localparam real TOL = 6.0;   // LSB, truncation in 6 stages plus twiddle rounding

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int npts, ntrial;   // run-time loop bounds, keep the reference loops rolled

  logic  in_valid = 0;
  cplx_t in_data [N];
  logic  fv, iv;
  cplx_t fo [N], io [N];

  fft #(.N(N), .INVERSE(1'b0)) u_f (.clk, .rst_n, .in_valid, .in_data, .out_valid(fv), .out_data(fo));
  fft #(.N(N), .INVERSE(1'b1)) u_i (.clk, .rst_n, .in_valid, .in_data, .out_valid(iv), .out_data(io));

  task automatic compare(input cplx_t x [N], input bit inv, input cplx_t y [N]);
    for (int k = 0; k < npts; k++) begin
      real er, ei;
      er = 0.0; ei = 0.0;
      for (int n = 0; n < npts; n++) begin
        real a;
        a = 2.0 * PI * real'(k * n) / real'(N) * (inv ? 1.0 : -1.0);
        er += real'(x[n].re) * $cos(a) - real'(x[n].im) * $sin(a);
        ei += real'(x[n].re) * $sin(a) + real'(x[n].im) * $cos(a);
      end
      er /= real'(N); ei /= real'(N);
      checks++;
      if ((real'(y[k].re) - er) > TOL || (er - real'(y[k].re)) > TOL ||
          (real'(y[k].im) - ei) > TOL || (ei - real'(y[k].im)) > TOL) begin
        failures++;
        $display("FAIL inv=%0d bin %0d: got (%0d,%0d) want (%f,%f)", inv, k, y[k].re, y[k].im, er, ei);
      end
    end
  endtask

  initial begin
    cplx_t x [N];
    int lat;
    npts = N;
    ntrial = 6;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < ntrial; trial++) begin
      for (int n = 0; n < npts; n++) begin
        if (trial == 0) begin          // a single tone on bin 5
          x[n].re = 16'($rtoi(20000.0 * $cos(2.0 * PI * 5.0 * real'(n) / real'(N))));
          x[n].im = 16'($rtoi(20000.0 * $sin(2.0 * PI * 5.0 * real'(n) / real'(N))));
        end else begin
          x[n].re = 16'($signed(16'($urandom_range(0, 65535))) >>> 1);
          x[n].im = 16'($signed(16'($urandom_range(0, 65535))) >>> 1);
        end
      end
      @(negedge clk);
      in_data = x; in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      for (int n = 0; n < npts; n++) in_data[n] = '0;
      lat = 1;
      while (!fv) begin @(negedge clk); lat++; end
      checks++;
      if (lat != $clog2(N) + 1 || !iv) begin failures++; $display("FAIL latency %0d", lat); end
      compare(x, 1'b0, fo);
      compare(x, 1'b1, io);
      if (trial == 0) begin
        checks++;
        if (fo[5].re < 19990 || fo[5].re > 20010) begin failures++; $display("FAIL tone bin %0d", fo[5].re); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

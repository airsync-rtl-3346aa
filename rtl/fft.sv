// fft: block-parallel radix-2 decimation-in-time FFT / IFFT of one OFDM symbol.
//
// The secondary access point uses it in both directions shown in the
// AirSync processing chain: forward on the received reference signal (to
// read the pilot and header subcarriers) and inverse on the phase-corrected
// frequency-domain data symbol before transmission. The paper only names the
// two transforms; this block-parallel structure is this design's choice.
//
// Interface: in_valid with all N input samples (natural order) in in_data;
// out_valid with all N outputs (natural order) exactly LOG2N+1 cycles later.
// One new symbol may enter every cycle (fully pipelined, one register stage
// per butterfly stage plus the input register).
//
// Arithmetic: every stage halves its results, so the outputs are the DFT
// (or inverse DFT) divided by N and cannot overflow. Twiddles are
// cos/sin(2*pi*k/N) in Q1.15, computed at elaboration. INVERSE=1 uses the
// conjugate twiddles: out[k] = (1/N) * sum_n in[n] * exp(+j*2*pi*k*n/N).
module fft
  import airsync_pkg::*;
#(
  parameter int  N       = N_FFT,
  parameter bit  INVERSE = 1'b0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  cplx_t in_data  [N],
  output logic  out_valid,
  output cplx_t out_data [N]
);

  localparam int LOG2N = $clog2(N);
  localparam int W     = SAMPLE_W;

  function automatic int tw_cos(int k);
    return int'($cos(2.0 * 3.14159265358979 * real'(k) / real'(N)) * 32767.0);
  endfunction
  function automatic int tw_sin(int k);
    // forward transform uses exp(-j*theta): imaginary part -sin
    int s;
    s = int'($sin(2.0 * 3.14159265358979 * real'(k) / real'(N)) * 32767.0);
    return INVERSE ? s : -s;
  endfunction

  function automatic int bitrev(int k);
    int r;
    r = 0;
    for (int b = 0; b < LOG2N; b++) r |= ((k >> b) & 1) << (LOG2N - 1 - b);
    return r;
  endfunction

  typedef logic signed [17:0] coef_t;
  coef_t TW_RE [N/2];
  coef_t TW_IM [N/2];
  for (genvar k = 0; k < N/2; k++) begin : g_tw
    assign TW_RE[k] = coef_t'(tw_cos(k));
    assign TW_IM[k] = coef_t'(tw_sin(k));
  end

  cplx_t st  [LOG2N+1][N];
  logic  vld [LOG2N+1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s <= LOG2N; s++) vld[s] <= 1'b0;
    end else begin
      vld[0] <= in_valid;
      for (int s = 0; s < LOG2N; s++) vld[s+1] <= vld[s];
    end
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < N; k++) st[0][k] <= in_data[bitrev(k)];
  end

  for (genvar s = 0; s < LOG2N; s++) begin : g_stage
    localparam int HALF = 1 << s;
    for (genvar j = 0; j < N/2; j++) begin : g_bfly
      localparam int GRP = j / HALF;
      localparam int POS = j % HALF;
      localparam int TOP = GRP * 2 * HALF + POS;
      localparam int BOT = TOP + HALF;
      localparam int TWI = POS * (N / (2 * HALF));
      logic signed [W+18:0] pr, pi;
      logic signed [W+1:0]  tr, ti, ar, ai;
      always_comb begin
        pr = st[s][BOT].re * TW_RE[TWI] - st[s][BOT].im * TW_IM[TWI];
        pi = st[s][BOT].re * TW_IM[TWI] + st[s][BOT].im * TW_RE[TWI];
        tr = (W+2)'(pr >>> 15);
        ti = (W+2)'(pi >>> 15);
        ar = (W+2)'(st[s][TOP].re);
        ai = (W+2)'(st[s][TOP].im);
      end
      always_ff @(posedge clk) begin
        st[s+1][TOP].re <= W'((ar + tr) >>> 1);
        st[s+1][TOP].im <= W'((ai + ti) >>> 1);
        st[s+1][BOT].re <= W'((ar - tr) >>> 1);
        st[s+1][BOT].im <= W'((ai - ti) >>> 1);
      end
    end
  end

  assign out_valid = vld[LOG2N];
  assign out_data  = st[LOG2N];

endmodule

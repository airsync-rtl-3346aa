// cordic_rotator: pipelined CORDIC in rotation mode with gain correction;
// multiplies a complex sample by exp(j*phase).
//
// This is the multiplier between the "Phase Linear Extrapolation" block and
// the data symbols in the paper's processing chain: every frequency-domain
// data symbol is rotated by the phase correction predicted for its
// subcarrier before the IFFT. The CORDIC realisation is this design's choice.
//
// Interface: in_valid / in_data / in_phase / in_tag enter; out_valid /
// out_data / out_tag appear exactly ITER+2 cycles later, one per cycle.
// in_phase is a fraction of a turn (airsync_pkg). The CORDIC gain (1.6468)
// is removed by a constant multiplier in the last stage, so |out| = |in|
// to within about 10 LSB; results are saturated to SAMPLE_W bits.
module cordic_rotator
  import airsync_pkg::*;
#(
  parameter int ITER  = 14,
  parameter int TAG_W = 6
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  cplx_t            in_data,
  input  phase_t           in_phase,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output cplx_t            out_data,
  output logic [TAG_W-1:0] out_tag
);

  localparam int W = SAMPLE_W + 2;
  // round(2^15 / prod_i sqrt(1 + 2^-2i)) = 19898 for ITER >= 8
  localparam logic signed [16:0] INV_GAIN = 17'sd19898;
  localparam logic signed [W-1:0] SAT_MAX = W'((1 << (SAMPLE_W - 1)) - 1);
  localparam logic signed [W-1:0] SAT_MIN = -W'(1 << (SAMPLE_W - 1));

  function automatic int atan_step(int i);
    return int'($atan(1.0 / real'(1 << i)) / (2.0 * 3.14159265358979) * real'(1 << PHASE_W));
  endfunction

  function automatic logic signed [SAMPLE_W-1:0] sat(logic signed [W-1:0] v);
    if (v > SAT_MAX) return SAMPLE_W'(SAT_MAX);
    if (v < SAT_MIN) return SAMPLE_W'(SAT_MIN);
    return SAMPLE_W'(v);
  endfunction

  logic signed [W-1:0]   x   [ITER+1];
  logic signed [W-1:0]   y   [ITER+1];
  logic signed [PHASE_W-1:0] z [ITER+1];
  logic [TAG_W-1:0]      tag [ITER+2];
  logic                  vld [ITER+2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i <= ITER + 1; i++) vld[i] <= 1'b0;
    end else begin
      vld[0] <= in_valid;
      for (int i = 0; i <= ITER; i++) vld[i+1] <= vld[i];
    end
  end

  // Stage 0: bring the angle into [-pi/2, pi/2) by an optional rotation of pi.
  always_ff @(posedge clk) begin
    tag[0] <= in_tag;
    if (in_phase[PHASE_W-1] ^ in_phase[PHASE_W-2]) begin
      x[0] <= -W'(in_data.re);
      y[0] <= -W'(in_data.im);
      z[0] <= $signed(in_phase + phase_t'(1 << (PHASE_W - 1)));
    end else begin
      x[0] <= W'(in_data.re);
      y[0] <= W'(in_data.im);
      z[0] <= $signed(in_phase);
    end
  end

  for (genvar i = 0; i < ITER; i++) begin : g_it
    localparam logic signed [PHASE_W-1:0] STEP = PHASE_W'(atan_step(i));
    always_ff @(posedge clk) begin
      tag[i+1] <= tag[i];
      if (z[i] >= 0) begin
        x[i+1] <= x[i] - (y[i] >>> i);
        y[i+1] <= y[i] + (x[i] >>> i);
        z[i+1] <= z[i] - STEP;
      end else begin
        x[i+1] <= x[i] + (y[i] >>> i);
        y[i+1] <= y[i] - (x[i] >>> i);
        z[i+1] <= z[i] + STEP;
      end
    end
  end

  // Final stage: remove the CORDIC gain and saturate. Only the low bits of
  // gx/gy are read after the range check, so their upper bits show as unused.
  logic signed [W+17:0] gx, gy;
  always_comb begin
    gx = (x[ITER] * INV_GAIN + (1 <<< 14)) >>> 15;
    gy = (y[ITER] * INV_GAIN + (1 <<< 14)) >>> 15;
  end
  always_ff @(posedge clk) begin
    tag[ITER+1]  <= tag[ITER];
    out_data.re  <= sat(W'(gx));
    out_data.im  <= sat(W'(gy));
  end

  assign out_valid = vld[ITER+1];
  assign out_tag   = tag[ITER+1];

endmodule

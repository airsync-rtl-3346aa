// cordic_vectoring: pipelined CORDIC in vectoring mode, giving the phase
// (atan2) of a complex sample.
//
// This is the phase detector of the synchronisation chain: it turns each
// received pilot bin and each header bin coming out of the FFT into an
// instantaneous phase. The paper says only that the instantaneous phase of
// the tones is extracted; the CORDIC is this design's choice.
//
// Interface: in_valid / in_data / in_tag enter a pipeline of ITER+1
// registers; out_valid / out_phase / out_tag appear exactly ITER+1 cycles
// later, one result per cycle. The tag travels with the sample untouched.
// out_phase is a fraction of a turn (see airsync_pkg): 0 = 0 rad,
// 2^(PHASE_W-2) = pi/2. Error is below 8 LSB (0.044 degree) plus the
// quantisation of small inputs. A zero input gives an arbitrary phase.
module cordic_vectoring
  import airsync_pkg::*;
#(
  parameter int ITER  = 14,
  parameter int TAG_W = 6
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  cplx_t            in_data,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output phase_t           out_phase,
  output logic [TAG_W-1:0] out_tag
);

  localparam int W = SAMPLE_W + 2;

  // atan(2^-i) as a fraction of a turn, PHASE_W bits
  function automatic int atan_step(int i);
    return int'($atan(1.0 / real'(1 << i)) / (2.0 * 3.14159265358979) * real'(1 << PHASE_W));
  endfunction

  logic signed [W-1:0]   x   [ITER+1];
  logic signed [W-1:0]   y   [ITER+1];
  phase_t                z   [ITER+1];
  logic [TAG_W-1:0]      tag [ITER+1];
  logic                  vld [ITER+1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i <= ITER; i++) vld[i] <= 1'b0;
    end else begin
      vld[0] <= in_valid;
      for (int i = 0; i < ITER; i++) vld[i+1] <= vld[i];
    end
  end

  // Stage 0: fold the left half-plane onto the right one by a rotation of pi.
  always_ff @(posedge clk) begin
    tag[0] <= in_tag;
    if (in_data.re < 0) begin
      x[0] <= -W'(in_data.re);
      y[0] <= -W'(in_data.im);
      z[0] <= phase_t'(1 << (PHASE_W - 1));
    end else begin
      x[0] <= W'(in_data.re);
      y[0] <= W'(in_data.im);
      z[0] <= '0;
    end
  end

  // Stages 1..ITER: drive y to zero, accumulating the angle turned.
  for (genvar i = 0; i < ITER; i++) begin : g_it
    localparam phase_t STEP = phase_t'(atan_step(i));
    always_ff @(posedge clk) begin
      tag[i+1] <= tag[i];
      if (y[i] >= 0) begin
        x[i+1] <= x[i] + (y[i] >>> i);
        y[i+1] <= y[i] - (x[i] >>> i);
        z[i+1] <= z[i] + STEP;
      end else begin
        x[i+1] <= x[i] - (y[i] >>> i);
        y[i+1] <= y[i] + (x[i] >>> i);
        z[i+1] <= z[i] - STEP;
      end
    end
  end

  assign out_valid = vld[ITER];
  assign out_phase = z[ITER];
  assign out_tag   = tag[ITER];

endmodule

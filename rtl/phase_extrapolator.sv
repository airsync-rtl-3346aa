// phase_extrapolator: predicts the phase correction of one subcarrier for
// the OFDM symbol that will be on the air d symbols after the last pilot
// measurement.
//
// The paper's linear extrapolation: with the slope Delta_1 - Delta_i
// estimated at symbol t, the drift correction at time t+d is
// 2*pi*(Delta_1 - Delta_i)*(t + d), with t counted from the channel-probing
// header. The per-subcarrier initial estimate is added, so the correction is
//   corr(n) = init(n) + slope * (t + D).
// D (LOOKAHEAD) is the synchronisation-circuit delay in symbols; in this
// design the data symbol sent in slot k is built in slot k-1 from the pilots
// of slot k-2, so D = 2.
//
// Interface: one request per cycle (in_valid, in_tag, in_init = the
// subcarrier's initial phase); the correction leaves one cycle later on
// out_valid / out_phase / out_tag. slope has FRAC_BITS fraction bits and is
// sampled with t_sym in the same cycle as the request. bypass forces a zero
// correction (the master access point, which is the phase reference).
module phase_extrapolator
  import airsync_pkg::*;
#(
  parameter int FRAC_BITS = 4,
  parameter int LOOKAHEAD = 2,
  parameter int T_W       = 16,
  parameter int TAG_W     = 6
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              bypass,
  input  logic signed [PHASE_W+FRAC_BITS-1:0] slope,
  input  logic [T_W-1:0]                    t_sym,
  input  logic                              in_valid,
  input  logic [TAG_W-1:0]                  in_tag,
  input  phase_t                            in_init,
  output logic                              out_valid,
  output phase_t                            out_phase,
  output logic [TAG_W-1:0]                  out_tag
);

  localparam int PW = PHASE_W + FRAC_BITS + T_W + 1;

  logic signed [PW-1:0] drift;
  logic signed [T_W:0]  t_ahead;

  always_comb begin
    t_ahead = $signed({1'b0, t_sym}) + (T_W+1)'(LOOKAHEAD);
    // rounded product, only the fraction of a turn is kept (the upper bits of
    // drift are whole turns and are dropped on purpose)
    drift   = (PW'(slope) * PW'(t_ahead) + PW'(1 << (FRAC_BITS - 1))) >>> FRAC_BITS;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_phase <= '0;
      out_tag   <= '0;
    end else begin
      out_valid <= in_valid;
      out_tag   <= in_tag;
      out_phase <= bypass ? phase_t'(0) : in_init + phase_t'(drift);
    end
  end

endmodule

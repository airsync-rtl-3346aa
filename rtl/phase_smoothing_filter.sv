// phase_smoothing_filter: estimates the relative phase drift slope
// (Delta_1 - Delta_i, phase per OFDM symbol) from the out-of-band pilots.
//
// As in the paper, the slope is smoothed by a sliding window over four
// samples. Each sample is the phase advance of the pilots from one OFDM
// symbol to the next: for every pilot p the wrapped difference
// phase_p(t) - phase_p(t-1) is formed (the per-pilot constant offsets
// cancel, only the common drift remains) and the NUM_P differences are
// summed. The window holds the last WIN such sums and the slope is their
// total, i.e. the mean advance per symbol with log2(NUM_P*WIN) extra
// fraction bits (FRAC_BITS). Averaging over the pilots is this design's
// choice; the paper gives the four-sample window.
//
// Interface: ref_start marks the header symbol: its pilot phases become the
// reference and the window is emptied. For every later symbol the NUM_P
// pilot phases arrive with in_valid/in_idx (any order, once each); in_last
// flags the last of them. Two cycles after in_last, slope_valid pulses with
// the new slope and with t_sym, the number of symbols between the header and
// the symbol just measured. slope_ready is high once the window is full; the
// slope output stays stable between updates.
module phase_smoothing_filter
  import airsync_pkg::*;
#(
  parameter int NUM_P = NUM_PILOTS,
  parameter int WIN   = 4,
  parameter int T_W   = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     ref_start,
  input  logic                     in_valid,
  input  logic [$clog2(NUM_P)-1:0] in_idx,
  input  phase_t                   in_phase,
  input  logic                     in_last,
  output logic signed [PHASE_W+$clog2(NUM_P*WIN)-1:0] slope,
  output logic                     slope_valid,
  output logic                     slope_ready,
  output logic [T_W-1:0]           t_sym
);

  localparam int FRAC_BITS = $clog2(NUM_P * WIN);
  localparam int SUM_W     = PHASE_W + $clog2(NUM_P);
  localparam int SLOPE_W   = PHASE_W + FRAC_BITS;

  phase_t                   prev   [NUM_P];
  logic signed [SUM_W-1:0]  acc;          // sum of this symbol's advances
  logic signed [SUM_W-1:0]  win    [WIN];
  logic [$clog2(WIN+1)-1:0] fill;
  logic                     is_ref, upd;
  logic signed [PHASE_W-1:0] adv;

  logic signed [SLOPE_W-1:0] win_sum;
  always_comb begin
    win_sum = '0;
    for (int k = 0; k < WIN; k++) win_sum = win_sum + SLOPE_W'(win[k]);
  end

  // wrapped phase advance of one pilot, in (-pi, pi]
  assign adv = $signed(in_phase - prev[in_idx]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      is_ref      <= 1'b0;
      acc         <= '0;
      fill        <= '0;
      upd         <= 1'b0;
      slope_valid <= 1'b0;
      slope       <= '0;
      t_sym       <= '0;
      for (int k = 0; k < WIN; k++) win[k] <= '0;
      for (int p = 0; p < NUM_P; p++) prev[p] <= '0;
    end else begin
      upd         <= 1'b0;
      slope_valid <= 1'b0;
      if (ref_start) begin
        is_ref <= 1'b1;
        acc    <= '0;
        fill   <= '0;
        t_sym  <= '0;
        for (int k = 0; k < WIN; k++) win[k] <= '0;
      end
      if (in_valid) begin
        prev[in_idx] <= in_phase;
        if (!is_ref) acc <= (in_last ? '0 : acc + SUM_W'(adv));
        if (in_last) begin
          is_ref <= 1'b0;
          if (!is_ref) begin
            win[0] <= acc + SUM_W'(adv);
            for (int k = 1; k < WIN; k++) win[k] <= win[k-1];
            if (int'(fill) != WIN) fill <= fill + 1'b1;
            t_sym <= t_sym + 1'b1;
            upd   <= 1'b1;
          end
        end
      end
      if (upd) begin
        slope       <= win_sum;
        slope_valid <= 1'b1;
      end
    end
  end

  assign slope_ready = (int'(fill) == WIN);

endmodule

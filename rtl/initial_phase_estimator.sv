// initial_phase_estimator: per-subcarrier initial phase estimate taken from
// the master's channel-probing header.
//
// Following the paper's current implementation, one phase estimate is kept
// for every data subcarrier n and used on its own (no fitting across
// subcarriers). It is the phase of the header bin as received, minus the
// known phase of the header symbol on that bin, i.e.
//   2*pi/(N*Ts)*(tau_1 - tau_i)*n + phi_1(0) - phi_i(0) + angle H_i(n).
// The header is BPSK with the sign pattern airsync_pkg::hdr_sign (this
// design's choice), so the known phase is 0 or pi.
//
// Interface: the phase detector writes (wr_en, wr_idx = data subcarrier
// index 0..NUM_DATA-1, wr_phase = measured phase) during the header symbol;
// the stored estimate is updated at the next clock edge. clear marks all
// entries invalid (start of a new slot). rd_idx/rd_phase is a combinational
// read port; all_valid is high once every subcarrier has an estimate.
module initial_phase_estimator
  import airsync_pkg::*;
#(
  parameter int NSC = NUM_DATA
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   wr_en,
  input  logic [$clog2(NSC)-1:0] wr_idx,
  input  phase_t                 wr_phase,
  input  logic [$clog2(NSC)-1:0] rd_idx,
  output phase_t                 rd_phase,
  output logic                   all_valid
);

  localparam phase_t HALF_TURN = phase_t'(1 << (PHASE_W - 1));

  phase_t           est   [NSC];
  logic [NSC-1:0]   valid;

  always_ff @(posedge clk) begin
    if (wr_en)
      est[wr_idx] <= wr_phase - (hdr_sign(int'(wr_idx)) ? HALF_TURN : phase_t'(0));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      valid <= '0;
    else if (clear)  valid <= '0;
    else if (wr_en)  valid[wr_idx] <= 1'b1;
  end

  assign rd_phase  = est[rd_idx];
  assign all_valid = &valid;

endmodule

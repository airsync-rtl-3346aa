// ofdm_rx_framer: removes the cyclic prefix of each received OFDM symbol and
// gathers its N useful samples for the FFT.
//
// The symbol timing comes from the slot controller: sym_pos is the position
// (0..SYM_LEN-1) of the current input sample in its symbol, established by
// the PN preamble detection. Samples at positions 0..CP_LEN-1 (the cyclic
// prefix) are dropped, the rest are stored in order. The paper describes the
// cyclic prefix (its primer on OFDM) but not this block; it is this design's
// own minimal realisation.
//
// Interface: one sample per cycle when in_valid and capture. When the sample
// at position SYM_LEN-1 is stored, out_valid pulses in the next cycle with
// the whole symbol on out_data, which stays stable until the next symbol
// completes.
module ofdm_rx_framer
  import airsync_pkg::*;
#(
  parameter int N  = N_FFT,
  parameter int CP = CP_LEN
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic                        capture,
  input  cplx_t                       in_data,
  input  logic [$clog2(N+CP)-1:0]     sym_pos,
  output logic                        out_valid,
  output cplx_t                       out_data [N]
);

  cplx_t buffer [N];

  always_ff @(posedge clk) begin
    if (in_valid && capture && int'(sym_pos) >= CP)
      buffer[int'(sym_pos) - CP] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid && capture && (int'(sym_pos) == N + CP - 1);
  end

  assign out_data = buffer;

endmodule

// ofdm_tx_framer: turns one IFFT output (or the PN preamble) into the stream
// of SYM_LEN transmit samples of an OFDM symbol, cyclic prefix first.
//
// Double buffered: a symbol built during symbol slot k-1 is loaded into the
// "next" register at any time before the slot ends, and becomes the
// "current" symbol at the slot boundary (sym_pos = SYM_LEN-1 -> 0). In slot
// position p the framer sends cur[N-CP+p] for p < CP (the cyclic prefix:
// the last CP samples repeated) and cur[p-CP] afterwards. A preamble slot
// sends the PN_LEN chips of the m-sequence as real values +-PN_AMP followed
// by zeros; a slot with nothing loaded sends zeros. The paper describes the
// cyclic prefix and the PN preamble; the buffering is this design's choice.
//
// The IFFT output is scaled by 1/N; OFDM samples are therefore multiplied by
// 2^GAIN_SHIFT (with saturation) on the way out so that a fully loaded
// symbol uses the DAC range. The gain is this design's choice.
//
// Interface: load/load_kind/load_data for the next slot; sym_pos from the
// slot controller. out_data is registered: the sample for position p leaves
// one cycle after sym_pos = p. out_kind tells which kind of symbol is being
// sent (for monitoring).
module ofdm_tx_framer
  import airsync_pkg::*;
#(
  parameter int N  = N_FFT,
  parameter int CP = CP_LEN,
  parameter int GAIN_SHIFT = 3
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    load,
  input  sym_kind_e               load_kind,
  input  cplx_t                   load_data [N],
  input  logic [$clog2(N+CP)-1:0] sym_pos,
  output cplx_t                   out_data,
  output sym_kind_e               out_kind
);

  localparam int L = N + CP;
  localparam int GW = SAMPLE_W + GAIN_SHIFT;

  function automatic logic signed [SAMPLE_W-1:0] amp(logic signed [SAMPLE_W-1:0] v);
    logic signed [GW-1:0] g;
    g = GW'(v) <<< GAIN_SHIFT;
    if (g > GW'((1 << (SAMPLE_W - 1)) - 1)) return SAMPLE_W'((1 << (SAMPLE_W - 1)) - 1);
    if (g < -GW'(1 << (SAMPLE_W - 1)))      return SAMPLE_W'(-(1 << (SAMPLE_W - 1)));
    return SAMPLE_W'(g);
  endfunction

  cplx_t     nxt [N];
  cplx_t     cur [N];
  sym_kind_e nxt_kind, cur_kind;

  cplx_t sel;
  assign sel = (int'(sym_pos) < CP) ? cur[N - CP + int'(sym_pos)] : cur[int'(sym_pos) - CP];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nxt_kind <= SYM_NONE;
      cur_kind <= SYM_NONE;
    end else if (int'(sym_pos) == L - 1) begin
      cur_kind <= load ? load_kind : nxt_kind;
      nxt_kind <= SYM_NONE;
    end else if (load) begin
      nxt_kind <= load_kind;
    end
  end

  always_ff @(posedge clk) begin
    if (load) nxt <= load_data;
    if (int'(sym_pos) == L - 1) cur <= load ? load_data : nxt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_data <= '0;
      out_kind <= SYM_NONE;
    end else begin
      out_kind <= cur_kind;
      unique case (cur_kind)
        SYM_NONE:     out_data <= '0;
        SYM_PREAMBLE: begin
          out_data.im <= '0;
          if (int'(sym_pos) < PN_LEN)
            out_data.re <= pn_chip(int'(sym_pos)) ? -SAMPLE_W'(PN_AMP) : SAMPLE_W'(PN_AMP);
          else
            out_data.re <= '0;
        end
        default: begin
          out_data.re <= amp(sel.re);
          out_data.im <= amp(sel.im);
        end
      endcase
    end
  end

endmodule

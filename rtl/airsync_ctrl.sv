// airsync_ctrl: downlink-slot sequencer and OFDM symbol timer of an access
// point, in master or secondary mode.
//
// A slot, as in the paper's protocol, is: a PN preamble sent by the master
// for frame alignment, a channel-probing header from which the secondaries
// take their initial phase estimates, then the downlink data in which all
// APs take part. Between header and data this design inserts SYNC_SYMS
// pilot-only symbols, enough to fill the four-sample smoothing window and
// the two-symbol look-ahead before the first joint data symbol (this
// design's choice; the paper's measurement shows tracking starting a few
// symbols before the secondary's signal).
//
// Slot numbers: 0 preamble, 1 header, 2..SYNC_SYMS+1 sync, then
// cfg_num_data data symbols. sym_pos counts 0..SYM_LEN-1 within a symbol.
//  * Master: start (while idle) begins a frame with a preparation symbol
//    (slot -1) in which the preamble is queued; the frame ends after the
//    last data symbol and the controller returns to idle.
//  * Secondary: start arms the PN search. pn_detect, which comes
//    DET_LAT cycles after the last preamble chip, fixes the symbol timing:
//    the preamble's last chip was at sym_pos PN_LEN-1 of slot 0. After the
//    last data symbol the controller searches for the next preamble.
// rx_kind is the kind of the symbol on the receive input now; tx_next_kind
// is what this AP must send in the next symbol slot (a secondary sends only
// data symbols). sym_end is high in the last cycle of each symbol.
module airsync_ctrl
  import airsync_pkg::*;
#(
  parameter int SYNC   = SYNC_SYMS,
  parameter int DET_LAT = 2,
  parameter int SLOT_W = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        cfg_master,
  input  logic [SLOT_W-1:0]           cfg_num_data,
  input  logic                        start,
  input  logic                        pn_detect,
  output logic [$clog2(SYM_LEN)-1:0]  sym_pos,
  output logic signed [SLOT_W:0]      slot,
  output logic                        active,
  output logic                        searching,
  output logic                        sym_end,
  output sym_kind_e                   rx_kind,
  output sym_kind_e                   tx_next_kind,
  output logic                        frame_done
);

  localparam int PW = $clog2(SYM_LEN);

  typedef enum logic [1:0] {S_IDLE, S_SEARCH, S_RUN} state_e;
  state_e state;

  logic signed [SLOT_W:0] last_slot;
  assign last_slot = (SLOT_W+1)'(SYNC + 1) + $signed({1'b0, cfg_num_data});

  function automatic sym_kind_e frame_kind(logic signed [SLOT_W:0] k, logic signed [SLOT_W:0] last);
    if (k == 0)                     return SYM_PREAMBLE;
    if (k == 1)                     return SYM_HEADER;
    if (k >= 2 && k <= (SLOT_W+1)'(SYNC + 1))    return SYM_SYNC;
    if (k > (SLOT_W+1)'(SYNC + 1) && k <= last)  return SYM_DATA;
    return SYM_NONE;
  endfunction

  assign sym_end   = (state == S_RUN) && (sym_pos == PW'(SYM_LEN - 1));
  assign active    = (state == S_RUN);
  assign searching = (state == S_SEARCH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      sym_pos    <= '0;
      slot       <= '0;
      frame_done <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            sym_pos <= '0;
            if (cfg_master) begin
              state <= S_RUN;
              slot  <= -1;
            end else begin
              state <= S_SEARCH;
            end
          end
        end
        S_SEARCH: begin
          if (cfg_master) begin
            state <= S_IDLE;
          end else if (pn_detect) begin
            state   <= S_RUN;
            slot    <= '0;
            sym_pos <= PW'(PN_LEN + DET_LAT);
          end
        end
        S_RUN: begin
          if (sym_pos == PW'(SYM_LEN - 1)) begin
            sym_pos <= '0;
            if (slot == last_slot) begin
              frame_done <= 1'b1;
              state      <= cfg_master ? S_IDLE : S_SEARCH;
            end else begin
              slot <= slot + 1'b1;
            end
          end else begin
            sym_pos <= sym_pos + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    sym_kind_e k;
    rx_kind = (state == S_RUN) ? frame_kind(slot, last_slot) : SYM_NONE;
    k = (state == S_RUN) ? frame_kind(slot + 1'b1, last_slot) : SYM_NONE;
    if (cfg_master) tx_next_kind = k;
    else            tx_next_kind = (k == SYM_DATA) ? SYM_DATA : SYM_NONE;
  end

endmodule

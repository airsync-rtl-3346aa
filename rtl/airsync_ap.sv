// airsync_ap: signal-processing core of an AirSync access point, the
// synchronisation circuit that lets geographically separated APs transmit
// one jointly precoded (MU-MIMO) signal with a common carrier phase.
//
// The same core runs in one of two modes (cfg_master):
//  * Master: the phase reference. It sends each downlink slot as a PN
//    preamble, a BPSK channel-probing header, SYNC_SYMS pilot-only symbols
//    and the data symbols streamed in by the server. Every OFDM symbol it
//    sends carries NUM_PILOTS out-of-band pilot tones (about +-7.5 MHz).
//  * Secondary: listens to the master on a dedicated receive antenna while
//    it transmits. The PN correlator fixes the slot and symbol timing; the
//    header gives one initial phase estimate per data subcarrier; the
//    pilots, measured every symbol, give the drift slope through a
//    four-sample sliding window; the correction
//        corr(n, k) = init(n) + slope * (t + d)
//    is extrapolated d = 2 symbols ahead and applied to each precoded data
//    subcarrier (CORDIC rotation) before the IFFT. The secondary sends only
//    its data symbols, never on the pilot spec_hold.
//
// Datapath (one sample per clock, the 20 MHz sample clock):
//   ADC -> pn_correlator -> airsync_ctrl (symbol timer)
//   ADC -> ofdm_rx_framer -> fft -> cordic_vectoring -> initial_phase_estimator
//                                                    -> phase_smoothing_filter
//   symbol_buffer -> cordic_rotator (phase_extrapolator) -> fft(inverse)
//                 -> ofdm_tx_framer -> DAC
//
// Symbol-slot schedule (positions within the 80-sample symbol): the symbol
// received in slot k-1 leaves the FFT at position 7 of slot k, its pilot
// phases are known at about position 28; the data symbol for slot k+1 is
// built from position BUILD_START = 32 and reaches the transmit framer at
// position 72, so the look-ahead is two symbols. The transmitted symbol
// boundary lags the received one by the one-cycle output register.
//
// Ports: ADC and DAC samples, the server's stream of precoded symbols
// (valid/ready, NUM_DATA subcarrier values per OFDM symbol, subcarrier 0
// first, see airsync_pkg::data_bin), configuration and status. The RF front
// ends, converters, processor and Ethernet path are outside this core.
module airsync_ap
  import airsync_pkg::*;
#(
  parameter int BUF_DEPTH   = 1024,
  parameter int LOOKAHEAD   = 2,
  parameter int CORDIC_ITER = 14,
  parameter int BUILD_START = 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // configuration
  input  logic                      cfg_master,
  input  logic [15:0]               cfg_num_data,
  input  logic [15:0]               cfg_pn_threshold,
  input  logic                      start,
  // converters
  input  logic signed [ADC_W-1:0]   adc_i,
  input  logic signed [ADC_W-1:0]   adc_q,
  output logic signed [SAMPLE_W-1:0] dac_i,
  output logic signed [SAMPLE_W-1:0] dac_q,
  // precoded symbols from the server
  input  logic                      host_valid,
  output logic                      host_ready,
  input  cplx_t                     host_data,
  // status
  output logic                      frame_active,
  output logic                      pn_detected,
  output logic                      sync_locked,
  output logic signed [PHASE_W+3:0] drift_slope,
  output logic                      slope_update,
  output logic                      buffer_underflow,
  output logic [$clog2(BUF_DEPTH):0] buffer_count,
  output sym_kind_e                 tx_kind,
  output logic                      late_symbol
);

  localparam int PW    = $clog2(SYM_LEN);
  localparam int TAG_W = 6;                 // {is_pilot, index[4:0]}
  localparam int FRAC  = $clog2(NUM_PILOTS * 4);
  localparam int DI_W  = $clog2(NUM_DATA);
  localparam int PI_W  = $clog2(NUM_PILOTS);

  // ---------------------------------------------------------------- timing
  cplx_t rx;
  assign rx.re = SAMPLE_W'(adc_i) <<< (SAMPLE_W - ADC_W);
  assign rx.im = SAMPLE_W'(adc_q) <<< (SAMPLE_W - ADC_W);

  logic [PW-1:0]          sym_pos;
  logic signed [16:0]     slot;
  logic                   active, searching, sym_end, frame_done, pn_det;
  sym_kind_e              rx_kind, tx_next_kind;
  logic [15:0]            pn_metric;

  pn_correlator #(.LEN(PN_LEN), .IN_W(8)) u_pn (
    .clk, .rst_n, .in_valid(1'b1), .in_data(rx),
    .threshold(cfg_pn_threshold), .metric(pn_metric), .detect(pn_det)
  );

  airsync_ctrl #(.SYNC(SYNC_SYMS), .DET_LAT(2), .SLOT_W(16)) u_ctrl (
    .clk, .rst_n, .cfg_master, .cfg_num_data, .start, .pn_detect(pn_det),
    .sym_pos, .slot, .active, .searching, .sym_end, .rx_kind, .tx_next_kind,
    .frame_done
  );

  assign frame_active = active;
  assign pn_detected  = pn_det && searching;

  // --------------------------------------------------------- receive chain
  cplx_t rx_sym [N_FFT];
  logic  rx_sym_valid;

  ofdm_rx_framer u_rxf (
    .clk, .rst_n, .in_valid(1'b1),
    .capture(active && !cfg_master && rx_kind != SYM_PREAMBLE && rx_kind != SYM_NONE),
    .in_data(rx), .sym_pos, .out_valid(rx_sym_valid), .out_data(rx_sym)
  );

  // kind of the symbol that went into the FFT
  sym_kind_e rx_fft_kind, rx_bins_kind;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       rx_fft_kind <= SYM_NONE;
    else if (sym_end) rx_fft_kind <= rx_kind;
  end

  cplx_t rx_spec [N_FFT];
  logic  rx_spec_valid;

  fft #(.N(N_FFT), .INVERSE(1'b0)) u_fft (
    .clk, .rst_n, .in_valid(rx_sym_valid), .in_data(rx_sym),
    .out_valid(rx_spec_valid), .out_data(rx_spec)
  );

  // Hold the spectrum, then feed header spec_hold and pilot spec_hold one per cycle
  // to the phase detector.
  cplx_t            spec_hold [N_FFT];
  logic             seq_run;
  logic [5:0]       seq_i, seq_n;
  logic             vec_in_valid;
  cplx_t            vec_in;
  logic [TAG_W-1:0] vec_in_tag;

  always_ff @(posedge clk) begin
    if (rx_spec_valid) spec_hold <= rx_spec;
  end

  logic hdr_start;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seq_run      <= 1'b0;
      seq_i        <= '0;
      seq_n        <= '0;
      rx_bins_kind <= SYM_NONE;
      hdr_start    <= 1'b0;
    end else begin
      hdr_start <= 1'b0;
      if (rx_spec_valid && rx_fft_kind inside {SYM_HEADER, SYM_SYNC, SYM_DATA}) begin
        seq_run      <= 1'b1;
        seq_i        <= '0;
        rx_bins_kind <= rx_fft_kind;
        seq_n        <= (rx_fft_kind == SYM_HEADER) ? 6'(NUM_DATA + NUM_PILOTS) : 6'(NUM_PILOTS);
        hdr_start    <= (rx_fft_kind == SYM_HEADER);
      end else if (seq_run) begin
        seq_i <= seq_i + 1'b1;
        if (seq_i == seq_n - 1'b1) seq_run <= 1'b0;
      end
    end
  end

  logic [5:0] pil_i;
  assign pil_i = (rx_bins_kind == SYM_HEADER) ? seq_i - 6'(NUM_DATA) : seq_i;

  always_comb begin
    vec_in_valid = seq_run;
    if (rx_bins_kind == SYM_HEADER && seq_i < 6'(NUM_DATA)) begin
      vec_in     = spec_hold[data_bin(int'(seq_i))];
      vec_in_tag = {1'b0, 5'(seq_i)};
    end else begin
      vec_in     = spec_hold[pilot_bin(int'(pil_i))];
      vec_in_tag = {1'b1, 5'(pil_i)};
    end
  end

  logic             vec_out_valid;
  phase_t           vec_phase;
  logic [TAG_W-1:0] vec_tag;

  cordic_vectoring #(.ITER(CORDIC_ITER), .TAG_W(TAG_W)) u_vec (
    .clk, .rst_n, .in_valid(vec_in_valid), .in_data(vec_in), .in_tag(vec_in_tag),
    .out_valid(vec_out_valid), .out_phase(vec_phase), .out_tag(vec_tag)
  );

  logic [DI_W-1:0] est_rd_idx;
  phase_t          est_rd_phase;
  logic            est_valid;

  initial_phase_estimator #(.NSC(NUM_DATA)) u_est (
    .clk, .rst_n, .clear(hdr_start),
    .wr_en(vec_out_valid && !vec_tag[TAG_W-1]), .wr_idx(DI_W'(vec_tag)),
    .wr_phase(vec_phase), .rd_idx(est_rd_idx), .rd_phase(est_rd_phase),
    .all_valid(est_valid)
  );

  logic signed [PHASE_W+FRAC-1:0] slope;
  logic                           slope_valid, slope_ready;
  logic [15:0]                    t_sym;

  phase_smoothing_filter #(.NUM_P(NUM_PILOTS), .WIN(4), .T_W(16)) u_smooth (
    .clk, .rst_n, .ref_start(hdr_start),
    .in_valid(vec_out_valid && vec_tag[TAG_W-1]), .in_idx(PI_W'(vec_tag)),
    .in_phase(vec_phase), .in_last(vec_tag[TAG_W-1] && PI_W'(vec_tag) == PI_W'(NUM_PILOTS - 1)),
    .slope, .slope_valid, .slope_ready, .t_sym
  );

  assign drift_slope  = slope;
  assign slope_update = slope_valid;
  assign sync_locked  = cfg_master || (slope_ready && est_valid);

  // -------------------------------------------------------- transmit chain
  logic            buf_rd, buf_empty;
  cplx_t           buf_data;

  symbol_buffer #(.DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst_n, .flush(1'b0), .wr_valid(host_valid), .wr_ready(host_ready),
    .wr_data(host_data), .rd_en(buf_rd), .rd_data(buf_data), .empty(buf_empty),
    .count(buffer_count), .underflow(buffer_underflow)
  );

  // Builder: from BUILD_START, pop NUM_DATA subcarrier values, rotate each by
  // its predicted correction and collect them with the pilots (master) or
  // header values (master) in the IFFT input vector.
  sym_kind_e       bld_kind;
  logic            bld_issue;
  logic [5:0]      bld_i, bld_got;
  logic            bld_wait;
  cplx_t           tx_vec [N_FFT];
  logic            ifft_go;

  assign buf_rd     = bld_issue && bld_kind == SYM_DATA;
  assign est_rd_idx = DI_W'(bld_i);

  logic             ext_valid;
  phase_t           ext_phase;
  logic [TAG_W-1:0] ext_tag;
  cplx_t            data_d;

  phase_extrapolator #(.FRAC_BITS(FRAC), .LOOKAHEAD(LOOKAHEAD), .T_W(16), .TAG_W(TAG_W)) u_ext (
    .clk, .rst_n, .bypass(cfg_master), .slope, .t_sym,
    .in_valid(bld_issue), .in_tag({1'b0, 5'(bld_i)}), .in_init(est_rd_phase),
    .out_valid(ext_valid), .out_phase(ext_phase), .out_tag(ext_tag)
  );

  always_ff @(posedge clk) begin
    data_d <= (bld_kind == SYM_DATA) ? buf_data : '0;
  end

  logic             rot_valid;
  cplx_t            rot_data;
  logic [TAG_W-1:0] rot_tag;

  cordic_rotator #(.ITER(CORDIC_ITER), .TAG_W(TAG_W)) u_rot (
    .clk, .rst_n, .in_valid(ext_valid), .in_data(data_d), .in_phase(ext_phase),
    .in_tag(ext_tag), .out_valid(rot_valid), .out_data(rot_data), .out_tag(rot_tag)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bld_kind  <= SYM_NONE;
      bld_issue <= 1'b0;
      bld_i     <= '0;
      bld_got   <= '0;
      bld_wait  <= 1'b0;
      ifft_go   <= 1'b0;
    end else begin
      ifft_go <= 1'b0;
      if (active && sym_pos == PW'(BUILD_START)) begin
        bld_kind <= tx_next_kind;
        bld_i    <= '0;
        bld_got  <= '0;
        if (tx_next_kind == SYM_DATA) begin
          bld_issue <= 1'b1;
          bld_wait  <= 1'b1;
        end else if (tx_next_kind inside {SYM_HEADER, SYM_SYNC}) begin
          ifft_go <= 1'b1;
        end
      end else begin
        if (bld_issue) begin
          bld_i <= bld_i + 1'b1;
          if (bld_i == 6'(NUM_DATA - 1)) bld_issue <= 1'b0;
        end
        if (rot_valid && bld_wait) begin
          bld_got <= bld_got + 1'b1;
          if (bld_got == 6'(NUM_DATA - 1)) begin
            bld_wait <= 1'b0;
            ifft_go  <= 1'b1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (active && sym_pos == PW'(BUILD_START)) begin
      for (int k = 0; k < N_FFT; k++) tx_vec[k] <= '0;
      if (cfg_master) begin
        for (int j = 0; j < NUM_PILOTS; j++) tx_vec[pilot_bin(j)] <= '{re: SAMPLE_W'(PILOT_AMP), im: '0};
        if (tx_next_kind == SYM_HEADER)
          for (int i = 0; i < NUM_DATA; i++)
            tx_vec[data_bin(i)] <= '{re: hdr_sign(i) ? -SAMPLE_W'(HDR_AMP) : SAMPLE_W'(HDR_AMP), im: '0};
      end
    end else if (rot_valid && bld_wait) begin
      tx_vec[data_bin(int'(rot_tag[DI_W-1:0]))] <= rot_data;
    end
  end

  cplx_t     tx_sym [N_FFT];
  logic      tx_sym_valid;
  sym_kind_e ifft_kind;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       ifft_kind <= SYM_NONE;
    else if (ifft_go) ifft_kind <= bld_kind;
  end

  fft #(.N(N_FFT), .INVERSE(1'b1)) u_ifft (
    .clk, .rst_n, .in_valid(ifft_go), .in_data(tx_vec),
    .out_valid(tx_sym_valid), .out_data(tx_sym)
  );

  // the preamble is generated by the framer itself
  logic      txf_load;
  sym_kind_e txf_kind;
  always_comb begin
    txf_load = tx_sym_valid;
    txf_kind = ifft_kind;
    if (active && sym_pos == PW'(BUILD_START) && tx_next_kind == SYM_PREAMBLE) begin
      txf_load = 1'b1;
      txf_kind = SYM_PREAMBLE;
    end
  end

  cplx_t tx_out;
  ofdm_tx_framer u_txf (
    .clk, .rst_n, .load(txf_load), .load_kind(txf_kind), .load_data(tx_sym),
    .sym_pos, .out_data(tx_out), .out_kind(tx_kind)
  );

  assign dac_i = tx_out.re;
  assign dac_q = tx_out.im;

  // a symbol that is still being built at the slot boundary is late
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) late_symbol <= 1'b0;
    else        late_symbol <= sym_end && (bld_wait || bld_issue);
  end

  a_not_late: assert property (@(posedge clk) disable iff (!rst_n) !late_symbol);

endmodule

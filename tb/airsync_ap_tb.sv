// airsync_ap_tb: end-to-end test of two access points, a master and a
// secondary, joined by a simulated radio channel, at the core's default
// parameters.
//
// Channel from the master's DAC to the secondary's ADC: a delay of DLY
// samples, an attenuation of 1/2, a carrier phase that starts at THETA0 and
// drifts by OMEGA radians per sample (the relative frequency offset of the
// two carrier oscillators), and +-1 LSB of noise.
//
// Two downlink slots are run. In each, the testbench works out on its own,
// from the samples it gave the secondary, the phase the secondary ought to
// apply to data subcarrier n in slot k:
//     angle(header bin n as received) - header phase(n) + OMEGA*SYM_LEN*(k-1)
// and compares it with the phase the secondary actually applied, measured
// by a DFT of the secondary's transmitted symbol. It also checks the master's
// data symbols and pilots, the alignment of the two APs' symbol boundaries
// (must be within the cyclic prefix) and the slot length. In the second
// slot the secondary is given too few symbols, so its buffer underflows and
// those symbols must be silent.
//
// Mechanisms counted (each must happen): preamble detection, initial phase
// estimate, slope updates, extrapolated derotation of data symbols, master
// mode, secondary mode, buffer underflow, re-synchronisation on a second slot.
module airsync_ap_tb;
  import airsync_pkg::*;

  localparam int    DLY     = 5;
  localparam real   PI      = 3.14159265358979;
  localparam real   THETA0  = 1.1;
  localparam real   OMEGA   = 0.0006;      // rad per sample = 0.048 rad per symbol
  localparam int    ND      = 8;           // data symbols per slot
  localparam int    DATA0   = SYNC_SYMS + 2; // slot of the first data symbol
  localparam real   TOL_DEG = 2.0;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // ------------------------------------------------------------- the DUTs
  logic        m_start = 0, s_start = 0;
  logic        m_hv = 0, s_hv = 0, m_hr, s_hr;
  cplx_t       m_hd, s_hd;
  logic signed [ADC_W-1:0] s_adc_i, s_adc_q;
  logic signed [SAMPLE_W-1:0] m_dac_i, m_dac_q, s_dac_i, s_dac_q;
  logic        m_act, s_act, m_pn, s_pn, m_lock, s_lock, m_su, s_su, m_uf, s_uf, m_late, s_late;
  logic signed [PHASE_W+3:0] m_slope, s_slope;
  logic [10:0] m_cnt, s_cnt;
  sym_kind_e   m_kind, s_kind;

  airsync_ap u_master (
    .clk, .rst_n, .cfg_master(1'b1), .cfg_num_data(16'(ND)), .cfg_pn_threshold(16'd300),
    .start(m_start), .adc_i('0), .adc_q('0), .dac_i(m_dac_i), .dac_q(m_dac_q),
    .host_valid(m_hv), .host_ready(m_hr), .host_data(m_hd),
    .frame_active(m_act), .pn_detected(m_pn), .sync_locked(m_lock), .drift_slope(m_slope),
    .slope_update(m_su), .buffer_underflow(m_uf), .buffer_count(m_cnt), .tx_kind(m_kind),
    .late_symbol(m_late)
  );

  airsync_ap u_secondary (
    .clk, .rst_n, .cfg_master(1'b0), .cfg_num_data(16'(ND)), .cfg_pn_threshold(16'd300),
    .start(s_start), .adc_i(s_adc_i), .adc_q(s_adc_q), .dac_i(s_dac_i), .dac_q(s_dac_q),
    .host_valid(s_hv), .host_ready(s_hr), .host_data(s_hd),
    .frame_active(s_act), .pn_detected(s_pn), .sync_locked(s_lock), .drift_slope(s_slope),
    .slope_update(s_su), .buffer_underflow(s_uf), .buffer_count(s_cnt), .tx_kind(s_kind),
    .late_symbol(s_late)
  );

  // ------------------------------------------------------------ channel
  localparam int MAXT = 8000;
  real   rx_re [MAXT], rx_im [MAXT];        // what the secondary received
  real   m_re [MAXT], m_im [MAXT];          // master DAC
  real   s_re [MAXT], s_im [MAXT];          // secondary DAC
  int    m_k [MAXT], s_k [MAXT];
  int    tnow = 0;

  always_ff @(posedge clk) begin
    if (rst_n && tnow < MAXT) begin
      m_re[tnow] <= real'(m_dac_i);  m_im[tnow] <= real'(m_dac_q);
      s_re[tnow] <= real'(s_dac_i);  s_im[tnow] <= real'(s_dac_q);
      m_k[tnow]  <= int'(m_kind);    s_k[tnow]  <= int'(s_kind);
      tnow <= tnow + 1;
    end
  end

  // secondary ADC input for sample time tnow
  always_comb begin
    real a, b, th, r, q;
    if (tnow >= DLY && tnow < MAXT) begin
      a  = 0.5 * m_re[tnow - DLY];
      b  = 0.5 * m_im[tnow - DLY];
      th = THETA0 + OMEGA * real'(tnow);
      r  = a * $cos(th) - b * $sin(th);
      q  = a * $sin(th) + b * $cos(th);
    end else begin
      r = 0.0; q = 0.0;
    end
    s_adc_i = ADC_W'($rtoi(r / 4.0));
    s_adc_q = ADC_W'($rtoi(q / 4.0));
  end

  always_ff @(posedge clk) begin
    if (tnow < MAXT) begin
      rx_re[tnow] <= real'(s_adc_i) * 4.0;
      rx_im[tnow] <= real'(s_adc_q) * 4.0;
    end
  end

  // -------------------------------------------------------------- helpers
  function automatic void dft_bin(ref real xr [MAXT], ref real xi [MAXT], input int t0,
                                  input int bin, output real yr, output real yi);
    yr = 0.0; yi = 0.0;
    for (int m = 0; m < N_FFT; m++) begin
      real c, s;
      c = $cos(2.0 * PI * real'(bin * m) / real'(N_FFT));
      s = -$sin(2.0 * PI * real'(bin * m) / real'(N_FFT));
      yr += xr[t0 + m] * c - xi[t0 + m] * s;
      yi += xr[t0 + m] * s + xi[t0 + m] * c;
    end
  endfunction

  function automatic real wrap_deg(real r);
    real d;
    d = r * 180.0 / PI;
    while (d > 180.0)   d -= 360.0;
    while (d <= -180.0) d += 360.0;
    return d;
  endfunction

  // first time >= from at which kind array equals k
  function automatic int find_kind(ref int ka [MAXT], input int from, input int k);
    for (int t = from; t < MAXT; t++) if (ka[t] == k) return t;
    return -1;
  endfunction

  // data values sent to both APs: QPSK, amplitude 6000
  cplx_t m_data [2][ND][NUM_DATA];
  cplx_t s_data [2][ND][NUM_DATA];

  // drive on the falling edge, the DUT samples on the rising edge
  task automatic push(input bit to_master, input cplx_t v);
    @(negedge clk);
    if (to_master) begin m_hd = v; m_hv = 1'b1; end
    else           begin s_hd = v; s_hv = 1'b1; end
    do @(posedge clk); while (!(to_master ? m_hr : s_hr));
    @(negedge clk);
    m_hv = 1'b0; s_hv = 1'b0;
  endtask

  // ------------------------------------------------------------ counters
  int n_pn = 0, n_slope = 0, n_lock = 0, n_underflow = 0, n_late = 0;
  logic s_lock_q = 0;
  always_ff @(posedge clk) if (rst_n) begin
    if (s_pn) n_pn <= n_pn + 1;
    if (s_su) n_slope <= n_slope + 1;
    s_lock_q <= s_lock;
    if (s_lock && !s_lock_q) n_lock <= n_lock + 1;
    if (s_uf) n_underflow <= n_underflow + 1;
    if (m_late || s_late) n_late <= n_late + 1;
  end

  int n_derot = 0, n_master_sym = 0, n_silent = 0;

  // ---------------------------------------------------- check one slot
  task automatic check_slot(input int f, input int t_from, input int s_nd);
    int th, tm0, ts0, tp;
    real hr [NUM_DATA], hi [NUM_DATA];
    // master's header as received by the secondary
    th = find_kind(m_k, t_from, int'(SYM_HEADER));
    tp = find_kind(m_k, t_from, int'(SYM_PREAMBLE));
    for (int i = 0; i < NUM_DATA; i++)
      dft_bin(rx_re, rx_im, th + DLY + CP_LEN, data_bin(i), hr[i], hi[i]);
    tm0 = find_kind(m_k, th, int'(SYM_DATA));
    ts0 = find_kind(s_k, th, int'(SYM_DATA));
    check(tm0 - th == (SYNC_SYMS + 1) * SYM_LEN, $sformatf("slot %0d: master data starts %0d samples after header", f, tm0 - th));
    check(th - tp == SYM_LEN, "preamble is one symbol");
    // secondary's boundary follows the master's within the cyclic prefix
    check(ts0 > tm0 && ts0 - tm0 < CP_LEN,
          $sformatf("slot %0d: secondary data boundary %0d samples after master's", f, ts0 - tm0));
    $display("slot %0d: master data at %0d, secondary data at %0d (offset %0d)", f, tm0, ts0, ts0 - tm0);
    for (int j = 0; j < ND; j++) begin
      int k;
      real worst;
      k = DATA0 + j;
      worst = 0.0;
      for (int i = 0; i < NUM_DATA; i++) begin
        real yr, yi, ang_ref, ang_hdr, ang_want, err;
        // master: data appears unrotated (phase reference)
        dft_bin(m_re, m_im, tm0 + j * SYM_LEN + CP_LEN, data_bin(i), yr, yi);
        err = wrap_deg($atan2(yi, yr) - $atan2(real'(m_data[f][j][i].im), real'(m_data[f][j][i].re)));
        check(err < 1.0 && err > -1.0, $sformatf("master slot %0d sym %0d sc %0d phase err %f deg", f, j, i, err));
        if (i == 0) n_master_sym++;
        // secondary
        dft_bin(s_re, s_im, ts0 + j * SYM_LEN + CP_LEN, data_bin(i), yr, yi);
        if (j < s_nd) begin
          ang_ref  = $atan2(real'(s_data[f][j][i].im), real'(s_data[f][j][i].re));
          ang_hdr  = $atan2(hi[i], hr[i]) + (hdr_sign(i) ? PI : 0.0);
          ang_want = ang_hdr + OMEGA * real'(SYM_LEN) * real'(k - 1);
          err = wrap_deg($atan2(yi, yr) - ang_ref - ang_want);
          if (err > worst || -err > worst) worst = (err > 0.0) ? err : -err;
          check(err < TOL_DEG && err > -TOL_DEG,
                $sformatf("secondary slot %0d sym %0d sc %0d phase err %f deg", f, j, i, err));
          if (i == 0) n_derot++;
        end else begin
          check(yr * yr + yi * yi < 1.0e4, "underflowed symbol must be silent");
          if (i == 0) n_silent++;
        end
      end
      if (j < s_nd) $display("slot %0d data symbol %0d: worst secondary phase error %f deg", f, j, worst);
    end
    // master pilots are present in a data symbol
    begin
      real yr, yi;
      dft_bin(m_re, m_im, tm0 + CP_LEN, pilot_bin(0), yr, yi);
      check(yr > 0.9 * PILOT_AMP * 8.0 && yr < 1.1 * PILOT_AMP * 8.0, $sformatf("master pilot amplitude %f", yr));
      dft_bin(s_re, s_im, ts0 + CP_LEN, pilot_bin(0), yr, yi);
      check(yr * yr + yi * yi < 1.0e6, "secondary leaves the pilot bins empty");
    end
  endtask

  // --------------------------------------------------------------- stimulus
  initial begin
    int slot_len, t1;
    slot_len = (DATA0 + ND) * SYM_LEN;
    for (int f = 0; f < 2; f++)
      for (int j = 0; j < ND; j++)
        for (int i = 0; i < NUM_DATA; i++) begin
          m_data[f][j][i].re = ($urandom & 1) ? 16'sd6000 : -16'sd6000;
          m_data[f][j][i].im = ($urandom & 1) ? 16'sd6000 : -16'sd6000;
          s_data[f][j][i].re = ($urandom & 1) ? 16'sd6000 : -16'sd6000;
          s_data[f][j][i].im = ($urandom & 1) ? 16'sd6000 : -16'sd6000;
        end
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // slot 0: both APs get a full slot of data
    for (int j = 0; j < ND; j++)
      for (int i = 0; i < NUM_DATA; i++) begin
        push(1'b1, m_data[0][j][i]);
        push(1'b0, s_data[0][j][i]);
      end
    s_start <= 1'b1; @(posedge clk); s_start <= 1'b0;
    repeat (20) @(posedge clk);
    m_start <= 1'b1; @(posedge clk); m_start <= 1'b0;
    @(posedge clk);
    while (m_act) @(posedge clk);
    repeat (3 * SYM_LEN) @(posedge clk);
    check(s_act == 1'b0, "secondary finished its slot");
    check_slot(0, 0, ND);
    t1 = tnow;
    // slot 1: the secondary gets only half of its symbols
    for (int j = 0; j < ND; j++)
      for (int i = 0; i < NUM_DATA; i++) begin
        push(1'b1, m_data[1][j][i]);
        if (j < ND / 2) push(1'b0, s_data[1][j][i]);
      end
    m_start <= 1'b1; @(posedge clk); m_start <= 1'b0;
    @(posedge clk);
    while (m_act) @(posedge clk);
    repeat (3 * SYM_LEN) @(posedge clk);
    check_slot(1, t1, ND / 2);

    // every mechanism must have happened
    $display("mechanisms: pn_detect=%0d initial_estimate=%0d slope_updates=%0d derotated_symbols=%0d master_symbols=%0d underflow=%0d silent_symbols=%0d late=%0d",
             n_pn, n_lock, n_slope, n_derot, n_master_sym, n_underflow, n_silent, n_late);
    check(n_pn == 2, "preamble detected once per slot");
    check(n_lock == 2, "initial estimate and window filled once per slot");
    check(n_slope == 2 * (SYNC_SYMS + ND), "one slope update per received symbol after the header");
    check(n_derot == ND + ND / 2, "derotated data symbols sent by the secondary");
    check(n_master_sym == 2 * ND, "master data symbols");
    check(n_underflow > 0, "buffer underflow happened");
    check(n_silent == ND / 2, "silent symbols after underflow");
    check(n_late == 0, "no symbol was late");
    check(slot_len == (SYNC_SYMS + 2 + ND) * SYM_LEN, "slot length");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

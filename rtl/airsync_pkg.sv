// airsync_pkg: types and constants shared by the AirSync access-point core.
//
// Samples are complex numbers with 16-bit two's-complement I and Q parts (the
// DAC precision of the radio platform). Phases are unsigned fractions of a
// turn: a PHASE_W-bit phase p stands for 2*pi*p/2^PHASE_W radians, so adding
// and subtracting phases wraps around the circle for free.
//
// The OFDM numerology is this design's own choice, derived from the figures
// the paper does give: a 20 MHz sample clock, a 5 MHz data band and pilot
// tones about 7.5 MHz above and below the carrier. With a 64-point FFT the
// subcarrier spacing is 312.5 kHz, so the data band covers bins -8..-1 and
// 1..8 (DC left empty) and the pilots sit on bins +-23 and +-24 (7.2 and
// 7.5 MHz). The cyclic prefix is 16 samples, one OFDM symbol 80 samples.
//
// The frame (downlink slot) sent by the master is: one PN preamble symbol,
// one channel-probing header symbol, SYNC_SYMS pilot-only symbols in which the
// secondaries learn the phase drift, then the jointly transmitted data symbols.
//
// Lint notes: a module that imports this package leaves the constants it does
// not need unused, and pn_chip reads only the low 7 bits of its index (the
// sequence repeats every 63 chips); both warnings are expected.
package airsync_pkg;

  localparam int SAMPLE_W  = 16;   // DAC sample width (paper: 16-bit DACs)
  localparam int ADC_W     = 14;   // ADC sample width (paper: 14-bit ADCs)
  localparam int PHASE_W   = 16;   // phase resolution, 2^16 steps per turn

  localparam int N_FFT     = 64;
  localparam int CP_LEN    = 16;
  localparam int SYM_LEN   = N_FFT + CP_LEN;
  localparam int NUM_DATA  = 16;   // data subcarriers in the 5 MHz band
  localparam int NUM_PILOTS = 4;   // out-of-band synchronisation tones
  localparam int PN_LEN    = 63;   // preamble m-sequence length
  localparam int SYNC_SYMS = 6;    // pilot-only symbols before joint data

  // Amplitudes of the master's reference signals (frequency-domain values
  // before the 1/N scaled IFFT, or time-domain chips for the preamble).
  localparam int PILOT_AMP = 8192;
  localparam int HDR_AMP   = 8192;
  localparam int PN_AMP    = 4096;

  typedef logic [PHASE_W-1:0] phase_t;

  typedef struct packed {
    logic signed [SAMPLE_W-1:0] re;
    logic signed [SAMPLE_W-1:0] im;
  } cplx_t;

  // Kind of OFDM symbol in a frame.
  typedef enum logic [2:0] {
    SYM_NONE     = 3'd0,
    SYM_PREAMBLE = 3'd1,
    SYM_HEADER   = 3'd2,
    SYM_SYNC     = 3'd3,
    SYM_DATA     = 3'd4
  } sym_kind_e;

  // FFT bin of data subcarrier i (0..NUM_DATA-1): 1..8, then 56..63 (-8..-1).
  function automatic int data_bin(int i);
    return (i < NUM_DATA/2) ? i + 1 : N_FFT - NUM_DATA + i;
  endfunction

  // FFT bin of pilot j (0..NUM_PILOTS-1): 23, 24, 40 (-24), 41 (-23).
  function automatic int pilot_bin(int j);
    return (j < NUM_PILOTS/2) ? 23 + j : N_FFT - 24 + (j - NUM_PILOTS/2);
  endfunction

  // Chip k of the preamble m-sequence, LFSR x^6 + x^5 + 1 seeded with all ones.
  // A chip value of 1 is sent as -PN_AMP, 0 as +PN_AMP.
  function automatic logic [127:0] pn_sequence();
    logic [5:0]   s;
    logic [127:0] seq;
    s = 6'h3f;
    for (int i = 0; i < 128; i++) begin
      seq[i] = s[5];
      s = {s[4:0], s[5] ^ s[4]};
    end
    return seq;
  endfunction

  localparam logic [127:0] PN_SEQ = pn_sequence();

  function automatic logic pn_chip(int k);
    return PN_SEQ[k[6:0]];
  endfunction

  // Header (channel-probing) symbol: BPSK on the data subcarriers, sign taken
  // from the same m-sequence so that the header has a low peak-to-average ratio.
  function automatic logic hdr_sign(int i);
    return pn_chip(i + 7);
  endfunction

endpackage

// pn_correlator: matched filter for the master's pseudo-noise preamble; marks
// the slot boundary at a secondary access point.
//
// Each downlink slot starts with a PN sequence from the master (paper,
// protocol design) that the other access points use for frame alignment;
// aligning to it puts all APs on a common slot boundary within the cyclic
// prefix. The correlator itself is this design's choice: the last PN_LEN
// received samples, truncated to IN_W bits, are correlated with the +-1
// chips (I and Q separately, since the carrier phase is unknown) and
// |corr_I| + |corr_Q| is compared with a programmable threshold.
//
// Interface: one sample per cycle when in_valid. Samples enter a delay line,
// the correlation of its contents is registered into metric, and detect is
// high with metric when metric >= threshold. Latency: detect is high
// exactly 2 cycles after the last preamble chip was on in_data.
module pn_correlator
  import airsync_pkg::*;
#(
  parameter int LEN  = PN_LEN,
  parameter int IN_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  cplx_t            in_data,
  input  logic [IN_W+$clog2(LEN)+1:0] threshold,
  output logic [IN_W+$clog2(LEN)+1:0] metric,
  output logic             detect
);

  localparam int SW = IN_W + $clog2(LEN) + 1;   // signed correlation width

  logic signed [IN_W-1:0] dl_re [LEN];
  logic signed [IN_W-1:0] dl_im [LEN];

  // dl[0] holds the newest sample, which lines up with the last chip.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < LEN; k++) begin
        dl_re[k] <= '0;
        dl_im[k] <= '0;
      end
    end else if (in_valid) begin
      dl_re[0] <= in_data.re[SAMPLE_W-1 -: IN_W];
      dl_im[0] <= in_data.im[SAMPLE_W-1 -: IN_W];
      for (int k = 1; k < LEN; k++) begin
        dl_re[k] <= dl_re[k-1];
        dl_im[k] <= dl_im[k-1];
      end
    end
  end

  logic signed [SW-1:0] c_re, c_im;
  logic [SW:0] mag;
  always_comb begin
    c_re = '0;
    c_im = '0;
    for (int k = 0; k < LEN; k++) begin
      // chip 1 was sent as a negative value
      if (pn_chip(LEN - 1 - k)) begin
        c_re = c_re - SW'(dl_re[k]);
        c_im = c_im - SW'(dl_im[k]);
      end else begin
        c_re = c_re + SW'(dl_re[k]);
        c_im = c_im + SW'(dl_im[k]);
      end
    end
    mag = (SW+1)'(c_re < 0 ? -c_re : c_re) + (SW+1)'(c_im < 0 ? -c_im : c_im);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      metric <= '0;
      detect <= 1'b0;
    end else begin
      metric <= mag;
      detect <= (mag >= threshold);
    end
  end

endmodule

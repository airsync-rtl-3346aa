// ofdm_tx_framer_tb: loads an OFDM block, a preamble, nothing, and a block
// loaded in the last cycle; checks the cyclic prefix, the body, the gain of
// 2^GAIN_SHIFT with saturation, the PN chips and silence, one cycle after
// the sym_pos they belong to.
module ofdm_tx_framer_tb;
  import airsync_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic load = 0;
  sym_kind_e load_kind, out_kind;
  cplx_t load_data [N_FFT], out_data;
  logic [6:0] sym_pos = 0;
  cplx_t blk [N_FFT];

  ofdm_tx_framer #(.N(N_FFT), .CP(CP_LEN), .GAIN_SHIFT(3)) dut (.*);

  function automatic logic signed [15:0] g8(logic signed [15:0] v);
    int x;
    x = int'(v) * 8;
    if (x > 32767) x = 32767;
    if (x < -32768) x = -32768;
    return 16'(x);
  endfunction

  initial begin
    sym_kind_e kinds [5] = '{SYM_DATA, SYM_PREAMBLE, SYM_NONE, SYM_SYNC, SYM_HEADER};
    cplx_t blks [5][N_FFT];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 6; s++) begin
      for (int p = 0; p < SYM_LEN; p++) begin
        @(negedge clk);
        // output now belongs to the previous cycle's sym_pos
        if (s >= 1 && !(s == 1 && p == 0)) begin
          int ps, ss;
          cplx_t w;
          ps = (p == 0) ? SYM_LEN - 1 : p - 1;
          ss = (p == 0) ? s - 2 : s - 1;
          w = '0;
          case (kinds[ss])
            SYM_PREAMBLE: w.re = (ps < PN_LEN) ? (pn_chip(ps) ? -16'sd4096 : 16'sd4096) : 16'sd0;
            SYM_NONE: w = '0;
            default: begin
              w.re = g8(blks[ss][(ps < CP_LEN) ? N_FFT - CP_LEN + ps : ps - CP_LEN].re);
              w.im = g8(blks[ss][(ps < CP_LEN) ? N_FFT - CP_LEN + ps : ps - CP_LEN].im);
            end
          endcase
          checks++;
          if (out_data != w || out_kind != kinds[ss]) begin
            failures++; $display("FAIL s=%0d p=%0d got %h want %h", ss, ps, out_data, w);
          end
        end
        sym_pos = 7'(p);
        load = 0;
        // load mid-symbol, except symbol 4's block, loaded in the last cycle
        if (s < 5 && ((s != 3 && p == 30) || (s == 3 && p == SYM_LEN - 1))) begin
          for (int n = 0; n < N_FFT; n++) begin
            blks[s][n].re = 16'(int'($urandom_range(0, 12000)) - 6000);
            blks[s][n].im = 16'(int'($urandom_range(0, 12000)) - 6000);
          end
          load = 1; load_kind = kinds[s]; load_data = blks[s];
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

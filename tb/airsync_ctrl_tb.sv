// airsync_ctrl_tb: master frame (preparation symbol, preamble, header, sync,
// data, back to idle) and secondary frame (search, timing from pn_detect,
// return to search), checking slot numbers, symbol kinds, sym_pos and
// frame_done cycle by cycle against a reference sequence.
module airsync_ctrl_tb;
  import airsync_pkg::*;
  localparam int ND = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_master, start = 0, pn_detect = 0;
  logic [15:0] cfg_num_data = 16'(ND);
  logic [6:0] sym_pos;
  logic signed [16:0] slot;
  logic active, searching, sym_end, frame_done;
  sym_kind_e rx_kind, tx_next_kind;

  airsync_ctrl #(.SYNC(SYNC_SYMS), .DET_LAT(2), .SLOT_W(16)) dut (.*);

  function automatic sym_kind_e kind_of(int k);
    if (k == 0) return SYM_PREAMBLE;
    if (k == 1) return SYM_HEADER;
    if (k >= 2 && k <= SYNC_SYMS + 1) return SYM_SYNC;
    if (k > SYNC_SYMS + 1 && k <= SYNC_SYMS + 1 + ND) return SYM_DATA;
    return SYM_NONE;
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s slot=%0d pos=%0d", what, slot, sym_pos); end
  endtask

  // follow one frame from (slot k0, pos p0) to the end
  task automatic follow(int k0, int p0, bit master);
    int k, p;
    k = k0; p = p0;
    while (1) begin
      sym_kind_e nk;
      #1;
      nk = kind_of(k + 1);
      if (!master && nk != SYM_DATA) nk = SYM_NONE;
      chk(active && slot == 17'(k) && sym_pos == 7'(p), "timing");
      chk(rx_kind == kind_of(k), "rx_kind");
      chk(tx_next_kind == nk, "tx_next_kind");
      chk(sym_end == (p == SYM_LEN - 1), "sym_end");
      @(posedge clk);
      #1;
      if (p == SYM_LEN - 1 && k == SYNC_SYMS + 1 + ND) begin
        chk(frame_done, "frame_done");
        chk(!active && (searching == !master), "end state");
        break;
      end
      chk(!frame_done, "no frame_done");
      p++;
      if (p == SYM_LEN) begin p = 0; k++; end
      @(negedge clk);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // master
    cfg_master = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    follow(-1, 0, 1);
    // secondary
    @(negedge clk) cfg_master = 0; start = 1;
    @(negedge clk) start = 0;
    repeat (37) @(negedge clk);
    chk(searching && !active, "searching");
    pn_detect = 1;
    @(negedge clk) pn_detect = 0;
    follow(0, PN_LEN + 2, 0);
    // second frame found again by the search
    repeat (11) @(negedge clk);
    pn_detect = 1;
    @(negedge clk) pn_detect = 0;
    follow(0, PN_LEN + 2, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

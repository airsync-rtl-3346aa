// phase_extrapolator_tb: corr = init + round(slope*(t+2)/16) modulo one turn
// for random slopes, times and initial phases; bypass gives zero; one-cycle
// latency with the tag carried along.
module phase_extrapolator_tb;
  import airsync_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic bypass = 0, in_valid = 0, out_valid;
  logic signed [19:0] slope;
  logic [15:0] t_sym;
  logic [5:0] in_tag, out_tag;
  phase_t in_init, out_phase;

  phase_extrapolator #(.FRAC_BITS(4), .LOOKAHEAD(2), .T_W(16), .TAG_W(6)) dut (.*);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      longint prod;
      int want;
      @(negedge clk);
      slope   = 20'($urandom_range(0, 1048575));
      t_sym   = 16'($urandom_range(0, 200));
      in_init = phase_t'($urandom_range(0, 65535));
      in_tag  = 6'(i);
      bypass  = (i % 10 == 9);
      in_valid = 1;
      prod = longint'(slope) * longint'(int'(t_sym) + 2) + 8;
      want = bypass ? 0 : (int'(in_init) + int'(prod >>> 4)) & 16'hffff;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || out_phase != phase_t'(want) || out_tag != 6'(i)) begin
        failures++;
        $display("FAIL %0d: got %0d want %0d valid %0d", i, out_phase, want, out_valid);
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

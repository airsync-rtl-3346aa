// symbol_buffer_tb: random pushes and pops against a queue model, filling
// to full (wr_ready low), draining to empty, and underflow on an empty read.
module symbol_buffer_tb;
  import airsync_pkg::*;
  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic flush = 0, wr_valid = 0, wr_ready, rd_en = 0, empty, underflow;
  cplx_t wr_data, rd_data;
  logic [4:0] count;
  cplx_t model [$];
  int n_full = 0, n_uf = 0;

  symbol_buffer #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      int phase;
      bit w, r;
      phase = (c / 200) % 3;        // mostly fill, mostly drain, mixed
      @(negedge clk);
      w = (phase == 0) ? ($urandom_range(0, 9) < 8) : (phase == 1) ? ($urandom_range(0, 9) < 2) : $urandom_range(0, 1);
      r = (phase == 0) ? ($urandom_range(0, 9) < 2) : (phase == 1) ? ($urandom_range(0, 9) < 8) : $urandom_range(0, 1);
      wr_valid = w; rd_en = r;
      wr_data = cplx_t'($urandom);
      #1;
      checks++;
      if (count != 5'(model.size()) || empty != (model.size() == 0) || wr_ready != (model.size() < DEPTH)) begin
        failures++; $display("FAIL count %0d model %0d", count, model.size());
      end
      if (r && model.size() > 0) begin
        checks++;
        if (rd_data != model[0]) begin failures++; $display("FAIL data"); end
      end
      if (!wr_ready) n_full++;
      @(posedge clk);
      #1;
      if (r && model.size() == 0) begin
        n_uf++;
        checks++;
        if (!underflow) begin failures++; $display("FAIL no underflow"); end
      end
      if (r && model.size() > 0) void'(model.pop_front());
      if (w && wr_ready_q()) model.push_back(wr_data);
    end
    checks++;
    if (n_full == 0 || n_uf == 0) begin failures++; $display("FAIL full %0d underflow %0d", n_full, n_uf); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // wr_ready as it was before the last clock edge
  logic ready_before;
  always @(negedge clk) ready_before = wr_ready;
  function automatic bit wr_ready_q();
    return ready_before;
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

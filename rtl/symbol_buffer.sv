// symbol_buffer: FIFO holding the precoded frequency-domain data symbols
// that the central server streams to the access point ahead of a slot.
//
// The server computes the precoded I/Q values of every data subcarrier for
// the next downlink slot without any phase correction and streams them to
// each AP; the AP applies the synchronisation correction and the IFFT on
// the fly. The paper delivers them through the processor's DMA; here they
// arrive on a valid/ready stream (this design's choice), one subcarrier
// value per beat, subcarrier 0 first, NUM_DATA beats per OFDM symbol.
//
// Interface: wr_valid/wr_ready/wr_data (accepted when both high); rd_en
// pops the head, which is always visible on rd_data (first-word
// fall-through). Reading an empty buffer returns zero and pulses underflow
// in the next cycle (the AP then sends silence on that subcarrier). Memory
// is an array of DEPTH words; count is the fill level.
module symbol_buffer
  import airsync_pkg::*;
#(
  parameter int DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     flush,
  input  logic                     wr_valid,
  output logic                     wr_ready,
  input  cplx_t                    wr_data,
  input  logic                     rd_en,
  output cplx_t                    rd_data,
  output logic                     empty,
  output logic [$clog2(DEPTH):0]   count,
  output logic                     underflow
);

  localparam int AW = $clog2(DEPTH);

  cplx_t         mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          do_wr, do_rd;

  assign empty    = (count == 0);
  assign wr_ready = (count != (AW+1)'(DEPTH));
  assign do_wr    = wr_valid && wr_ready;
  assign do_rd    = rd_en && !empty;
  assign rd_data  = empty ? '0 : mem[rp];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0; underflow <= 1'b0;
    end else if (flush) begin
      wp <= '0; rp <= '0; count <= '0; underflow <= 1'b0;
    end else begin
      underflow <= rd_en && empty;
      if (do_wr) wp <= wp + 1'b1;
      if (do_rd) rp <= rp + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  // the fill level can never exceed the depth
  a_count: assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));

endmodule

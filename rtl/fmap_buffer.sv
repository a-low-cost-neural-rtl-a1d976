// fmap_buffer: on-chip feature-map buffer split into LANES channel banks.
//
// Each bank is a simple dual-port memory (one read port, one write port) of
// DEPTH words of 24 bits, the shape that maps onto one or more block RAMs.
// All banks share one read address and one write address, so one access
// moves the same pixel of 8 consecutive channels (one "channel group").
// A channel c of pixel p is stored in bank c % 8 at word (c / 8) * H * W + p.
//
// Timing: reads are synchronous; rd_data holds the words addressed in the
// previous cycle in which rd_en was high. Writes take effect at the clock
// edge, per bank under wr_en. A read and a write of the same word in one
// cycle return the old contents. The memory is not reset: its contents are
// defined only once written. The banked organisation is this design's own
// choice; the published design only says that each ODEBlock holds three
// such buffers in BRAM/URAM. The default DEPTH, 576 words, is one buffer of
// ODEBlock1: 65 channels (64 plus the time channel) = 9 groups of 8 x 8 pixels.
module fmap_buffer
  import dsode_pkg::*;
#(
  parameter int DEPTH = 576
) (
  input  logic     clk,
  input  logic     rd_en,
  input  faddr_t   rd_addr,
  output fm_vec_t  rd_data,
  input  lane_en_t wr_en,
  input  faddr_t   wr_addr,
  input  fm_vec_t  wr_data
);

  localparam int AW = aw(DEPTH);

  for (genvar b = 0; b < LANES; b++) begin : g_bank
    fm_t mem [DEPTH];

    always_ff @(posedge clk) begin
      if (wr_en[b] && int'(wr_addr) < DEPTH) mem[wr_addr[AW-1:0]] <= wr_data[b];
      if (rd_en) rd_data[b] <= (int'(rd_addr) < DEPTH) ? mem[rd_addr[AW-1:0]] : '0;
    end
  end

endmodule

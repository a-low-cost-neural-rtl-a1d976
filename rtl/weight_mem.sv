// weight_mem: on-chip parameter array of one layer, split into LANES banks.
//
// Bank l holds the parameters used by arithmetic lane l (for a convolution,
// the weights of output channels o with o % 8 == l), so one read returns the
// 8 parameters the 8 lanes need in the same cycle. Parameters are written one
// at a time (bank wr_lane, word wr_addr) while the weights are transferred,
// and read 8 at a time during computation.
//
// Timing: synchronous read, rd_data is valid the cycle after rd_addr. Not
// reset. Width W is 20 bits for convolution weights and 24 bits for batch
// norm parameters, following the published number formats; the bank layout
// is this design's own. The default DEPTH, 520 words per bank, holds the
// 64 x 65 pointwise weights of ODEBlock1.
module weight_mem
  import dsode_pkg::*;
#(
  parameter int W     = WT_W,
  parameter int DEPTH = 520
) (
  input  logic                        clk,
  input  logic                        wr_en,
  input  logic [$clog2(LANES)-1:0]    wr_lane,
  input  logic [aw(DEPTH)-1:0]        wr_addr,
  input  logic signed [W-1:0]         wr_data,
  input  logic [aw(DEPTH)-1:0]        rd_addr,
  output logic [LANES-1:0][W-1:0]     rd_data
);

  for (genvar b = 0; b < LANES; b++) begin : g_bank
    logic [W-1:0] mem [DEPTH];

    always_ff @(posedge clk) begin
      if (wr_en && int'(wr_lane) == b && int'(wr_addr) < DEPTH)
        mem[wr_addr] <= wr_data;
      rd_data[b] <= (int'(rd_addr) < DEPTH) ? mem[rd_addr] : '0;
    end
  end

endmodule

// avg_pool: global average pooling of the last ODEBlock output.
//
// Takes a C x H x W map on s_* (beats group-major, pixel-minor, 8 channels
// per beat) and emits one beat per 8-channel group on m_* (lanes past channel C zero) holding the mean
// of the H * W pixels of each channel: sum >>> log2(H * W) (H * W must be a
// power of two). With the default 2 x 2 x 256 input it yields the 1 x 1 x 256
// final feature map the accelerator returns to the processor.
//
// Timing: one input beat per cycle while no result is pending; a result beat
// appears the cycle after the last pixel of its group and s_ready stays low
// until it is taken.
//
// The published design states that the core's final feature map is
// 1 x 1 x 256 while its last ODEBlock outputs 2 x 2 x 256; averaging is this
// design's choice for the step between the two (the usual ResNet head).
module avg_pool
  import dsode_pkg::*;
#(
  parameter int C = 256,
  parameter int H = 2,
  parameter int W = 2
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    s_valid,
  output logic    s_ready,
  input  fm_vec_t s_data,
  output logic    m_valid,
  input  logic    m_ready,
  output fm_vec_t m_data
);

  localparam int P  = H * W;
  localparam int SH = $clog2(P);

  if ((1 << SH) != P) begin : g_check
    $error("avg_pool: H * W must be a power of two");
  end

  acc_t sum [LANES];
  int   p, g;

  assign s_ready = !m_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < LANES; l++) sum[l] <= '0;
      p <= 0; g <= 0; m_valid <= 1'b0; m_data <= '0;
    end else begin
      if (m_valid && m_ready) m_valid <= 1'b0;
      if (s_valid && s_ready) begin
        for (int l = 0; l < LANES; l++) begin
          acc_t s;
          s = ((p == 0) ? '0 : sum[l]) + acc_t'(s_data[l]);
          sum[l] <= s;
          if (p == P - 1) m_data[l] <= (g * LANES + l < C) ? sat_fm(s >>> SH) : '0;
        end
        if (p == P - 1) begin
          p <= 0; m_valid <= 1'b1;
          g <= (g == ngroups(C) - 1) ? 0 : g + 1;
        end
        else p <= p + 1;
      end
    end
  end

endmodule

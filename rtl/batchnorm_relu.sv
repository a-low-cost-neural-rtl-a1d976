// batchnorm_relu: inference batch normalisation, shortcut add and ReLU.
//
// For every channel c and pixel p of a C x H x W map:
//   y = ((x * scale[c]) >>> FRAC) + shift[c]  (+ r if res_en)
//   y = saturate24(y);  if relu_en: y = max(y, 0)
// where x comes from the source buffer and r, the shortcut input, from the
// residual buffer at the same address. Batch norm is folded into one scale
// and one shift per channel, both 24-bit fixed point. With res_en the unit
// performs the "+" and final ReLU that close an ODEBlock or a downsampling
// block (the Euler step z + f(z)); without it, the Batchnorm+ReLU inside.
// The 8 lanes process the 8 channels of a group together, one group-pixel
// per cycle: ceil(C/8) * H * W cycles plus 4 cycles from start to done. It may write back
// in place into its source buffer, since every word is read before it is
// rewritten.
//
// Parameters arrive through wl_*: C scales, then C shifts, after wl_start.
// The fused BatchNormReLU unit and its 24-bit format follow the published
// design; folding BN into scale/shift and placing the shortcut add here are
// this design's own choices.
module batchnorm_relu
  import dsode_pkg::*;
#(
  parameter int C = 64,
  parameter int H = 8,
  parameter int W = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        relu_en,
  input  logic        res_en,
  output logic        busy,
  output logic        done,
  output logic        rd_en,
  output faddr_t      rd_addr,
  input  fm_vec_t     src_rd_data,
  input  fm_vec_t     res_rd_data,
  output lane_en_t    dst_wr_en,
  output faddr_t      dst_wr_addr,
  output fm_vec_t     dst_wr_data,
  input  logic        wl_start,
  input  logic        wl_valid,
  input  logic [31:0] wl_data,
  output logic        wl_full
);

  localparam int G  = ngroups(C);
  localparam int HW = H * W;

  // ---------------- parameter storage ----------------
  int wn;   // parameters received, 0 .. 2*C
  logic sc_we, sh_we;
  logic [LANES-1:0][FM_W-1:0] sc_rd, sh_rd;
  logic [aw(G)-1:0] p_waddr, p_raddr;
  logic [2:0]       p_lane;
  int               wch;

  assign wl_full = (wn == 2 * C);
  assign wch     = (wn < C) ? wn : wn - C;
  assign sc_we   = wl_valid && (wn < C);
  assign sh_we   = wl_valid && (wn >= C) && !wl_full;
  assign p_lane  = 3'(wch % LANES);
  assign p_waddr = aw(G)'(wch / LANES);

  weight_mem #(.W(FM_W), .DEPTH(G)) u_scale (
    .clk, .wr_en(sc_we), .wr_lane(p_lane), .wr_addr(p_waddr),
    .wr_data(fm_t'(wl_data[FM_W-1:0])), .rd_addr(p_raddr), .rd_data(sc_rd));
  weight_mem #(.W(FM_W), .DEPTH(G)) u_shift (
    .clk, .wr_en(sh_we), .wr_lane(p_lane), .wr_addr(p_waddr),
    .wr_data(fm_t'(wl_data[FM_W-1:0])), .rd_addr(p_raddr), .rd_data(sh_rd));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       wn <= 2 * C;
    else if (wl_start)                wn <= 0;
    else if (wl_valid && !wl_full)    wn <= wn + 1;
  end

  // ---------------- issue stage ----------------
  int   g, p;
  logic relu_q, res_q;

  assign rd_en   = busy;
  assign rd_addr = faddr_t'(g * HW + p);
  assign p_raddr = aw(G)'(g);

  logic   s1_valid;
  faddr_t s1_addr;
  int     s1_g;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; g <= 0; p <= 0; relu_q <= 1'b0; res_q <= 1'b0;
      s1_valid <= 1'b0; s1_addr <= '0; s1_g <= 0;
    end else begin
      s1_valid <= busy;
      s1_addr  <= rd_addr;
      s1_g     <= g;
      if (start && !busy) begin
        busy <= 1'b1; g <= 0; p <= 0;
        relu_q <= relu_en; res_q <= res_en;
      end else if (busy) begin
        if (p < HW - 1) p <= p + 1;
        else begin
          p <= 0;
          if (g < G - 1) g <= g + 1;
          else busy <= 1'b0;
        end
      end
    end
  end

  // ---------------- arithmetic stage ----------------
  fm_vec_t y;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      acc_t t;
      t = (acc_t'(src_rd_data[l]) * acc_t'(fm_t'(sc_rd[l]))) >>> FRAC;
      t = t + acc_t'(fm_t'(sh_rd[l]));
      if (res_q) t = t + acc_t'(res_rd_data[l]);
      y[l] = sat_fm(t);
      if (relu_q && y[l] < 0) y[l] = '0;
    end
  end

  logic s2_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dst_wr_en <= '0; dst_wr_addr <= '0; dst_wr_data <= '0;
      s2_valid <= 1'b0; done <= 1'b0;
    end else begin
      dst_wr_en <= '0;
      if (s1_valid) begin
        dst_wr_addr <= s1_addr;
        dst_wr_data <= y;
        for (int l = 0; l < LANES; l++) dst_wr_en[l] <= (s1_g * LANES + l) < C;
      end
      s2_valid <= s1_valid;
      done     <= s2_valid && !s1_valid;
    end
  end

endmodule

// depthwise_conv: 3x3 depthwise convolution (one filter per channel).
//
// Reads a C x H x W feature map from a banked buffer and writes the
// C x HO x WO result (HO = H / STRIDE, WO = W / STRIDE) into another. The
// 8 lanes handle the 8 channels of one channel group in parallel; for each
// output pixel the unit walks the 9 kernel taps, one per cycle, reading one
// word from each bank, so a group-pixel takes 9 cycles and the whole layer
// ceil(C/8) * HO * WO * 9 cycles plus 4 cycles from the start edge to the done pulse.
// Out-of-image taps read as zero (padding 1).
//
// Pipeline: cycle 0 issues the buffer and weight reads, cycle 1 multiplies
// and accumulates in 48 bits, and on the last tap the sum is shifted right by
// FRAC, saturated to 24 bits and written.
//
// Weights are loaded through the wl_* port, one per wl_valid, in the order
// channel-major, tap-minor (index c * 9 + ky * 3 + kx), after a wl_start
// pulse; wl_full rises once all C * 9 are in.
//
// The 3x3 kernel, the 8-lane unrolling and the number formats follow the
// published design; padding, loop order and the buffer layout are this
// design's own.
module depthwise_conv
  import dsode_pkg::*;
#(
  parameter int C      = 65,
  parameter int H      = 8,
  parameter int W      = 8,
  parameter int STRIDE = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  output logic        busy,
  output logic        done,
  // source buffer read port
  output logic        src_rd_en,
  output faddr_t      src_rd_addr,
  input  fm_vec_t     src_rd_data,
  // destination buffer write port
  output lane_en_t    dst_wr_en,
  output faddr_t      dst_wr_addr,
  output fm_vec_t     dst_wr_data,
  // weight load port
  input  logic        wl_start,
  input  logic        wl_valid,
  input  logic [31:0] wl_data,
  output logic        wl_full
);

  localparam int K   = 3;
  localparam int KK  = K * K;
  localparam int G   = ngroups(C);
  localparam int HO  = H / STRIDE;
  localparam int WO  = W / STRIDE;
  localparam int HW  = H * W;
  localparam int WD  = G * KK;

  // ---------------- weight storage and loading ----------------
  logic                   wm_we;
  logic [2:0]             wm_lane;
  logic [aw(WD)-1:0]      wm_waddr, wm_raddr;
  logic [LANES-1:0][WT_W-1:0] wm_rdata;
  int wc, wk;

  weight_mem #(.W(WT_W), .DEPTH(WD)) u_wmem (
    .clk, .wr_en(wm_we), .wr_lane(wm_lane), .wr_addr(wm_waddr),
    .wr_data(wt_t'(wl_data[WT_W-1:0])), .rd_addr(wm_raddr), .rd_data(wm_rdata));

  assign wl_full  = (wc == C);
  assign wm_we    = wl_valid && !wl_full;
  assign wm_lane  = 3'(wc % LANES);
  assign wm_waddr = aw(WD)'((wc / LANES) * KK + wk);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wc <= C; wk <= 0;
    end else if (wl_start) begin
      wc <= 0; wk <= 0;
    end else if (wm_we) begin
      if (wk == KK - 1) begin wk <= 0; wc <= wc + 1; end
      else wk <= wk + 1;
    end
  end

  // ---------------- issue stage ----------------
  int g, oy, ox, ky, kx;
  int iy, ix;
  logic in_img;

  assign iy = oy * STRIDE + ky - 1;
  assign ix = ox * STRIDE + kx - 1;
  assign in_img = (iy >= 0) && (iy < H) && (ix >= 0) && (ix < W);
  assign src_rd_en   = busy;
  assign src_rd_addr = in_img ? faddr_t'(g * HW + iy * W + ix) : '0;
  assign wm_raddr    = aw(WD)'(g * KK + ky * K + kx);

  // tags travelling with the read
  logic   s1_valid, s1_first, s1_last, s1_pad;
  faddr_t s1_oaddr;
  int     s1_g;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      g <= 0; oy <= 0; ox <= 0; ky <= 0; kx <= 0;
      s1_valid <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0; s1_pad <= 1'b0;
      s1_oaddr <= '0; s1_g <= 0;
    end else begin
      s1_valid <= busy;
      s1_first <= (ky == 0) && (kx == 0);
      s1_last  <= (ky == K - 1) && (kx == K - 1);
      s1_pad   <= !in_img;
      s1_oaddr <= faddr_t'(g * HO * WO + oy * WO + ox);
      s1_g     <= g;
      if (start && !busy) begin
        busy <= 1'b1;
        g <= 0; oy <= 0; ox <= 0; ky <= 0; kx <= 0;
      end else if (busy) begin
        if (kx < K - 1) kx <= kx + 1;
        else begin
          kx <= 0;
          if (ky < K - 1) ky <= ky + 1;
          else begin
            ky <= 0;
            if (ox < WO - 1) ox <= ox + 1;
            else begin
              ox <= 0;
              if (oy < HO - 1) oy <= oy + 1;
              else begin
                oy <= 0;
                if (g < G - 1) g <= g + 1;
                else busy <= 1'b0;
              end
            end
          end
        end
      end
    end
  end

  // ---------------- multiply-accumulate stage ----------------
  acc_t acc      [LANES];
  acc_t acc_next [LANES];

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      acc_t prod;
      prod = s1_pad ? '0 : acc_t'(src_rd_data[l]) * acc_t'(wt_t'(wm_rdata[l]));
      acc_next[l] = (s1_first ? '0 : acc[l]) + prod;
    end
  end

  logic s2_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < LANES; l++) acc[l] <= '0;
      dst_wr_en <= '0; dst_wr_addr <= '0; dst_wr_data <= '0;
      s2_valid <= 1'b0; done <= 1'b0;
    end else begin
      dst_wr_en <= '0;
      if (s1_valid) begin
        for (int l = 0; l < LANES; l++) acc[l] <= acc_next[l];
        if (s1_last) begin
          dst_wr_addr <= s1_oaddr;
          for (int l = 0; l < LANES; l++) begin
            dst_wr_data[l] <= sat_fm(acc_next[l] >>> FRAC);
            dst_wr_en[l]   <= (s1_g * LANES + l) < C;
          end
        end
      end
      s2_valid <= s1_valid;
      done     <= s2_valid && !s1_valid;
    end
  end

endmodule

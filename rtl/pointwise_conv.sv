// pointwise_conv: 1x1 convolution across channels (second step of a DSC).
//
// Computes COUT x HO x WO outputs from a CIN x H x W input, HO = H / STRIDE.
// The 8 lanes compute 8 output channels of one pixel in parallel: each cycle
// one input channel value is read from the banked source buffer (bank i % 8,
// chosen one cycle later) and multiplied with the 8 weights of that input
// channel, read from an 8-bank weight memory. One output group-pixel takes
// CIN cycles, the layer ceil(COUT/8) * HO * WO * CIN cycles plus 4
// cycles from start to done. Sums are 48 bits, shifted right by FRAC and saturated to 24 bits.
//
// Weights arrive through wl_* in the order (o, i), index o * CIN + i, after
// a wl_start pulse; wl_full rises after COUT * CIN words. In an ODEBlock the
// input has one more channel than the output (the time channel of AddTime),
// so CIN = N + 1 and COUT = N. The 1x1 kernel, the 8 lanes and the number
// formats follow the published design; loop order and memory layout are
// this design's own.
module pointwise_conv
  import dsode_pkg::*;
#(
  parameter int CIN    = 65,
  parameter int COUT   = 64,
  parameter int H      = 8,
  parameter int W      = 8,
  parameter int STRIDE = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  output logic        busy,
  output logic        done,
  output logic        src_rd_en,
  output faddr_t      src_rd_addr,
  input  fm_vec_t     src_rd_data,
  output lane_en_t    dst_wr_en,
  output faddr_t      dst_wr_addr,
  output fm_vec_t     dst_wr_data,
  input  logic        wl_start,
  input  logic        wl_valid,
  input  logic [31:0] wl_data,
  output logic        wl_full
);

  localparam int GO  = ngroups(COUT);
  localparam int HO  = H / STRIDE;
  localparam int WO  = W / STRIDE;
  localparam int HW  = H * W;
  localparam int WD  = GO * CIN;

  // ---------------- weight storage and loading ----------------
  logic                       wm_we;
  logic [2:0]                 wm_lane;
  logic [aw(WD)-1:0]          wm_waddr, wm_raddr;
  logic [LANES-1:0][WT_W-1:0] wm_rdata;
  int wo_, wi;

  weight_mem #(.W(WT_W), .DEPTH(WD)) u_wmem (
    .clk, .wr_en(wm_we), .wr_lane(wm_lane), .wr_addr(wm_waddr),
    .wr_data(wt_t'(wl_data[WT_W-1:0])), .rd_addr(wm_raddr), .rd_data(wm_rdata));

  assign wl_full  = (wo_ == COUT);
  assign wm_we    = wl_valid && !wl_full;
  assign wm_lane  = 3'(wo_ % LANES);
  assign wm_waddr = aw(WD)'((wo_ / LANES) * CIN + wi);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wo_ <= COUT; wi <= 0;
    end else if (wl_start) begin
      wo_ <= 0; wi <= 0;
    end else if (wm_we) begin
      if (wi < CIN - 1) wi <= wi + 1;
      else begin wi <= 0; wo_ <= wo_ + 1; end
    end
  end

  // ---------------- issue stage ----------------
  int g, oy, ox, i;

  assign src_rd_en   = busy;
  assign src_rd_addr = faddr_t'((i / LANES) * HW + oy * STRIDE * W + ox * STRIDE);
  assign wm_raddr    = aw(WD)'(g * CIN + i);

  logic   s1_valid, s1_first, s1_last;
  logic [2:0] s1_sel;
  faddr_t s1_oaddr;
  int     s1_g;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      g <= 0; oy <= 0; ox <= 0; i <= 0;
      s1_valid <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0;
      s1_sel <= '0; s1_oaddr <= '0; s1_g <= 0;
    end else begin
      s1_valid <= busy;
      s1_first <= (i == 0);
      s1_last  <= (i == CIN - 1);
      s1_sel   <= 3'(i % LANES);
      s1_oaddr <= faddr_t'(g * HO * WO + oy * WO + ox);
      s1_g     <= g;
      if (start && !busy) begin
        busy <= 1'b1;
        g <= 0; oy <= 0; ox <= 0; i <= 0;
      end else if (busy) begin
        if (i < CIN - 1) i <= i + 1;
        else begin
          i <= 0;
          if (ox < WO - 1) ox <= ox + 1;
          else begin
            ox <= 0;
            if (oy < HO - 1) oy <= oy + 1;
            else begin
              oy <= 0;
              if (g < GO - 1) g <= g + 1;
              else busy <= 1'b0;
            end
          end
        end
      end
    end
  end

  // ---------------- multiply-accumulate stage ----------------
  acc_t acc      [LANES];
  acc_t acc_next [LANES];
  fm_t  a;

  assign a = src_rd_data[s1_sel];

  always_comb begin
    for (int l = 0; l < LANES; l++)
      acc_next[l] = (s1_first ? '0 : acc[l]) + acc_t'(a) * acc_t'(wt_t'(wm_rdata[l]));
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
            dst_wr_en[l]   <= (s1_g * LANES + l) < COUT;
          end
        end
      end
      s2_valid <= s1_valid;
      done     <= s2_valid && !s1_valid;
    end
  end

endmodule

// downsampling_block: stride-2 residual block between two ODEBlocks.
//
// Function on a CIN x H x W map x, producing COUT = 2 * CIN channels at
// H/2 x W/2:
//   r = SC(x)                                   -- 1x1 conv, stride 2
//   a = ReLU(BN1(CONV1(x)))                     -- stride 2
//   y = ReLU(BN2(CONV2(a)) + r)                 -- stride 1
// With DSC = 0 (Downsampling1) CONV1 and CONV2 are normal 3x3 convolutions.
// With DSC = 1 (Downsampling2) each is a depthwise separable convolution: a
// 3x3 depthwise convolution (stride 2 in CONV1) followed by a 1x1 pointwise
// convolution. The block runs once per inference (it is not iterated).
//
// Structure: buffers X (input), R (shortcut result), T (CONV1 output), Y
// (CONV2 output) and, with DSC, U (depthwise results). The units run one
// after the other under a phase sequencer: SC, CONV1 (DW, PW), BN1, CONV2
// (DW, PW), BN2, then the result is streamed out of Y.
//
// Interface: s_* in and m_* out as in ode_block (one beat = one pixel of an
// 8-channel group, group-major). Weights on wl_* in the order SC, CONV1
// (DW then PW with DSC), BN1, CONV2 (DW then PW), BN2.
//
// Timing (DSC = 0, G = ceil(CIN/8), Go = 2G, Po = H*W/4): SC Go*Po*CIN,
// CONV1 Go*Po*CIN*9, CONV2 Go*Po*COUT*9, BN 2*Go*Po cycles, plus load and
// output beats and a few cycles per phase change.
//
// The block structure (Fig. of the two/three-ODEBlock models) and the DSC
// choice per block follow the published design; the shortcut conv has no
// batch norm because none is drawn there. Buffer roles, phase order and
// stream format are this design's own.
module downsampling_block
  import dsode_pkg::*;
#(
  parameter int CIN = 64,
  parameter int H   = 8,
  parameter int W   = 8,
  parameter bit DSC = 1'b0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        s_valid,
  output logic        s_ready,
  input  fm_vec_t     s_data,
  output logic        m_valid,
  input  logic        m_ready,
  output fm_vec_t     m_data,
  input  logic        wl_start,
  input  logic        wl_valid,
  input  logic [31:0] wl_data,
  output logic        wl_full,
  output logic        busy
);

  localparam int COUT = 2 * CIN;
  localparam int HO   = H / 2;
  localparam int WO   = W / 2;
  localparam int P    = H * W;
  localparam int PO   = HO * WO;
  localparam int GI   = ngroups(CIN);
  localparam int GO   = ngroups(COUT);
  localparam int NBI  = GI * P;
  localparam int NBO  = GO * PO;

  typedef enum logic [3:0] {
    PH_IDLE, PH_LOAD, PH_SC, PH_C1A, PH_C1B, PH_BN1, PH_C2A, PH_C2B, PH_BN2,
    PH_OUT_RD, PH_OUT_V
  } phase_e;

  phase_e phase;
  logic   go;
  int     cnt;

  // ---------------- buffers ----------------
  logic     x_re, r_re, t_re, y_re, u_re;
  faddr_t   x_ra, r_ra, t_ra, y_ra, u_ra;
  fm_vec_t  x_rd, r_rd, t_rd, y_rd, u_rd;
  lane_en_t x_we, r_we, t_we, y_we, u_we;
  faddr_t   x_wa, r_wa, t_wa, y_wa, u_wa;
  fm_vec_t  x_wd, r_wd, t_wd, y_wd, u_wd;

  fmap_buffer #(.DEPTH(NBI)) u_buf_x (.clk, .rd_en(x_re), .rd_addr(x_ra), .rd_data(x_rd),
    .wr_en(x_we), .wr_addr(x_wa), .wr_data(x_wd));
  fmap_buffer #(.DEPTH(NBO)) u_buf_r (.clk, .rd_en(r_re), .rd_addr(r_ra), .rd_data(r_rd),
    .wr_en(r_we), .wr_addr(r_wa), .wr_data(r_wd));
  fmap_buffer #(.DEPTH(NBO)) u_buf_t (.clk, .rd_en(t_re), .rd_addr(t_ra), .rd_data(t_rd),
    .wr_en(t_we), .wr_addr(t_wa), .wr_data(t_wd));
  fmap_buffer #(.DEPTH(NBO)) u_buf_y (.clk, .rd_en(y_re), .rd_addr(y_ra), .rd_data(y_rd),
    .wr_en(y_we), .wr_addr(y_wa), .wr_data(y_wd));

  // ---------------- weight-load routing ----------------
  // unit order: 0 SC, 1 C1A, 2 C1B, 3 BN1, 4 C2A, 5 C2B, 6 BN2
  logic [6:0] full, wv;
  always_comb begin
    logic before_full;
    before_full = 1'b1;
    for (int k = 0; k < 7; k++) begin
      wv[k] = wl_valid && before_full && !full[k];
      before_full = before_full && full[k];
    end
  end
  assign wl_full = &full;

  // ---------------- units ----------------
  // per-unit signals: busy, done, read enable/address, write port
  logic     sc_done, c1a_done, c1b_done, c2a_done, c2b_done, bn1_done, bn2_done;
  logic     sc_busy, c1a_busy, c1b_busy, c2a_busy, c2b_busy, bn1_busy, bn2_busy;
  logic     sc_re, c1a_re, c1b_re, c2a_re, c2b_re, bn1_re, bn2_re;
  faddr_t   sc_ra, c1a_ra, c1b_ra, c2a_ra, c2b_ra, bn1_ra, bn2_ra;
  lane_en_t sc_we, c1a_we, c1b_we, c2a_we, c2b_we, bn1_we, bn2_we;
  faddr_t   sc_wa, c1a_wa, c1b_wa, c2a_wa, c2b_wa, bn1_wa, bn2_wa;
  fm_vec_t  sc_wd, c1a_wd, c1b_wd, c2a_wd, c2b_wd, bn1_wd, bn2_wd;

  full_conv #(.CIN(CIN), .COUT(COUT), .H(H), .W(W), .K(1), .STRIDE(2)) u_sc (.clk, .rst_n,
    .start(go && phase == PH_SC), .busy(sc_busy), .done(sc_done),
    .src_rd_en(sc_re), .src_rd_addr(sc_ra), .src_rd_data(x_rd),
    .dst_wr_en(sc_we), .dst_wr_addr(sc_wa), .dst_wr_data(sc_wd),
    .wl_start, .wl_valid(wv[0]), .wl_data, .wl_full(full[0]));

  if (DSC) begin : g_dsc
    fmap_buffer #(.DEPTH(NBO)) u_buf_u (.clk, .rd_en(u_re), .rd_addr(u_ra), .rd_data(u_rd),
      .wr_en(u_we), .wr_addr(u_wa), .wr_data(u_wd));

    depthwise_conv #(.C(CIN), .H(H), .W(W), .STRIDE(2)) u_c1a (.clk, .rst_n,
      .start(go && phase == PH_C1A), .busy(c1a_busy), .done(c1a_done),
      .src_rd_en(c1a_re), .src_rd_addr(c1a_ra), .src_rd_data(x_rd),
      .dst_wr_en(c1a_we), .dst_wr_addr(c1a_wa), .dst_wr_data(c1a_wd),
      .wl_start, .wl_valid(wv[1]), .wl_data, .wl_full(full[1]));
    pointwise_conv #(.CIN(CIN), .COUT(COUT), .H(HO), .W(WO), .STRIDE(1)) u_c1b (.clk, .rst_n,
      .start(go && phase == PH_C1B), .busy(c1b_busy), .done(c1b_done),
      .src_rd_en(c1b_re), .src_rd_addr(c1b_ra), .src_rd_data(u_rd),
      .dst_wr_en(c1b_we), .dst_wr_addr(c1b_wa), .dst_wr_data(c1b_wd),
      .wl_start, .wl_valid(wv[2]), .wl_data, .wl_full(full[2]));
    depthwise_conv #(.C(COUT), .H(HO), .W(WO), .STRIDE(1)) u_c2a (.clk, .rst_n,
      .start(go && phase == PH_C2A), .busy(c2a_busy), .done(c2a_done),
      .src_rd_en(c2a_re), .src_rd_addr(c2a_ra), .src_rd_data(t_rd),
      .dst_wr_en(c2a_we), .dst_wr_addr(c2a_wa), .dst_wr_data(c2a_wd),
      .wl_start, .wl_valid(wv[4]), .wl_data, .wl_full(full[4]));
    pointwise_conv #(.CIN(COUT), .COUT(COUT), .H(HO), .W(WO), .STRIDE(1)) u_c2b (.clk, .rst_n,
      .start(go && phase == PH_C2B), .busy(c2b_busy), .done(c2b_done),
      .src_rd_en(c2b_re), .src_rd_addr(c2b_ra), .src_rd_data(u_rd),
      .dst_wr_en(c2b_we), .dst_wr_addr(c2b_wa), .dst_wr_data(c2b_wd),
      .wl_start, .wl_valid(wv[5]), .wl_data, .wl_full(full[5]));
  end else begin : g_std
    assign u_rd = '0;
    full_conv #(.CIN(CIN), .COUT(COUT), .H(H), .W(W), .K(3), .STRIDE(2)) u_c1a (.clk, .rst_n,
      .start(go && phase == PH_C1A), .busy(c1a_busy), .done(c1a_done),
      .src_rd_en(c1a_re), .src_rd_addr(c1a_ra), .src_rd_data(x_rd),
      .dst_wr_en(c1a_we), .dst_wr_addr(c1a_wa), .dst_wr_data(c1a_wd),
      .wl_start, .wl_valid(wv[1]), .wl_data, .wl_full(full[1]));
    full_conv #(.CIN(COUT), .COUT(COUT), .H(HO), .W(WO), .K(3), .STRIDE(1)) u_c2a (.clk, .rst_n,
      .start(go && phase == PH_C2A), .busy(c2a_busy), .done(c2a_done),
      .src_rd_en(c2a_re), .src_rd_addr(c2a_ra), .src_rd_data(t_rd),
      .dst_wr_en(c2a_we), .dst_wr_addr(c2a_wa), .dst_wr_data(c2a_wd),
      .wl_start, .wl_valid(wv[4]), .wl_data, .wl_full(full[4]));
    // no pointwise stages without DSC
    assign {c1b_busy, c1b_done, c1b_re, c2b_busy, c2b_done, c2b_re} = '0;
    assign {c1b_ra, c1b_wa, c2b_ra, c2b_wa} = '0;
    assign {c1b_we, c2b_we} = '0;
    assign c1b_wd = '0;
    assign c2b_wd = '0;
    assign full[2] = 1'b1;
    assign full[5] = 1'b1;
  end

  batchnorm_relu #(.C(COUT), .H(HO), .W(WO)) u_bn1 (.clk, .rst_n,
    .start(go && phase == PH_BN1), .relu_en(1'b1), .res_en(1'b0),
    .busy(bn1_busy), .done(bn1_done),
    .rd_en(bn1_re), .rd_addr(bn1_ra), .src_rd_data(t_rd), .res_rd_data(r_rd),
    .dst_wr_en(bn1_we), .dst_wr_addr(bn1_wa), .dst_wr_data(bn1_wd),
    .wl_start, .wl_valid(wv[3]), .wl_data, .wl_full(full[3]));
  batchnorm_relu #(.C(COUT), .H(HO), .W(WO)) u_bn2 (.clk, .rst_n,
    .start(go && phase == PH_BN2), .relu_en(1'b1), .res_en(1'b1),
    .busy(bn2_busy), .done(bn2_done),
    .rd_en(bn2_re), .rd_addr(bn2_ra), .src_rd_data(y_rd), .res_rd_data(r_rd),
    .dst_wr_en(bn2_we), .dst_wr_addr(bn2_wa), .dst_wr_data(bn2_wd),
    .wl_start, .wl_valid(wv[6]), .wl_data, .wl_full(full[6]));

  // ---------------- buffer port multiplexing ----------------
  logic load_beat;
  assign s_ready   = (phase == PH_LOAD) || (phase == PH_IDLE);
  assign load_beat = s_valid && s_ready;

  always_comb begin
    {x_re, r_re, t_re, y_re, u_re} = '0;
    {x_ra, r_ra, t_ra, y_ra, u_ra} = '0;
    {x_we, r_we, t_we, y_we, u_we} = '0;
    {x_wa, r_wa, t_wa, y_wa, u_wa} = '0;
    x_wd = '0; r_wd = '0; t_wd = '0; y_wd = '0; u_wd = '0;
    unique case (phase)
      PH_IDLE, PH_LOAD: begin
        for (int l = 0; l < LANES; l++)
          x_we[l] = load_beat && ((cnt / P) * LANES + l < CIN);
        x_wa = faddr_t'(cnt); x_wd = s_data;
      end
      PH_SC: begin
        x_re = sc_re; x_ra = sc_ra;
        r_we = sc_we; r_wa = sc_wa; r_wd = sc_wd;
      end
      PH_C1A: begin
        x_re = c1a_re; x_ra = c1a_ra;
        if (DSC) begin u_we = c1a_we; u_wa = c1a_wa; u_wd = c1a_wd; end
        else     begin t_we = c1a_we; t_wa = c1a_wa; t_wd = c1a_wd; end
      end
      PH_C1B: begin
        u_re = c1b_re; u_ra = c1b_ra;
        t_we = c1b_we; t_wa = c1b_wa; t_wd = c1b_wd;
      end
      PH_BN1: begin
        t_re = bn1_re; t_ra = bn1_ra;
        t_we = bn1_we; t_wa = bn1_wa; t_wd = bn1_wd;
      end
      PH_C2A: begin
        t_re = c2a_re; t_ra = c2a_ra;
        if (DSC) begin u_we = c2a_we; u_wa = c2a_wa; u_wd = c2a_wd; end
        else     begin y_we = c2a_we; y_wa = c2a_wa; y_wd = c2a_wd; end
      end
      PH_C2B: begin
        u_re = c2b_re; u_ra = c2b_ra;
        y_we = c2b_we; y_wa = c2b_wa; y_wd = c2b_wd;
      end
      PH_BN2: begin
        y_re = bn2_re; y_ra = bn2_ra;
        r_re = bn2_re; r_ra = bn2_ra;
        y_we = bn2_we; y_wa = bn2_wa; y_wd = bn2_wd;
      end
      PH_OUT_RD, PH_OUT_V: begin
        y_re = (phase == PH_OUT_RD); y_ra = faddr_t'(cnt);
      end
      default: ;
    endcase
  end

  assign m_data  = y_rd;
  assign m_valid = (phase == PH_OUT_V);
  assign busy    = (phase != PH_IDLE);

  // ---------------- phase sequencer ----------------
  logic unit_done;
  assign unit_done = sc_done | c1a_done | c1b_done | c2a_done | c2b_done |
                     bn1_done | bn2_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= PH_IDLE; go <= 1'b0; cnt <= 0;
    end else begin
      go <= 1'b0;
      unique case (phase)
        PH_IDLE, PH_LOAD: if (load_beat) begin
          if (cnt == NBI - 1) begin cnt <= 0; phase <= PH_SC; go <= 1'b1; end
          else begin cnt <= cnt + 1; phase <= PH_LOAD; end
        end
        PH_SC:  if (unit_done) begin phase <= PH_C1A; go <= 1'b1; end
        PH_C1A: if (unit_done) begin phase <= DSC ? PH_C1B : PH_BN1; go <= 1'b1; end
        PH_C1B: if (unit_done) begin phase <= PH_BN1; go <= 1'b1; end
        PH_BN1: if (unit_done) begin phase <= PH_C2A; go <= 1'b1; end
        PH_C2A: if (unit_done) begin phase <= DSC ? PH_C2B : PH_BN2; go <= 1'b1; end
        PH_C2B: if (unit_done) begin phase <= PH_BN2; go <= 1'b1; end
        PH_BN2: if (unit_done) begin phase <= PH_OUT_RD; cnt <= 0; end
        PH_OUT_RD: phase <= PH_OUT_V;
        PH_OUT_V: if (m_ready) begin
          if (cnt == NBO - 1) begin cnt <= 0; phase <= PH_IDLE; end
          else begin cnt <= cnt + 1; phase <= PH_OUT_RD; end
        end
        default: phase <= PH_IDLE;
      endcase
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_valid && !m_ready |=> m_valid && $stable(cnt));

endmodule

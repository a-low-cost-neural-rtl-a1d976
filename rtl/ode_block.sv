// ode_block: one ODEBlock of dsODENet, executed n_iter times (Euler steps).
//
// Function, per iteration t = 0 .. n_iter-1, on a N x H x W feature map z:
//   a = BNReLU1( PW1( DW1( [z ; t] ) ) )          -- first conv set
//   z = ReLU( BN2( PW2( DW2( [a ; t] ) ) ) + z )  -- second set, shortcut add
// where [x ; t] is x with the AddTime channel appended (N + 1 channels),
// DWk is a 3x3 depthwise convolution over N + 1 channels and PWk a 1x1
// convolution from N + 1 to N channels. The same weights serve every
// iteration; only the time channel changes.
//
// Structure: three feature-map buffers, as in the published design. A holds
// the working map (N + 1 channels, input of the convolutions and output of
// the pointwise layers), B holds the depthwise results, S keeps the block
// input z for the shortcut. Eight units, two sets of AddTime, DepthwiseConv,
// PointwiseConv and BatchNormReLU, run one after the other under a phase
// sequencer; each unit works 8 channels wide.
//
// Interface: the input map arrives on s_* and the result leaves on m_*
// (valid/ready, one beat = one pixel of one 8-channel group, beats in the
// order group-major, pixel-minor; lanes past channel N are ignored / zero).
// Weights are loaded through wl_* in the order DW1, PW1, BN1, DW2, PW2, BN2,
// each in its own unit's order; wl_full rises when all are in.
//
// Timing (cycles, G1 = ceil((N+1)/8), G = ceil(N/8), P = H*W): one
// iteration takes exactly 2 * ((P + 2) + (G1*P*9 + 4) + (G*P*(N+1) + 4) +
// (G*P + 4)); for the default N = 64, 8 x 8 that is 2 * (66 + 5188 + 33284 +
// 516) = 78108 cycles. Loading takes G*P beats, output 2 cycles per beat.
//
// The block function, AddTime, the three buffers and the repeated use of one
// weight set follow the published design; the buffer roles, phase order,
// stream format and the time value (t << FRAC) are this design's own.
module ode_block
  import dsode_pkg::*;
#(
  parameter int N = 64,
  parameter int H = 8,
  parameter int W = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  n_iter,
  // input feature map
  input  logic        s_valid,
  output logic        s_ready,
  input  fm_vec_t     s_data,
  // output feature map
  output logic        m_valid,
  input  logic        m_ready,
  output fm_vec_t     m_data,
  // weight load
  input  logic        wl_start,
  input  logic        wl_valid,
  input  logic [31:0] wl_data,
  output logic        wl_full,
  // status
  output logic        busy,
  output logic        iter_done
);

  localparam int P   = H * W;
  localparam int G   = ngroups(N);
  localparam int G1  = ngroups(N + 1);
  localparam int NB  = G * P;          // beats in / out

  typedef enum logic [3:0] {
    PH_IDLE, PH_LOAD, PH_AT1, PH_DW1, PH_PW1, PH_BN1,
    PH_AT2, PH_DW2, PH_PW2, PH_BN2, PH_OUT_RD, PH_OUT_V
  } phase_e;

  phase_e phase;
  logic   go;                 // one-cycle start pulse for the phase's unit
  int     cnt;                // load / output beat counter
  logic [7:0] iter, niter_q;

  // ---------------- buffers ----------------
  logic     a_rd_en, b_rd_en, s_rd_en;
  faddr_t   a_rd_addr, b_rd_addr, s_rd_addr;
  fm_vec_t  a_rd_data, b_rd_data, s_rd_data;
  lane_en_t a_wr_en, b_wr_en, s_wr_en;
  faddr_t   a_wr_addr, b_wr_addr, s_wr_addr;
  fm_vec_t  a_wr_data, b_wr_data, s_wr_data;

  fmap_buffer #(.DEPTH(G1 * P)) u_buf_a (.clk, .rd_en(a_rd_en), .rd_addr(a_rd_addr),
    .rd_data(a_rd_data), .wr_en(a_wr_en), .wr_addr(a_wr_addr), .wr_data(a_wr_data));
  fmap_buffer #(.DEPTH(G1 * P)) u_buf_b (.clk, .rd_en(b_rd_en), .rd_addr(b_rd_addr),
    .rd_data(b_rd_data), .wr_en(b_wr_en), .wr_addr(b_wr_addr), .wr_data(b_wr_data));
  fmap_buffer #(.DEPTH(G * P))  u_buf_s (.clk, .rd_en(s_rd_en), .rd_addr(s_rd_addr),
    .rd_data(s_rd_data), .wr_en(s_wr_en), .wr_addr(s_wr_addr), .wr_data(s_wr_data));

  // ---------------- compute units ----------------
  logic     at1_busy, at1_done, at2_busy, at2_done;
  lane_en_t at1_we, at2_we;
  faddr_t   at1_wa, at2_wa;
  fm_vec_t  at1_wd, at2_wd;
  fm_t      t_value;

  assign t_value = fm_t'({16'd0, iter}) <<< FRAC;

  add_time #(.C(N), .H(H), .W(W)) u_at1 (.clk, .rst_n, .start(go && phase == PH_AT1),
    .t_value, .busy(at1_busy), .done(at1_done),
    .dst_wr_en(at1_we), .dst_wr_addr(at1_wa), .dst_wr_data(at1_wd));
  add_time #(.C(N), .H(H), .W(W)) u_at2 (.clk, .rst_n, .start(go && phase == PH_AT2),
    .t_value, .busy(at2_busy), .done(at2_done),
    .dst_wr_en(at2_we), .dst_wr_addr(at2_wa), .dst_wr_data(at2_wd));

  // weight-load routing: each unit takes words until it is full
  logic [5:0] full;
  logic [5:0] wv;
  always_comb begin
    logic before_full;
    before_full = 1'b1;
    for (int k = 0; k < 6; k++) begin
      wv[k] = wl_valid && before_full && !full[k];
      before_full = before_full && full[k];
    end
  end
  assign wl_full = &full;

  logic     dw1_busy, dw1_done, dw1_re, dw2_busy, dw2_done, dw2_re;
  faddr_t   dw1_ra, dw2_ra, dw1_wa, dw2_wa;
  lane_en_t dw1_we, dw2_we;
  fm_vec_t  dw1_wd, dw2_wd;

  depthwise_conv #(.C(N + 1), .H(H), .W(W), .STRIDE(1)) u_dw1 (.clk, .rst_n,
    .start(go && phase == PH_DW1), .busy(dw1_busy), .done(dw1_done),
    .src_rd_en(dw1_re), .src_rd_addr(dw1_ra), .src_rd_data(a_rd_data),
    .dst_wr_en(dw1_we), .dst_wr_addr(dw1_wa), .dst_wr_data(dw1_wd),
    .wl_start, .wl_valid(wv[0]), .wl_data, .wl_full(full[0]));
  depthwise_conv #(.C(N + 1), .H(H), .W(W), .STRIDE(1)) u_dw2 (.clk, .rst_n,
    .start(go && phase == PH_DW2), .busy(dw2_busy), .done(dw2_done),
    .src_rd_en(dw2_re), .src_rd_addr(dw2_ra), .src_rd_data(a_rd_data),
    .dst_wr_en(dw2_we), .dst_wr_addr(dw2_wa), .dst_wr_data(dw2_wd),
    .wl_start, .wl_valid(wv[3]), .wl_data, .wl_full(full[3]));

  logic     pw1_busy, pw1_done, pw1_re, pw2_busy, pw2_done, pw2_re;
  faddr_t   pw1_ra, pw2_ra, pw1_wa, pw2_wa;
  lane_en_t pw1_we, pw2_we;
  fm_vec_t  pw1_wd, pw2_wd;

  pointwise_conv #(.CIN(N + 1), .COUT(N), .H(H), .W(W), .STRIDE(1)) u_pw1 (.clk, .rst_n,
    .start(go && phase == PH_PW1), .busy(pw1_busy), .done(pw1_done),
    .src_rd_en(pw1_re), .src_rd_addr(pw1_ra), .src_rd_data(b_rd_data),
    .dst_wr_en(pw1_we), .dst_wr_addr(pw1_wa), .dst_wr_data(pw1_wd),
    .wl_start, .wl_valid(wv[1]), .wl_data, .wl_full(full[1]));
  pointwise_conv #(.CIN(N + 1), .COUT(N), .H(H), .W(W), .STRIDE(1)) u_pw2 (.clk, .rst_n,
    .start(go && phase == PH_PW2), .busy(pw2_busy), .done(pw2_done),
    .src_rd_en(pw2_re), .src_rd_addr(pw2_ra), .src_rd_data(b_rd_data),
    .dst_wr_en(pw2_we), .dst_wr_addr(pw2_wa), .dst_wr_data(pw2_wd),
    .wl_start, .wl_valid(wv[4]), .wl_data, .wl_full(full[4]));

  logic     bn1_busy, bn1_done, bn1_re, bn2_busy, bn2_done, bn2_re;
  faddr_t   bn1_ra, bn2_ra, bn1_wa, bn2_wa;
  lane_en_t bn1_we, bn2_we;
  fm_vec_t  bn1_wd, bn2_wd;

  batchnorm_relu #(.C(N), .H(H), .W(W)) u_bn1 (.clk, .rst_n,
    .start(go && phase == PH_BN1), .relu_en(1'b1), .res_en(1'b0),
    .busy(bn1_busy), .done(bn1_done),
    .rd_en(bn1_re), .rd_addr(bn1_ra), .src_rd_data(a_rd_data), .res_rd_data(s_rd_data),
    .dst_wr_en(bn1_we), .dst_wr_addr(bn1_wa), .dst_wr_data(bn1_wd),
    .wl_start, .wl_valid(wv[2]), .wl_data, .wl_full(full[2]));
  batchnorm_relu #(.C(N), .H(H), .W(W)) u_bn2 (.clk, .rst_n,
    .start(go && phase == PH_BN2), .relu_en(1'b1), .res_en(1'b1),
    .busy(bn2_busy), .done(bn2_done),
    .rd_en(bn2_re), .rd_addr(bn2_ra), .src_rd_data(a_rd_data), .res_rd_data(s_rd_data),
    .dst_wr_en(bn2_we), .dst_wr_addr(bn2_wa), .dst_wr_data(bn2_wd),
    .wl_start, .wl_valid(wv[5]), .wl_data, .wl_full(full[5]));

  // ---------------- buffer port multiplexing ----------------
  logic load_beat;
  assign s_ready   = (phase == PH_LOAD) || (phase == PH_IDLE);
  assign load_beat = s_valid && s_ready;

  always_comb begin
    a_rd_en = 1'b0; a_rd_addr = '0;
    b_rd_en = 1'b0; b_rd_addr = '0;
    s_rd_en = 1'b0; s_rd_addr = '0;
    a_wr_en = '0; a_wr_addr = '0; a_wr_data = '0;
    b_wr_en = '0; b_wr_addr = '0; b_wr_data = '0;
    s_wr_en = '0; s_wr_addr = '0; s_wr_data = '0;
    unique case (phase)
      PH_IDLE, PH_LOAD: begin
        for (int l = 0; l < LANES; l++) begin
          a_wr_en[l] = load_beat && ((cnt / P) * LANES + l < N);
          s_wr_en[l] = a_wr_en[l];
        end
        a_wr_addr = faddr_t'(cnt); a_wr_data = s_data;
        s_wr_addr = faddr_t'(cnt); s_wr_data = s_data;
      end
      PH_AT1: begin a_wr_en = at1_we; a_wr_addr = at1_wa; a_wr_data = at1_wd; end
      PH_AT2: begin a_wr_en = at2_we; a_wr_addr = at2_wa; a_wr_data = at2_wd; end
      PH_DW1: begin
        a_rd_en = dw1_re; a_rd_addr = dw1_ra;
        b_wr_en = dw1_we; b_wr_addr = dw1_wa; b_wr_data = dw1_wd;
      end
      PH_DW2: begin
        a_rd_en = dw2_re; a_rd_addr = dw2_ra;
        b_wr_en = dw2_we; b_wr_addr = dw2_wa; b_wr_data = dw2_wd;
      end
      PH_PW1: begin
        b_rd_en = pw1_re; b_rd_addr = pw1_ra;
        a_wr_en = pw1_we; a_wr_addr = pw1_wa; a_wr_data = pw1_wd;
      end
      PH_PW2: begin
        b_rd_en = pw2_re; b_rd_addr = pw2_ra;
        a_wr_en = pw2_we; a_wr_addr = pw2_wa; a_wr_data = pw2_wd;
      end
      PH_BN1: begin
        a_rd_en = bn1_re; a_rd_addr = bn1_ra;
        a_wr_en = bn1_we; a_wr_addr = bn1_wa; a_wr_data = bn1_wd;
      end
      PH_BN2: begin
        a_rd_en = bn2_re; a_rd_addr = bn2_ra;
        s_rd_en = bn2_re; s_rd_addr = bn2_ra;
        a_wr_en = bn2_we; a_wr_addr = bn2_wa; a_wr_data = bn2_wd;
        s_wr_en = bn2_we; s_wr_addr = bn2_wa; s_wr_data = bn2_wd;
      end
      PH_OUT_RD, PH_OUT_V: begin
        a_rd_en = (phase == PH_OUT_RD); a_rd_addr = faddr_t'(cnt);
      end
      default: ;
    endcase
  end

  // output beat: lanes past channel N read as zero
  always_comb begin
    for (int l = 0; l < LANES; l++)
      m_data[l] = ((cnt / P) * LANES + l < N) ? a_rd_data[l] : '0;
  end
  assign m_valid = (phase == PH_OUT_V);
  assign busy    = (phase != PH_IDLE);

  // ---------------- phase sequencer ----------------
  logic unit_done;
  assign unit_done = at1_done | at2_done | dw1_done | dw2_done |
                     pw1_done | pw2_done | bn1_done | bn2_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= PH_IDLE; go <= 1'b0; cnt <= 0; iter <= '0; niter_q <= '0;
      iter_done <= 1'b0;
    end else begin
      go <= 1'b0;
      iter_done <= 1'b0;
      unique case (phase)
        PH_IDLE, PH_LOAD: begin
          if (phase == PH_IDLE) niter_q <= n_iter;
          if (load_beat) begin
            if (cnt == NB - 1) begin
              cnt  <= 0;
              iter <= '0;
              if ((phase == PH_IDLE ? n_iter : niter_q) == 0) phase <= PH_OUT_RD;
              else begin phase <= PH_AT1; go <= 1'b1; end
            end else begin
              cnt   <= cnt + 1;
              phase <= PH_LOAD;
            end
          end
        end
        PH_AT1: if (unit_done) begin phase <= PH_DW1; go <= 1'b1; end
        PH_DW1: if (unit_done) begin phase <= PH_PW1; go <= 1'b1; end
        PH_PW1: if (unit_done) begin phase <= PH_BN1; go <= 1'b1; end
        PH_BN1: if (unit_done) begin phase <= PH_AT2; go <= 1'b1; end
        PH_AT2: if (unit_done) begin phase <= PH_DW2; go <= 1'b1; end
        PH_DW2: if (unit_done) begin phase <= PH_PW2; go <= 1'b1; end
        PH_PW2: if (unit_done) begin phase <= PH_BN2; go <= 1'b1; end
        PH_BN2: if (unit_done) begin
          iter_done <= 1'b1;
          if (iter + 8'd1 == niter_q) begin
            phase <= PH_OUT_RD; cnt <= 0;
          end else begin
            iter  <= iter + 8'd1;
            phase <= PH_AT1; go <= 1'b1;
          end
        end
        PH_OUT_RD: phase <= PH_OUT_V;
        PH_OUT_V: if (m_ready) begin
          if (cnt == NB - 1) begin cnt <= 0; phase <= PH_IDLE; end
          else begin cnt <= cnt + 1; phase <= PH_OUT_RD; end
        end
        default: phase <= PH_IDLE;
      endcase
    end
  end

  // the output beat must stay valid until accepted
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_valid && !m_ready |=> m_valid && $stable(cnt));

endmodule

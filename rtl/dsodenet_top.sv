// dsodenet_top: the dsODENet accelerator core (three-ODEBlock model).
//
// The core runs the repeated part of dsODENet: ODEBlock1 (N x H x W),
// Downsampling1 (normal convolutions), ODEBlock2 (2N x H/2 x W/2),
// Downsampling2 (depthwise separable convolutions), ODEBlock3
// (4N x H/4 x W/4), then a global average pool. Each ODEBlock is executed
// n_iter times (C = 10) on its own weights, so all parameters and feature
// maps fit in on-chip memories. The first convolution and the final fully
// connected layer run on the host processor.
//
// Interfaces (all plain ports):
//   s_axi_*   AXI4-Lite control registers (see axi_lite_ctrl)
//   s_axis_*  32-bit AXI4-Stream input from the DMA controller
//   m_axis_*  32-bit AXI4-Stream output to the DMA controller
//
// Operation. The host writes MODE, then sets CTRL.start.
//   Weight transfer mode: the core takes one parameter per 32-bit word (low
//   20 bits for convolution weights, low 24 bits for batch-norm scale and
//   shift, two's complement, FRAC = 12 fractional bits) in the order
//   ODEBlock1, Downsampling1, ODEBlock2, Downsampling2, ODEBlock3, each in its
//   own unit order (see the blocks). Once all are stored it returns one
//   32-bit acknowledge word, the number of words taken (non-zero), with
//   TLAST set.
//   Feature map computation mode: the core takes the N x H x W input map
//   as 24-bit values in 32-bit words, ordered channel group g, pixel p
//   (row-major), lane l (channel 8g + l), and returns the 4N averaged
//   channels as 32-bit sign-extended words in channel order, TLAST on the
//   last. The blocks run one after the other, each handing its map to the
//   next over an 8-channel-wide valid/ready link.
//
// Following the published design: the block sequence and sizes, the
// iteration of ODEBlocks with shared weights, AddTime, DSC placement, the
// two modes with a non-zero acknowledge, 32-bit AXI4-Stream data, AXI4-Lite
// control, 8 lanes and 20/24-bit formats. This design's own choices: the
// word orders, the register map, the acknowledge value, the binary point,
// and the average pool that turns the 2 x 2 x 4N map into 1 x 1 x 4N.
// The AXI4-Lite response codes and the unused upper read-data bits are
// constant (see axi_lite_ctrl).
module dsodenet_top
  import dsode_pkg::*;
#(
  parameter int          N     = 64,
  parameter int          H     = 8,
  parameter int          W     = 8,
  parameter logic [7:0]  NITER = 8'd10
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite control
  input  logic [5:0]  s_axi_awaddr,
  input  logic        s_axi_awvalid,
  output logic        s_axi_awready,
  input  logic [31:0] s_axi_wdata,
  input  logic [3:0]  s_axi_wstrb,
  input  logic        s_axi_wvalid,
  output logic        s_axi_wready,
  output logic [1:0]  s_axi_bresp,
  output logic        s_axi_bvalid,
  input  logic        s_axi_bready,
  input  logic [5:0]  s_axi_araddr,
  input  logic        s_axi_arvalid,
  output logic        s_axi_arready,
  output logic [31:0] s_axi_rdata,
  output logic [1:0]  s_axi_rresp,
  output logic        s_axi_rvalid,
  input  logic        s_axi_rready,
  // AXI4-Stream in
  input  logic [AXIS_W-1:0] s_axis_tdata,
  input  logic        s_axis_tvalid,
  output logic        s_axis_tready,
  input  logic        s_axis_tlast,
  // AXI4-Stream out
  output logic [AXIS_W-1:0] m_axis_tdata,
  output logic        m_axis_tvalid,
  input  logic        m_axis_tready,
  output logic        m_axis_tlast
);

  localparam int N2 = 2 * N, N4 = 4 * N;
  localparam int H2 = H / 2, W2 = W / 2, H4 = H / 4, W4 = W / 4;
  localparam int IN_WORDS  = ngroups(N) * H * W * LANES;
  localparam int OUT_WORDS = N4;

  // ---------------- control registers ----------------
  logic       start, core_busy, core_done;
  mode_e      mode;
  logic [7:0] n_iter;

  axi_lite_ctrl #(.AW(6), .NITER_RESET(NITER)) u_ctrl (
    .clk, .rst_n,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready, .s_axi_wdata, .s_axi_wstrb,
    .s_axi_wvalid, .s_axi_wready, .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_araddr, .s_axi_arvalid, .s_axi_arready, .s_axi_rdata, .s_axi_rresp,
    .s_axi_rvalid, .s_axi_rready,
    .start, .mode, .n_iter, .core_busy, .core_done);

  // ---------------- operation state ----------------
  typedef enum logic [2:0] {ST_IDLE, ST_WLOAD, ST_ACK, ST_RUN} state_e;
  state_e state;
  logic   wl_start;
  int     wcount, in_cnt, out_cnt;

  // ---------------- weight distribution ----------------
  logic [4:0] bfull, bwv;
  logic       all_full, wl_take;

  assign all_full = &bfull;
  assign wl_take  = (state == ST_WLOAD) && s_axis_tvalid && !all_full;
  always_comb begin
    logic before_full;
    before_full = 1'b1;
    for (int k = 0; k < 5; k++) begin
      bwv[k] = wl_take && before_full && !bfull[k];
      before_full = before_full && bfull[k];
    end
  end

  // ---------------- input packing: 8 words -> one 8-lane beat ----------------
  fm_vec_t   pk_data;
  logic [2:0] pk_lane;
  logic      pk_valid, pk_ready, in_take;

  assign in_take = (state == ST_RUN) && s_axis_tvalid && !pk_valid && (in_cnt < IN_WORDS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pk_data <= '0; pk_lane <= '0; pk_valid <= 1'b0;
    end else begin
      if (pk_valid && pk_ready) pk_valid <= 1'b0;
      if (in_take) begin
        pk_data[pk_lane] <= fm_t'(s_axis_tdata[FM_W-1:0]);
        pk_lane <= pk_lane + 3'd1;
        if (pk_lane == 3'(LANES - 1)) pk_valid <= 1'b1;
      end
    end
  end

  assign s_axis_tready = wl_take || in_take;

  // ---------------- the block chain ----------------
  logic    o1_v, o1_r, d1_v, d1_r, o2_v, o2_r, d2_v, d2_r, o3_v, o3_r, pl_v, pl_r;
  fm_vec_t o1_d, d1_d, o2_d, d2_d, o3_d, pl_d;
  logic [4:0] bbusy;
  logic [2:0] iter_evt;

  ode_block #(.N(N), .H(H), .W(W)) u_ode1 (.clk, .rst_n, .n_iter,
    .s_valid(pk_valid), .s_ready(pk_ready), .s_data(pk_data),
    .m_valid(o1_v), .m_ready(o1_r), .m_data(o1_d),
    .wl_start, .wl_valid(bwv[0]), .wl_data(s_axis_tdata), .wl_full(bfull[0]),
    .busy(bbusy[0]), .iter_done(iter_evt[0]));

  downsampling_block #(.CIN(N), .H(H), .W(W), .DSC(1'b0)) u_ds1 (.clk, .rst_n,
    .s_valid(o1_v), .s_ready(o1_r), .s_data(o1_d),
    .m_valid(d1_v), .m_ready(d1_r), .m_data(d1_d),
    .wl_start, .wl_valid(bwv[1]), .wl_data(s_axis_tdata), .wl_full(bfull[1]),
    .busy(bbusy[1]));

  ode_block #(.N(N2), .H(H2), .W(W2)) u_ode2 (.clk, .rst_n, .n_iter,
    .s_valid(d1_v), .s_ready(d1_r), .s_data(d1_d),
    .m_valid(o2_v), .m_ready(o2_r), .m_data(o2_d),
    .wl_start, .wl_valid(bwv[2]), .wl_data(s_axis_tdata), .wl_full(bfull[2]),
    .busy(bbusy[2]), .iter_done(iter_evt[1]));

  downsampling_block #(.CIN(N2), .H(H2), .W(W2), .DSC(1'b1)) u_ds2 (.clk, .rst_n,
    .s_valid(o2_v), .s_ready(o2_r), .s_data(o2_d),
    .m_valid(d2_v), .m_ready(d2_r), .m_data(d2_d),
    .wl_start, .wl_valid(bwv[3]), .wl_data(s_axis_tdata), .wl_full(bfull[3]),
    .busy(bbusy[3]));

  ode_block #(.N(N4), .H(H4), .W(W4)) u_ode3 (.clk, .rst_n, .n_iter,
    .s_valid(d2_v), .s_ready(d2_r), .s_data(d2_d),
    .m_valid(o3_v), .m_ready(o3_r), .m_data(o3_d),
    .wl_start, .wl_valid(bwv[4]), .wl_data(s_axis_tdata), .wl_full(bfull[4]),
    .busy(bbusy[4]), .iter_done(iter_evt[2]));

  avg_pool #(.C(N4), .H(H4), .W(W4)) u_pool (.clk, .rst_n,
    .s_valid(o3_v), .s_ready(o3_r), .s_data(o3_d),
    .m_valid(pl_v), .m_ready(pl_r), .m_data(pl_d));

  // ---------------- output unpacking: one beat -> 8 words ----------------
  logic [2:0] up_lane;
  logic       out_fire;

  assign m_axis_tvalid = (state == ST_ACK) || ((state == ST_RUN) && pl_v);
  assign m_axis_tdata  = (state == ST_ACK) ? AXIS_W'(wcount)
                                           : AXIS_W'(signed'(pl_d[up_lane]));
  assign m_axis_tlast  = (state == ST_ACK) || (out_cnt == OUT_WORDS - 1);
  assign out_fire      = m_axis_tvalid && m_axis_tready;
  assign pl_r          = (state == ST_RUN) && m_axis_tready &&
                         ((up_lane == 3'(LANES - 1)) || (out_cnt == OUT_WORDS - 1));

  assign core_busy = (state != ST_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_IDLE; wl_start <= 1'b0; core_done <= 1'b0;
      wcount <= 0; in_cnt <= 0; out_cnt <= 0; up_lane <= '0;
    end else begin
      wl_start  <= 1'b0;
      core_done <= 1'b0;
      unique case (state)
        ST_IDLE: if (start) begin
          if (mode == MODE_WEIGHT) begin
            state <= ST_WLOAD; wl_start <= 1'b1; wcount <= 0;
          end else begin
            state <= ST_RUN; in_cnt <= 0; out_cnt <= 0; up_lane <= '0;
          end
        end
        ST_WLOAD: begin
          if (wl_take) wcount <= wcount + 1;
          if (all_full && !wl_start) state <= ST_ACK;
        end
        ST_ACK: if (out_fire) begin state <= ST_IDLE; core_done <= 1'b1; end
        ST_RUN: begin
          if (in_take) in_cnt <= in_cnt + 1;
          if (out_fire) begin
            up_lane <= up_lane + 3'd1;
            if (out_cnt == OUT_WORDS - 1) begin
              state <= ST_IDLE; core_done <= 1'b1;
            end
            out_cnt <= out_cnt + 1;
          end
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  // TLAST on input, block status and iteration events are not needed here
  logic unused_ok;
  assign unused_ok = ^{s_axis_tlast, bbusy, iter_evt};

endmodule

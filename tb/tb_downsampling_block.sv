// tb_downsampling_block: end-to-end test of both downsampling variants.
//
// Two instances see the same 6-channel 4 x 4 input stream: one with normal
// 3x3 convolutions (DSC = 0, as Downsampling1) and one with depthwise
// separable convolutions (DSC = 1, as Downsampling2). Each gets its own
// random weights, loaded through its weight port; two inferences are run.
// Every output value (12 channels of 2 x 2) is compared with
// tb_ref_pkg::ref_ds; outputs are taken with random back-pressure.
module tb_downsampling_block;
  import dsode_pkg::*;
  import tb_ref_pkg::*;

  localparam int CIN = 6, H = 4, W = 4, P = H * W, COUT = 2 * CIN, PO = P / 4;
  localparam int GI = (CIN + 7) / 8, GO = (COUT + 7) / 8;

  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, stalls = 0;
  int nout [2];

  logic s_valid = 1'b0;
  logic [1:0] s_ready, m_valid, m_ready = '0, wl_full, busy;
  fm_vec_t s_data = '0;
  fm_vec_t m_data [2];
  logic wl_start = 1'b0;
  logic [1:0] wl_valid = '0;
  logic [31:0] wl_data = '0;

  downsampling_block #(.CIN(CIN), .H(H), .W(W), .DSC(1'b0)) dut_std (.clk, .rst_n,
    .s_valid(s_valid), .s_ready(s_ready[0]), .s_data,
    .m_valid(m_valid[0]), .m_ready(m_ready[0]), .m_data(m_data[0]),
    .wl_start, .wl_valid(wl_valid[0]), .wl_data, .wl_full(wl_full[0]), .busy(busy[0]));
  downsampling_block #(.CIN(CIN), .H(H), .W(W), .DSC(1'b1)) dut_dsc (.clk, .rst_n,
    .s_valid(s_valid), .s_ready(s_ready[1]), .s_data,
    .m_valid(m_valid[1]), .m_ready(m_ready[1]), .m_data(m_data[1]),
    .wl_start, .wl_valid(wl_valid[1]), .wl_data, .wl_full(wl_full[1]), .busy(busy[1]));

  arr_t wt [2];
  arr_t x;
  arr_t y [2];

  for (genvar k = 0; k < 2; k++) begin : g_mon
    always @(posedge clk) begin
      m_ready[k] <= ($urandom_range(0, 2) != 0);
      if (m_valid[k] && !m_ready[k]) stalls++;
      if (rst_n && m_valid[k] && m_ready[k]) begin
        for (int l = 0; l < LANES; l++) begin
          automatic int c = (nout[k] / PO) * LANES + l;
          automatic int p = nout[k] % PO;
          if (c < COUT) begin
            checks++;
            if (longint'(m_data[k][l]) != y[k][c * PO + p]) begin
              failures++;
              if (failures < 10) $display("FAIL: dsc%0d c%0d p%0d got %0d exp %0d", k, c, p,
                                          longint'(m_data[k][l]), y[k][c * PO + p]);
            end
          end
        end
        nout[k]++;
      end
    end
  end

  function automatic fm_vec_t beat(input int b);
    fm_vec_t v;
    for (int l = 0; l < LANES; l++) begin
      automatic int c = (b / P) * LANES + l;
      automatic longint t = (c < CIN) ? x[c * P + b % P] : 0;
      v[l] = t[FM_W-1:0];
    end
    return v;
  endfunction

  task automatic infer();
    x = new[CIN * P];
    foreach (x[i]) x[i] = rnd(15);
    y[0] = ref_ds(x, CIN, H, W, 1'b0, wt[0]);
    y[1] = ref_ds(x, CIN, H, W, 1'b1, wt[1]);
    nout[0] = 0; nout[1] = 0;
    for (int b = 0; b < GI * P; b++) begin
      @(negedge clk);
      s_valid = 1'b1;
      s_data  = beat(b);
      while (s_ready != 2'b11) @(negedge clk);
      @(posedge clk);
    end
    @(negedge clk);
    s_valid = 1'b0;
    while (nout[0] < GO * PO || nout[1] < GO * PO) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (busy != 2'b00) begin failures++; $display("FAIL: still busy"); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 2; k++) begin
      automatic int o = 0;
      automatic bit dsc = (k == 1);
      wt[k] = new[ds_nparams(CIN, dsc)];
      for (int i = 0; i < COUT * CIN; i++) wt[k][o++] = rnd(12);        // shortcut
      if (dsc) begin
        for (int i = 0; i < CIN * 9; i++)     wt[k][o++] = rnd(12);
        for (int i = 0; i < COUT * CIN; i++)  wt[k][o++] = rnd(12);
      end else
        for (int i = 0; i < COUT * CIN * 9; i++) wt[k][o++] = rnd(11);
      for (int i = 0; i < COUT; i++) wt[k][o++] = rnd(13);              // BN1 scale
      for (int i = 0; i < COUT; i++) wt[k][o++] = rnd(12);              // BN1 shift
      if (dsc) begin
        for (int i = 0; i < COUT * 9; i++)    wt[k][o++] = rnd(12);
        for (int i = 0; i < COUT * COUT; i++) wt[k][o++] = rnd(11);
      end else
        for (int i = 0; i < COUT * COUT * 9; i++) wt[k][o++] = rnd(10);
      for (int i = 0; i < COUT; i++) wt[k][o++] = rnd(13);              // BN2 scale
      for (int i = 0; i < COUT; i++) wt[k][o++] = rnd(12);              // BN2 shift
    end
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // wl_start clears both; then each instance is filled in turn
    wl_start = 1'b1; @(negedge clk); wl_start = 1'b0;
    for (int k = 0; k < 2; k++) begin
      foreach (wt[k][i]) begin
        wl_valid[k] = 1'b1; wl_data = 32'(wt[k][i]); @(negedge clk);
      end
      wl_valid[k] = 1'b0;
      checks++;
      if (!wl_full[k]) begin failures++; $display("FAIL: weights of %0d not all taken", k); end
    end
    infer();
    infer();
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL: no output back-pressure"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_dsodenet_full: one complete operation of the dsODENet core at its
// default size (64 x 8 x 8 input, ODEBlocks of 64, 128 and 256 channels,
// C = 10 iterations, no parameter overrides).
//
// The host side is driven through the core's ports: AXI4-Lite writes put the
// core in weight transfer mode, all parameters are streamed in (the
// acknowledge word must equal their number), then feature map mode is
// started with the reset value of NITER and one 8 x 8 x 64 map is streamed
// in. The 256 averaged outputs are compared with the chained reference
// model of tb_ref_pkg; the ODEBlock1 iteration period is checked against
// its exact cycle count (78,108 cycles). About 0.6 M cycles of weight
// transfer and 2.7 M cycles of computation are simulated.
module tb_dsodenet_full;
  import dsode_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 64, H = 8, W = 8, NITER = 10;
  localparam int P = H * W, NOUT = 4 * N;
  localparam int G = (N + 7) / 8, G1 = (N + 8) / 8;
  localparam int ITER_CYC = 2 * ((P + 2) + (G1 * P * 9 + 4) + (G * P * (N + 1) + 4) + (G * P + 4));

  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_iter1 = 0, n_value = 0;

  logic [5:0]  awaddr = '0, araddr = '0;
  logic        awvalid = 1'b0, wvalid = 1'b0, bready = 1'b0, arvalid = 1'b0, rready = 1'b0;
  logic [31:0] wdata = '0, rdata;
  logic        awready, wready, bvalid, arready, rvalid;
  logic [1:0]  bresp, rresp;
  logic [31:0] s_tdata = '0, m_tdata;
  logic        s_tvalid = 1'b0, s_tready, s_tlast = 1'b0;
  logic        m_tvalid, m_tready = 1'b0, m_tlast;

  dsodenet_top dut (.clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(4'hf), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready),
    .s_axis_tlast(s_tlast),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready),
    .m_axis_tlast(m_tlast));

  longint outq[$];
  bit     lastq[$];
  int     last_iter_cyc = -1, cyc = 0;

  always @(posedge clk) begin
    cyc++;
    if (m_tvalid && m_tready) begin
      outq.push_back(longint'(signed'(m_tdata)));
      lastq.push_back(m_tlast);
    end
    if (dut.u_ode1.iter_done) begin
      n_iter1++;
      if (last_iter_cyc >= 0) begin
        checks++;
        if (cyc - last_iter_cyc != ITER_CYC) begin
          failures++;
          $display("FAIL: ODEBlock1 iteration took %0d cycles, expected %0d",
                   cyc - last_iter_cyc, ITER_CYC);
        end
      end
      last_iter_cyc = cyc;
    end
  end

  always @(negedge clk) m_tready = ($urandom_range(0, 3) != 0);

  task automatic axi_write(input logic [5:0] a, input logic [31:0] d);
    @(negedge clk);
    awaddr = a; wdata = d; awvalid = 1'b1; wvalid = 1'b1;
    @(posedge clk);
    while (!(awready && wready)) @(posedge clk);
    @(negedge clk);
    awvalid = 1'b0; wvalid = 1'b0; bready = 1'b1;
    while (!bvalid) @(negedge clk);
    checks++;
    if (bresp != 2'b00) failures++;
    @(negedge clk);
    bready = 1'b0;
  endtask

  task automatic axi_read(input logic [5:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1'b1;
    @(posedge clk);
    while (!arready) @(posedge clk);
    @(negedge clk);
    arvalid = 1'b0; rready = 1'b1;
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(negedge clk);
    rready = 1'b0;
  endtask

  task automatic wait_done();
    logic [31:0] d;
    do begin
      repeat (1000) @(negedge clk);
      axi_read(6'h00, d);
    end while (!d[1]);
    checks++;
  endtask

  task automatic send(input arr_t v);
    foreach (v[i]) begin
      @(negedge clk);
      s_tvalid = 1'b1; s_tdata = 32'(v[i]); s_tlast = (i == v.size() - 1);
      @(posedge clk);
      while (!s_tready) @(posedge clk);
    end
    @(negedge clk);
    s_tvalid = 1'b0; s_tlast = 1'b0;
  endtask

  arr_t wblk [5];
  arr_t wall;

  function automatic int pwbits(int n);
    return (n >= 128) ? 8 : (n >= 64) ? 9 : 10;
  endfunction

  function automatic arr_t gen_ode(int n);
    arr_t wt = new[ode_nparams(n)];
    int o = 0;
    for (int r = 0; r < 2; r++) begin
      for (int i = 0; i < (n + 1) * 9; i++) wt[o++] = rnd(12);
      for (int i = 0; i < n * (n + 1); i++) wt[o++] = rnd(pwbits(n));
      for (int i = 0; i < n; i++)           wt[o++] = rnd(13);
      for (int i = 0; i < n; i++)           wt[o++] = rnd(12);
    end
    return wt;
  endfunction

  function automatic arr_t gen_ds(int cin, bit dsc);
    int cout = 2 * cin;
    arr_t wt = new[ds_nparams(cin, dsc)];
    int o = 0;
    for (int i = 0; i < cout * cin; i++) wt[o++] = rnd(pwbits(cin));
    if (dsc) begin
      for (int i = 0; i < cin * 9; i++)    wt[o++] = rnd(12);
      for (int i = 0; i < cout * cin; i++) wt[o++] = rnd(pwbits(cin));
    end else
      for (int i = 0; i < cout * cin * 9; i++) wt[o++] = rnd(pwbits(cin) - 1);
    for (int i = 0; i < cout; i++) wt[o++] = rnd(13);
    for (int i = 0; i < cout; i++) wt[o++] = rnd(12);
    if (dsc) begin
      for (int i = 0; i < cout * 9; i++)    wt[o++] = rnd(12);
      for (int i = 0; i < cout * cout; i++) wt[o++] = rnd(pwbits(cout));
    end else
      for (int i = 0; i < cout * cout * 9; i++) wt[o++] = rnd(pwbits(cout) - 1);
    for (int i = 0; i < cout; i++) wt[o++] = rnd(13);
    for (int i = 0; i < cout; i++) wt[o++] = rnd(12);
    return wt;
  endfunction

  initial begin : watchdog
    repeat (6000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    arr_t x, v, z, y;
    int o, p4;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;

    wblk[0] = gen_ode(N);
    wblk[1] = gen_ds(N, 1'b0);
    wblk[2] = gen_ode(2 * N);
    wblk[3] = gen_ds(2 * N, 1'b1);
    wblk[4] = gen_ode(4 * N);
    wall = {wblk[0], wblk[1], wblk[2], wblk[3], wblk[4]};
    $display("weight words: %0d", wall.size());

    axi_write(6'h10, 32'd0);
    axi_write(6'h00, 32'd1);
    send(wall);
    wait_done();
    checks++;
    if (outq.size() != 1 || outq[0] != wall.size() || !lastq[0]) begin
      failures++;
      $display("FAIL: acknowledge wrong (%0d words)", outq.size());
    end
    outq.delete(); lastq.delete();

    x = new[N * P];
    foreach (x[i]) x[i] = rnd(14);
    v = new[N * P];
    o = 0;
    for (int g = 0; g < G; g++)
      for (int p = 0; p < P; p++)
        for (int l = 0; l < LANES; l++) v[o++] = x[(g * LANES + l) * P + p];
    axi_write(6'h10, 32'd1);
    axi_write(6'h00, 32'd1);
    send(v);
    wait_done();
    $display("computation done at cycle %0d", cyc);

    z = ref_ode(x, N, H, W, NITER, wblk[0]);
    z = ref_ds(z, N, H, W, 1'b0, wblk[1]);
    z = ref_ode(z, 2 * N, H / 2, W / 2, NITER, wblk[2]);
    z = ref_ds(z, 2 * N, H / 2, W / 2, 1'b1, wblk[3]);
    z = ref_ode(z, 4 * N, H / 4, W / 4, NITER, wblk[4]);
    p4 = (H / 4) * (W / 4);
    y = new[NOUT];
    foreach (y[c]) begin
      automatic longint s = 0;
      for (int p = 0; p < p4; p++) s += z[c * p4 + p];
      y[c] = s >>> $clog2(p4);
    end
    checks++;
    if (outq.size() != NOUT) begin
      failures++;
      $display("FAIL: %0d output words, expected %0d", outq.size(), NOUT);
    end else
      foreach (y[c]) begin
        checks++;
        if (y[c] != 0 && y[c] > -8388608 && y[c] < 8388607) n_value++;
        if (outq[c] != y[c] || lastq[c] != (c == NOUT - 1)) begin
          failures++;
          if (failures < 20) $display("FAIL: channel %0d got %0d exp %0d", c, outq[c], y[c]);
        end
      end
    checks++;
    if (n_iter1 != NITER) begin failures++; $display("FAIL: %0d ODEBlock1 iterations", n_iter1); end
    checks++;
    if (n_value == 0) begin failures++; $display("FAIL: all outputs zero or saturated"); end
    $display("unsaturated non-zero outputs: %0d of %0d", n_value, NOUT);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

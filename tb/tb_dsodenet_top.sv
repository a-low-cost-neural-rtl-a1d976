// tb_dsodenet_top: end-to-end test of the dsODENet core at reduced size.
//
// The core is built with N = 8 channels on an 8 x 8 map (so ODEBlock2 has
// 16 channels on 4 x 4, ODEBlock3 32 channels on 2 x 2). Everything goes
// through the core's own ports, as the host and its DMA would drive them:
// AXI4-Lite register writes and reads, a 32-bit input stream and a 32-bit
// output stream. The sequence is
//   1. weight transfer mode: all parameters streamed with random gaps; the
//      acknowledge word must equal the number of words and carry TLAST;
//   2. feature map mode, NITER = 2; a second start is written while the
//      core is busy and must start the next inference by itself;
//   3. NITER = 0 (every ODEBlock bypassed) and NITER = 1;
//   4. a switch back to weight transfer with new weights, then one more
//      inference.
// Each result (4N words) is compared with the chained reference model of
// tb_ref_pkg. The ODEBlock1 iteration period is checked against its exact
// cycle count. Every mechanism of the core is counted, and one that never
// happened counts as a failure.
module tb_dsodenet_top;
  import dsode_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 8, H = 8, W = 8;
  localparam int P = H * W, NOUT = 4 * N;
  localparam int G = (N + 7) / 8, G1 = (N + 8) / 8;
  // cycles of one ODEBlock1 iteration (two AddTime/DW/PW/BN passes)
  localparam int ITER_CYC = 2 * ((P + 2) + (G1 * P * 9 + 4) + (G * P * (N + 1) + 4) + (G * P + 4));

  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_wload = 0, n_ack = 0, n_infer = 0, n_iter1 = 0, n_iter2 = 0, n_iter3 = 0;
  int n_ds1 = 0, n_ds2 = 0, n_bypass = 0, n_deferred = 0, n_done = 0;
  int n_in_gap = 0, n_out_stall = 0, n_modesw = 0, n_value = 0;

  logic [5:0]  awaddr = '0, araddr = '0;
  logic        awvalid = 1'b0, wvalid = 1'b0, bready = 1'b0, arvalid = 1'b0, rready = 1'b0;
  logic [31:0] wdata = '0, rdata;
  logic        awready, wready, bvalid, arready, rvalid;
  logic [1:0]  bresp, rresp;
  logic [31:0] s_tdata = '0, m_tdata;
  logic        s_tvalid = 1'b0, s_tready, s_tlast = 1'b0;
  logic        m_tvalid, m_tready = 1'b0, m_tlast;

  dsodenet_top #(.N(N), .H(H), .W(W), .NITER(8'd10)) dut (.clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(4'hf), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready),
    .s_axis_tlast(s_tlast),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready),
    .m_axis_tlast(m_tlast));

  // ---------------- output capture with random back-pressure ----------------
  longint outq[$];
  bit     lastq[$];
  int     last_iter_cyc = -1, cyc = 0;

  always @(posedge clk) begin
    cyc++;
    if (m_tvalid && !m_tready) n_out_stall++;
    if (m_tvalid && m_tready) begin
      outq.push_back(longint'(signed'(m_tdata)));
      lastq.push_back(m_tlast);
    end
    if (dut.u_ode1.iter_done) begin
      n_iter1++;
      if (last_iter_cyc >= 0 && cyc - last_iter_cyc < ITER_CYC + 20) begin
        checks++;
        if (cyc - last_iter_cyc != ITER_CYC) begin
          failures++;
          $display("FAIL: ODEBlock1 iteration took %0d cycles, expected %0d",
                   cyc - last_iter_cyc, ITER_CYC);
        end
      end
      last_iter_cyc = cyc;
    end
    if (dut.u_ode2.iter_done) n_iter2++;
    if (dut.u_ode3.iter_done) n_iter3++;
    if (dut.d1_v && dut.d1_r) n_ds1++;
    if (dut.d2_v && dut.d2_r) n_ds2++;
  end

  always @(negedge clk) m_tready = ($urandom_range(0, 3) != 0);

  // ---------------- AXI4-Lite host ----------------
  task automatic axi_write(input logic [5:0] a, input logic [31:0] d);
    @(negedge clk);
    awaddr = a; wdata = d; awvalid = 1'b1; wvalid = 1'b1;
    @(posedge clk);
    while (!(awready && wready)) @(posedge clk);
    @(negedge clk);
    awvalid = 1'b0; wvalid = 1'b0; bready = 1'b1;
    while (!bvalid) @(negedge clk);
    checks++;
    if (bresp != 2'b00) begin failures++; $display("FAIL: write response %0d", bresp); end
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

  // wait for CTRL.done; reading clears it
  task automatic wait_done();
    logic [31:0] d;
    int tries = 0;
    do begin
      axi_read(6'h00, d);
      tries++;
    end while (!d[1] && tries < 100000);
    checks++;
    if (!d[1]) begin failures++; $display("FAIL: done never set"); end
    else n_done++;
  endtask

  // stream words on the input, with random idle cycles
  task automatic send(input arr_t v);
    foreach (v[i]) begin
      @(negedge clk);
      while ($urandom_range(0, 4) == 0) begin
        s_tvalid = 1'b0; n_in_gap++; @(negedge clk);
      end
      s_tvalid = 1'b1; s_tdata = 32'(v[i]); s_tlast = (i == v.size() - 1);
      @(posedge clk);
      while (!s_tready) @(posedge clk);
    end
    @(negedge clk);
    s_tvalid = 1'b0; s_tlast = 1'b0;
  endtask

  // ---------------- parameters and reference ----------------
  arr_t wblk [5];
  arr_t wall;

  function automatic int pwbits(int n);
    return (n >= 64) ? 9 : (n >= 16) ? 10 : 11;
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

  function automatic arr_t ref_core(arr_t x, int niter);
    arr_t z, y;
    int p4 = (H / 4) * (W / 4);
    z = ref_ode(x, N, H, W, niter, wblk[0]);
    z = ref_ds(z, N, H, W, 1'b0, wblk[1]);
    z = ref_ode(z, 2 * N, H / 2, W / 2, niter, wblk[2]);
    z = ref_ds(z, 2 * N, H / 2, W / 2, 1'b1, wblk[3]);
    z = ref_ode(z, 4 * N, H / 4, W / 4, niter, wblk[4]);
    y = new[NOUT];
    foreach (y[c]) begin
      longint s = 0;
      for (int p = 0; p < p4; p++) s += z[c * p4 + p];
      y[c] = s >>> $clog2(p4);
    end
    return y;
  endfunction

  // input map in stream order: group g, pixel p, lane l
  function automatic arr_t pack_in(arr_t x);
    arr_t v = new[G * P * LANES];
    int o = 0;
    for (int g = 0; g < G; g++)
      for (int p = 0; p < P; p++)
        for (int l = 0; l < LANES; l++) begin
          int c = g * LANES + l;
          v[o++] = (c < N) ? x[c * P + p] : 0;
        end
    return v;
  endfunction

  task automatic load_weights();
    int total;
    wblk[0] = gen_ode(N);
    wblk[1] = gen_ds(N, 1'b0);
    wblk[2] = gen_ode(2 * N);
    wblk[3] = gen_ds(2 * N, 1'b1);
    wblk[4] = gen_ode(4 * N);
    wall = {wblk[0], wblk[1], wblk[2], wblk[3], wblk[4]};
    total = wall.size();
    outq.delete(); lastq.delete();
    axi_write(6'h10, 32'd0);
    axi_write(6'h00, 32'd1);
    send(wall);
    n_wload++;
    wait_done();
    checks++;
    if (outq.size() != 1 || outq[0] != total || !lastq[0]) begin
      failures++;
      $display("FAIL: acknowledge (%0d words) = %0d, expected %0d", outq.size(),
               (outq.size() != 0) ? outq[0] : -1, total);
    end else n_ack++;
    outq.delete(); lastq.delete();
  endtask

  task automatic check_result(input arr_t y, input string what);
    checks++;
    if (outq.size() != NOUT) begin
      failures++;
      $display("FAIL: %s: %0d output words, expected %0d", what, outq.size(), NOUT);
      return;
    end
    foreach (y[c]) begin
      checks++;
      if (y[c] != 0 && y[c] > -8388608 && y[c] < 8388607) n_value++;
      if (outq[c] != y[c] || lastq[c] != (c == NOUT - 1)) begin
        failures++;
        if (failures < 20) $display("FAIL: %s: channel %0d got %0d exp %0d last %0d", what, c,
                                    outq[c], y[c], lastq[c]);
      end
    end
    outq.delete(); lastq.delete();
    n_infer++;
  endtask

  function automatic arr_t rand_map();
    arr_t x = new[N * P];
    foreach (x[i]) x[i] = rnd(14);
    return x;
  endfunction

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    arr_t x1, x2, y;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;

    axi_read(6'h00, d);
    checks++;
    if (d != 32'h4) begin failures++; $display("FAIL: CTRL after reset %h", d); end
    axi_read(6'h18, d);
    checks++;
    if (d != 32'd10) begin failures++; $display("FAIL: NITER after reset %0d", d); end

    // 1. weights
    load_weights();

    // 2. two inferences with NITER = 2, the second started while busy
    axi_write(6'h18, 32'd2);
    axi_write(6'h10, 32'd1);
    n_modesw++;
    axi_write(6'h00, 32'd1);
    x1 = rand_map();
    x2 = rand_map();
    send(pack_in(x1));
    axi_write(6'h00, 32'd1);          // core is busy: start must wait
    axi_read(6'h00, d);
    checks++;
    if (!d[0] || d[2]) begin failures++; $display("FAIL: pending start not shown, CTRL=%h", d); end
    else n_deferred++;
    wait_done();
    check_result(ref_core(x1, 2), "NITER=2 #1");
    send(pack_in(x2));               // the queued start has already begun
    wait_done();
    check_result(ref_core(x2, 2), "NITER=2 #2");

    // 3. bypass of the ODEBlocks, then a single iteration
    axi_write(6'h18, 32'd0);
    axi_write(6'h00, 32'd1);
    send(pack_in(x1));
    wait_done();
    check_result(ref_core(x1, 0), "NITER=0");
    n_bypass++;
    axi_write(6'h18, 32'd1);
    axi_write(6'h00, 32'd1);
    send(pack_in(x2));
    wait_done();
    check_result(ref_core(x2, 1), "NITER=1");

    // 4. new weights, back to inference
    load_weights();
    n_modesw++;
    axi_write(6'h10, 32'd1);
    n_modesw++;
    axi_write(6'h18, 32'd2);
    axi_write(6'h00, 32'd1);
    send(pack_in(x1));
    wait_done();
    check_result(ref_core(x1, 2), "new weights");

    // every mechanism must have happened
    begin
      automatic string names [15] = '{"weight transfer", "acknowledge", "inference", "ODEBlock1 iteration",
                            "ODEBlock2 iteration", "ODEBlock3 iteration", "normal downsampling",
                            "DSC downsampling", "ODEBlock bypass", "start while busy",
                            "done flag", "input gap", "output back-pressure", "mode switch",
                            "unsaturated non-zero output"};
      automatic int cnt [15] = '{n_wload, n_ack, n_infer, n_iter1, n_iter2, n_iter3, n_ds1, n_ds2,
                       n_bypass, n_deferred, n_done, n_in_gap, n_out_stall, n_modesw, n_value};
      for (int k = 0; k < 15; k++) begin
        $display("  %-22s %0d", names[k], cnt[k]);
        checks++;
        if (cnt[k] == 0) begin failures++; $display("FAIL: %s never happened", names[k]); end
      end
    end
    // 1+2+2+0+1+2 iterations of each ODEBlock over the five inferences
    checks++;
    if (n_iter1 != 7 || n_iter2 != 7 || n_iter3 != 7) begin
      failures++;
      $display("FAIL: iteration counts %0d %0d %0d, expected 7", n_iter1, n_iter2, n_iter3);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

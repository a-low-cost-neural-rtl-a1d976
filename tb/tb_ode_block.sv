// tb_ode_block: end-to-end test of one ODEBlock against the reference.
//
// N = 12 channels of 4 x 4 (so the N + 1 = 13 channels of the AddTime map
// spill into a second lane group). Random weights are loaded once through
// the weight port; then three inferences run on fresh random inputs with
// n_iter = 3, 1 and 0 (0 passes the input straight through). The input is
// streamed with random gaps and the output taken with random back-pressure.
// Every output value is compared with tb_ref_pkg::ref_ode, the number of
// iteration pulses with n_iter, and the time between iteration pulses with
//   2 * ((P + 2) + (G1*P*9 + 4) + (G*P*(N+1) + 4) + (G*P + 4))
// cycles, where P = H * W, G = ceil(N/8), G1 = ceil((N+1)/8).
module tb_ode_block;
  import dsode_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 12, H = 4, W = 4, P = H * W;
  localparam int G = (N + 7) / 8, G1 = (N + 8) / 8;
  localparam int ITER_CYC = 2 * ((P + 2) + (G1 * P * 9 + 4) + (G * P * (N + 1) + 4) + (G * P + 4));

  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, iters = 0, stalls = 0, nout = 0;
  longint last_iter_t = -1, cyc = 0;

  logic [7:0] n_iter = '0;
  logic s_valid = 1'b0, s_ready, m_valid, m_ready = 1'b0;
  fm_vec_t s_data = '0, m_data;
  logic wl_start = 1'b0, wl_valid = 1'b0, wl_full, busy, iter_done;
  logic [31:0] wl_data = '0;

  ode_block #(.N(N), .H(H), .W(W)) dut (.clk, .rst_n, .n_iter, .s_valid, .s_ready, .s_data,
    .m_valid, .m_ready, .m_data, .wl_start, .wl_valid, .wl_data, .wl_full, .busy, .iter_done);

  arr_t wt, x, y;

  always @(posedge clk) cyc++;

  // iteration pulses and their spacing
  always @(posedge clk) if (rst_n && iter_done) begin
    iters++;
    if (last_iter_t >= 0) begin
      checks++;
      if (cyc - last_iter_t != ITER_CYC) begin
        failures++; $display("FAIL: iteration took %0d cycles, expected %0d", cyc - last_iter_t, ITER_CYC);
      end
    end
    last_iter_t = cyc;
  end

  // output consumer with random back-pressure
  always @(posedge clk) begin
    m_ready <= ($urandom_range(0, 3) != 0);
    if (m_valid && !m_ready) stalls++;
    if (rst_n && m_valid && m_ready) begin
      for (int l = 0; l < LANES; l++) begin
        automatic int c = (nout / P) * LANES + l;
        automatic int p = nout % P;
        automatic longint e = (c < N) ? y[c * P + p] : 0;
        checks++;
        if (longint'(m_data[l]) != e) begin
          failures++;
          if (failures < 10) $display("FAIL: c%0d p%0d got %0d exp %0d", c, p, longint'(m_data[l]), e);
        end
      end
      nout++;
    end
  end

  function automatic fm_vec_t beat(input int b);
    fm_vec_t v;
    for (int l = 0; l < LANES; l++) begin
      automatic int c = (b / P) * LANES + l;
      automatic longint t = (c < N) ? x[c * P + b % P] : 0;
      v[l] = t[FM_W-1:0];
    end
    return v;
  endfunction

  task automatic infer(input int ni);
    x = new[N * P];
    foreach (x[i]) x[i] = rnd(14);
    y = ref_ode(x, N, H, W, ni, wt);
    nout = 0; iters = 0; last_iter_t = -1;
    @(negedge clk);
    n_iter = 8'(ni);
    for (int b = 0; b < G * P; b++) begin
      s_valid = 1'b0;
      while ($urandom_range(0, 3) == 0) @(negedge clk);
      s_valid = 1'b1;
      s_data  = beat(b);
      while (!s_ready) @(negedge clk);
      @(posedge clk);
      @(negedge clk);
    end
    s_valid = 1'b0;
    while (nout < G * P) @(negedge clk);
    checks++;
    if (iters != ni) begin failures++; $display("FAIL: %0d iterations, expected %0d", iters, ni); end
    repeat (3) @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL: still busy"); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wt = new[ode_nparams(N)];
    begin
      int o = 0;
      for (int i = 0; i < (N + 1) * 9; i++) wt[o++] = rnd(12);   // DW1
      for (int i = 0; i < N * (N + 1); i++) wt[o++] = rnd(11);   // PW1
      for (int i = 0; i < N; i++)           wt[o++] = rnd(13);   // BN1 scale
      for (int i = 0; i < N; i++)           wt[o++] = rnd(12);   // BN1 shift
      for (int i = 0; i < (N + 1) * 9; i++) wt[o++] = rnd(12);   // DW2
      for (int i = 0; i < N * (N + 1); i++) wt[o++] = rnd(11);   // PW2
      for (int i = 0; i < N; i++)           wt[o++] = rnd(13);   // BN2 scale
      for (int i = 0; i < N; i++)           wt[o++] = rnd(12);   // BN2 shift
    end
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    wl_start = 1'b1; @(negedge clk); wl_start = 1'b0;
    foreach (wt[i]) begin
      wl_valid = 1'b1; wl_data = 32'(wt[i]); @(negedge clk);
    end
    wl_valid = 1'b0;
    checks++;
    if (!wl_full) begin failures++; $display("FAIL: weights not all taken"); end

    infer(3);
    infer(1);
    infer(0);
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL: no output back-pressure"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

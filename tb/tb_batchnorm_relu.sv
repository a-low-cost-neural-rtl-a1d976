// tb_batchnorm_relu: self-checking test of the batch-norm / shortcut / ReLU unit.
//
// 11 channels of 3 x 3 pixels. The unit runs twice on the same data with
// parameters loaded once: first as the inner Batchnorm+ReLU (no shortcut),
// then as the block end (shortcut add, ReLU). Values are chosen so that
// negative results (cut by ReLU) and saturation both occur. Every output is
// compared with the reference of tb_ref_pkg, and the run time with
// ceil(C/8) * H * W + 4 cycles.
module tb_batchnorm_relu;
  import dsode_pkg::*;
  import tb_ref_pkg::*;

  localparam int C = 11, H = 3, W = 3, P = H * W, G = (C + 7) / 8;

  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_relu = 0, n_sat = 0;

  lane_en_t fill_we; faddr_t fill_wa; fm_vec_t fill_wd, fill_rd;
  logic re; faddr_t ra; fm_vec_t src_rd, res_rd;
  fmap_buffer #(.DEPTH(G * P)) u_src (.clk, .rd_en(re), .rd_addr(ra),
    .rd_data(src_rd), .wr_en(fill_we), .wr_addr(fill_wa), .wr_data(fill_wd));
  lane_en_t res_we; faddr_t res_wa; fm_vec_t res_wd;
  fmap_buffer #(.DEPTH(G * P)) u_res (.clk, .rd_en(re), .rd_addr(ra),
    .rd_data(res_rd), .wr_en(res_we), .wr_addr(res_wa), .wr_data(res_wd));

  lane_en_t dst_we; faddr_t dst_wa; fm_vec_t dst_wd;
  logic tb_re = 1'b0; faddr_t tb_ra = '0; fm_vec_t dst_rd;
  fmap_buffer #(.DEPTH(G * P)) u_dst (.clk, .rd_en(tb_re), .rd_addr(tb_ra),
    .rd_data(dst_rd), .wr_en(dst_we), .wr_addr(dst_wa), .wr_data(dst_wd));

  logic start = 1'b0, relu_en = 1'b0, res_en = 1'b0, busy, done;
  logic wl_start = 1'b0, wl_valid = 1'b0, wl_full;
  logic [31:0] wl_data = '0;

  batchnorm_relu #(.C(C), .H(H), .W(W)) dut (.clk, .rst_n, .start, .relu_en, .res_en,
    .busy, .done, .rd_en(re), .rd_addr(ra), .src_rd_data(src_rd), .res_rd_data(res_rd),
    .dst_wr_en(dst_we), .dst_wr_addr(dst_wa), .dst_wr_data(dst_wd),
    .wl_start, .wl_valid, .wl_data, .wl_full);

  arr_t x, r, sc, sh, y;
  assign fill_rd = '0;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_and_check(input bit relu, input bit res);
    int cycles;
    y = ref_bn(x, r, C, P, sc, sh, relu, res);
    relu_en <= relu; res_en <= res; start <= 1'b1;
    @(posedge clk); start <= 1'b0;
    cycles = 1;
    while (!done) begin @(posedge clk); cycles++; end
    checks++;
    if (cycles != G * P + 4) begin
      failures++; $display("FAIL: %0d cycles, expected %0d", cycles, G * P + 4);
    end
    for (int c = 0; c < C; c++)
      for (int p = 0; p < P; p++) begin
        tb_re <= 1'b1; tb_ra <= faddr_t'((c / 8) * P + p);
        @(posedge clk); tb_re <= 1'b0; @(negedge clk);
        checks++;
        if (relu && y[c * P + p] == 0) n_relu++;
        if (y[c * P + p] == 8388607 || y[c * P + p] == -8388608) n_sat++;
        if (longint'(dst_rd[c % 8]) != y[c * P + p]) begin
          failures++;
          $display("FAIL: relu%0d res%0d c%0d p%0d got %0d exp %0d", relu, res, c, p,
                   dst_rd[c % 8], y[c * P + p]);
        end
      end
  endtask

  initial begin
    fill_we = '0; fill_wa = '0; fill_wd = '0;
    res_we = '0; res_wa = '0; res_wd = '0;
    x = new[C * P]; r = new[C * P]; sc = new[C]; sh = new[C];
    foreach (x[i])  x[i]  = rnd(20);
    foreach (r[i])  r[i]  = rnd(20);
    x[0] = 64'sd8000000; r[0] = 64'sd8000000;   // forces saturation
    foreach (sc[i]) sc[i] = rnd(14);
    foreach (sh[i]) sh[i] = rnd(16);
    sc[0] = 64'sd4096;                           // scale 1.0 on channel 0

    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int c = 0; c < C; c++)
      for (int p = 0; p < P; p++) begin
        fill_we <= '0; fill_we[c % 8] <= 1'b1; res_we <= '0; res_we[c % 8] <= 1'b1;
        fill_wa <= faddr_t'((c / 8) * P + p); res_wa <= faddr_t'((c / 8) * P + p);
        fill_wd[c % 8] <= fm_t'(x[c * P + p]); res_wd[c % 8] <= fm_t'(r[c * P + p]);
        @(posedge clk);
      end
    fill_we <= '0; res_we <= '0;
    wl_start <= 1'b1; @(posedge clk); wl_start <= 1'b0;
    foreach (sc[i]) begin wl_valid <= 1'b1; wl_data <= 32'(sc[i]); @(posedge clk); end
    foreach (sh[i]) begin wl_valid <= 1'b1; wl_data <= 32'(sh[i]); @(posedge clk); end
    wl_valid <= 1'b0;
    @(negedge clk);
    checks++; if (!wl_full) begin failures++; $display("FAIL: wl_full not set"); end

    run_and_check(1'b1, 1'b0);
    run_and_check(1'b1, 1'b1);
    run_and_check(1'b0, 1'b1);
    checks++;
    if (n_relu == 0 || n_sat == 0) begin
      failures++; $display("FAIL: relu cuts %0d, saturations %0d", n_relu, n_sat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

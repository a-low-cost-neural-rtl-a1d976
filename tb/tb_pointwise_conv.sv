// tb_pointwise_conv: self-checking test of the 1x1 pointwise convolution.
//
// Runs an 11-in, 10-out channel layer on 3 x 3 pixels (both channel counts
// leave a partly filled lane group, as the N+1 -> N layers of an ODEBlock
// do) with random data and weights, compares every output word with the
// reference of tb_ref_pkg and the start-to-done time with
// ceil(COUT/8) * H * W * CIN + 4 cycles.
module tb_pointwise_conv;
  import dsode_pkg::*;
  import tb_ref_pkg::*;

  localparam int C = 11, CO = 10, H = 3, W = 3, S = 1;
  localparam int HO = H / S, WO = W / S, G = (C + 7) / 8, GO = (CO + 7) / 8;

  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // source buffer: written by the testbench, read by the unit
  lane_en_t src_we; faddr_t src_wa; fm_vec_t src_wd;
  logic src_re; faddr_t src_ra; fm_vec_t src_rd;
  fmap_buffer #(.DEPTH(G * H * W)) u_src (.clk, .rd_en(src_re), .rd_addr(src_ra),
    .rd_data(src_rd), .wr_en(src_we), .wr_addr(src_wa), .wr_data(src_wd));

  // destination buffer: written by the unit, read by the testbench
  lane_en_t dst_we; faddr_t dst_wa; fm_vec_t dst_wd;
  logic tb_re = 1'b0; faddr_t tb_ra = '0; fm_vec_t dst_rd;
  fmap_buffer #(.DEPTH(GO * HO * WO)) u_dst (.clk, .rd_en(tb_re), .rd_addr(tb_ra),
    .rd_data(dst_rd), .wr_en(dst_we), .wr_addr(dst_wa), .wr_data(dst_wd));

  logic start = 1'b0, busy, done;
  logic wl_start = 1'b0, wl_valid = 1'b0, wl_full;
  logic [31:0] wl_data = '0;

  pointwise_conv #(.CIN(C), .COUT(CO), .H(H), .W(W), .STRIDE(S)) dut (.clk, .rst_n, .start, .busy, .done,
    .src_rd_en(src_re), .src_rd_addr(src_ra), .src_rd_data(src_rd),
    .dst_wr_en(dst_we), .dst_wr_addr(dst_wa), .dst_wr_data(dst_wd),
    .wl_start, .wl_valid, .wl_data, .wl_full);

  arr_t x, wt, y;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cycles;
    src_we = '0; src_wa = '0; src_wd = '0;
    x = new[C * H * W]; wt = new[CO * C];
    foreach (x[i])  x[i]  = rnd(16);
    foreach (wt[i]) wt[i] = rnd(12);
    y = ref_conv(x, C, CO, H, W, 1, S, wt);

    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // fill the source buffer
    for (int c = 0; c < C; c++)
      for (int p = 0; p < H * W; p++) begin
        src_we <= '0; src_we[c % 8] <= 1'b1;
        src_wa <= faddr_t'((c / 8) * H * W + p);
        src_wd[c % 8] <= fm_t'(x[c * H * W + p]);
        @(posedge clk);
      end
    src_we <= '0;
    // load weights
    wl_start <= 1'b1; @(posedge clk); wl_start <= 1'b0; @(negedge clk);
    checks++; if (wl_full) begin failures++; $display("FAIL: full right after wl_start"); end
    foreach (wt[i]) begin
      wl_valid <= 1'b1; wl_data <= 32'(wt[i]); @(posedge clk);
    end
    wl_valid <= 1'b0;
    @(posedge clk);
    checks++; if (!wl_full) begin failures++; $display("FAIL: wl_full not set"); end
    // run
    start <= 1'b1; @(posedge clk); start <= 1'b0;
    cycles = 1;
    while (!done) begin @(posedge clk); cycles++; end
    checks++;
    if (cycles != GO * HO * WO * C + 4) begin
      failures++; $display("FAIL: %0d cycles, expected %0d", cycles, GO * HO * WO * C + 4);
    end
    // read back
    for (int c = 0; c < CO; c++)
      for (int p = 0; p < HO * WO; p++) begin
        tb_re <= 1'b1; tb_ra <= faddr_t'((c / 8) * HO * WO + p);
        @(posedge clk); tb_re <= 1'b0; @(negedge clk);
        checks++;
        if (longint'(dst_rd[c % 8]) != y[c * HO * WO + p]) begin
          failures++;
          if (failures < 10) $display("FAIL: c%0d p%0d got %0d exp %0d", c, p, dst_rd[c % 8], y[c * HO * WO + p]);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_add_time: self-checking test of the AddTime unit.
//
// A 13-channel 3 x 4 map (time channel index 13, bank 5 of group 1) is
// pre-filled with a marker; AddTime runs twice with iteration counts 3 and 7.
// Every word of the buffer is then checked: the time channel must hold
// t << 12 and all other channels their marker. The run must take
// H * W + 2 cycles from start to done.
module tb_add_time;
  import dsode_pkg::*;

  localparam int C = 13, H = 3, W = 4, P = H * W, G = (C + 1 + 7) / 8;

  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  lane_en_t at_we, tb_we, we; faddr_t at_wa, tb_wa, wa; fm_vec_t at_wd, tb_wd, wd;
  logic tb_re = 1'b0; faddr_t tb_ra = '0; fm_vec_t rd;
  logic use_tb = 1'b1;
  assign we = use_tb ? tb_we : at_we;
  assign wa = use_tb ? tb_wa : at_wa;
  assign wd = use_tb ? tb_wd : at_wd;
  fmap_buffer #(.DEPTH(G * P)) u_buf (.clk, .rd_en(tb_re), .rd_addr(tb_ra),
    .rd_data(rd), .wr_en(we), .wr_addr(wa), .wr_data(wd));

  logic start = 1'b0, busy, done;
  fm_t  t_value = '0;
  add_time #(.C(C), .H(H), .W(W)) dut (.clk, .rst_n, .start, .t_value, .busy, .done,
    .dst_wr_en(at_we), .dst_wr_addr(at_wa), .dst_wr_data(at_wd));

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int t);
    int cycles;
    use_tb <= 1'b0; t_value <= fm_t'(t * 4096); start <= 1'b1;
    @(posedge clk); start <= 1'b0; cycles = 1;
    while (!done) begin @(posedge clk); cycles++; end
    checks++;
    if (cycles != P + 2) begin failures++; $display("FAIL: %0d cycles", cycles); end
    @(posedge clk);
    for (int c = 0; c <= C; c++)
      for (int p = 0; p < P; p++) begin
        longint exp_v;
        exp_v = (c == C) ? longint'(t) * 4096 : longint'(c * 100 + p);
        tb_re <= 1'b1; tb_ra <= faddr_t'((c / 8) * P + p);
        @(posedge clk); tb_re <= 1'b0; @(negedge clk);
        checks++;
        if (longint'(rd[c % 8]) != exp_v) begin
          failures++; $display("FAIL: t%0d c%0d p%0d got %0d exp %0d", t, c, p, rd[c % 8], exp_v);
        end
      end
  endtask

  initial begin
    tb_we = '0; tb_wa = '0; tb_wd = '0;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int c = 0; c <= C; c++)
      for (int p = 0; p < P; p++) begin
        tb_we <= '0; tb_we[c % 8] <= 1'b1; tb_wa <= faddr_t'((c / 8) * P + p);
        tb_wd[c % 8] <= fm_t'(c * 100 + p);
        @(posedge clk);
      end
    tb_we <= '0;
    run(3);
    run(7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_avg_pool: self-checking test of the global average pool.
//
// Streams a 20-channel 2 x 2 map (three groups, the last only half used)
// with random valid gaps and output back-pressure, and checks each result
// beat against floor(sum / 4) per channel, zero for lanes past channel 20,
// and the number of result beats.
module tb_avg_pool;
  import dsode_pkg::*;
  import tb_ref_pkg::*;

  localparam int C = 20, H = 2, W = 2, P = H * W, G = (C + 7) / 8;

  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, nout = 0, stalls = 0;

  logic s_valid = 1'b0, s_ready, m_valid, m_ready = 1'b0;
  fm_vec_t s_data = '0, m_data;

  avg_pool #(.C(C), .H(H), .W(W)) dut (.clk, .rst_n, .s_valid, .s_ready, .s_data,
    .m_valid, .m_ready, .m_data);

  longint x [G * LANES][P];

  function automatic fm_vec_t beat(input int g, input int p);
    fm_vec_t v;
    for (int l = 0; l < LANES; l++) begin
      longint t = x[g * LANES + l][p];
      v[l] = t[FM_W-1:0];
    end
    return v;
  endfunction

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // consumer with random back-pressure
  always @(posedge clk) begin
    m_ready <= ($urandom_range(0, 2) != 0);
    if (m_valid && !m_ready) stalls++;
    if (rst_n && m_valid && m_ready) begin
      for (int l = 0; l < LANES; l++) begin
        automatic int c = nout * LANES + l;
        automatic longint e = 0;
        if (c < C) begin
          for (int p = 0; p < P; p++) e += x[c][p];
          e = e >>> 2;
        end
        checks++;
        if (longint'(m_data[l]) != e) begin
          failures++; $display("FAIL: group %0d lane %0d got %0d exp %0d", nout, l, longint'(m_data[l]), e);
        end
      end
      nout++;
    end
  end

  initial begin
    foreach (x[c, p]) x[c][p] = (c < C) ? rnd(22) : 0;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    // inputs change on the falling edge; s_ready is stable until the next rising edge
    for (int g = 0; g < G; g++)
      for (int p = 0; p < P; p++) begin
        @(negedge clk);
        s_valid = 1'b0;
        while ($urandom_range(0, 3) == 0) @(negedge clk);
        s_valid = 1'b1;
        s_data  = beat(g, p);
        while (!s_ready) @(negedge clk);
        @(posedge clk);
      end
    @(negedge clk);
    s_valid = 1'b0;
    repeat (30) @(posedge clk);
    checks++;
    if (nout != G) begin failures++; $display("FAIL: %0d result beats", nout); end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL: back-pressure never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

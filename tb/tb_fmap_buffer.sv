// tb_fmap_buffer: self-checking test of the banked feature-map buffer.
//
// Writes random words with random per-bank enables to random addresses,
// keeping a shadow copy, then reads every address back. Checks the one-cycle
// read latency, that rd_data holds while rd_en is low, and that a disabled
// bank keeps its old word.
module tb_fmap_buffer;
  import dsode_pkg::*;

  localparam int DEPTH = 40;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic rd_en = 1'b0; faddr_t rd_addr = '0; fm_vec_t rd_data;
  lane_en_t wr_en = '0; faddr_t wr_addr = '0; fm_vec_t wr_data = '0;

  fmap_buffer #(.DEPTH(DEPTH)) dut (.clk, .rd_en, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data);

  fm_t shadow [LANES][DEPTH];

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // initialise every word
    for (int a = 0; a < DEPTH; a++) begin
      wr_en <= '1; wr_addr <= faddr_t'(a);
      for (int l = 0; l < LANES; l++) begin
        automatic fm_t v = fm_t'($urandom);
        wr_data[l] <= v; shadow[l][a] = v;
      end
      @(posedge clk);
    end
    // random partial writes
    repeat (300) begin
      automatic int a = $urandom_range(0, DEPTH - 1);
      automatic lane_en_t en = lane_en_t'($urandom);
      wr_en <= en; wr_addr <= faddr_t'(a);
      for (int l = 0; l < LANES; l++) begin
        automatic fm_t v = fm_t'($urandom);
        wr_data[l] <= v;
        if (en[l]) shadow[l][a] = v;
      end
      @(posedge clk);
    end
    wr_en <= '0;
    // read back
    for (int a = 0; a < DEPTH; a++) begin
      rd_en <= 1'b1; rd_addr <= faddr_t'(a);
      @(posedge clk);
      rd_en <= 1'b0; rd_addr <= faddr_t'((a + 1) % DEPTH);
      @(negedge clk);
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (rd_data[l] !== shadow[l][a]) begin
          failures++; $display("FAIL: a%0d l%0d got %h exp %h", a, l, rd_data[l], shadow[l][a]);
        end
      end
      @(posedge clk); @(negedge clk);   // rd_en low: output must hold
      checks++;
      if (rd_data[3] !== shadow[3][a]) begin failures++; $display("FAIL: hold at a%0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

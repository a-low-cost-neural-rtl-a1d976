// tb_weight_mem: self-checking test of the banked parameter memory.
//
// Fills all banks one word at a time (bank, address) as the weight transfer
// does, with 20-bit values, then reads each address and checks that the
// 8 words of all lanes appear together one cycle later.
module tb_weight_mem;
  import dsode_pkg::*;

  localparam int DEPTH = 24;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic wr_en = 1'b0; logic [2:0] wr_lane = '0;
  logic [aw(DEPTH)-1:0] wr_addr = '0, rd_addr = '0;
  logic signed [WT_W-1:0] wr_data = '0;
  logic [LANES-1:0][WT_W-1:0] rd_data;

  weight_mem #(.W(WT_W), .DEPTH(DEPTH)) dut (.clk, .wr_en, .wr_lane, .wr_addr, .wr_data,
    .rd_addr, .rd_data);

  logic [WT_W-1:0] shadow [LANES][DEPTH];

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++)
      for (int l = 0; l < LANES; l++) begin
        automatic logic [WT_W-1:0] v = WT_W'($urandom);
        wr_en <= 1'b1; wr_lane <= 3'(l); wr_addr <= aw(DEPTH)'(a); wr_data <= v;
        shadow[l][a] = v;
        @(posedge clk);
      end
    wr_en <= 1'b0;
    for (int a = DEPTH - 1; a >= 0; a--) begin
      rd_addr <= aw(DEPTH)'(a);
      @(posedge clk); @(negedge clk);
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (rd_data[l] !== shadow[l][a]) begin
          failures++; $display("FAIL: a%0d l%0d got %h exp %h", a, l, rd_data[l], shadow[l][a]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

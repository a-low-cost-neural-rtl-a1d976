// tb_axi_lite_ctrl: self-checking test of the AXI4-Lite control registers.
//
// Checks the reset values (MODE 0, NITER 10, idle), register write and read
// back, that a start request waits while the core is busy and then becomes
// exactly one start pulse, and that the done flag is set by core_done and
// cleared by reading CTRL.
module tb_axi_lite_ctrl;
  import dsode_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, starts = 0;

  logic [5:0] awaddr = '0, araddr = '0;
  logic awvalid = 1'b0, wvalid = 1'b0, bready = 1'b0, arvalid = 1'b0, rready = 1'b0;
  logic awready, wready, bvalid, arready, rvalid;
  logic [31:0] wdata = '0, rdata;
  logic [3:0] wstrb = '0;
  logic [1:0] bresp, rresp;
  logic start, core_busy = 1'b0, core_done = 1'b0;
  mode_e mode;
  logic [7:0] n_iter;

  axi_lite_ctrl #(.AW(6), .NITER_RESET(8'd10)) dut (.clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .start, .mode, .n_iter, .core_busy, .core_done);

  always @(posedge clk) if (start) starts++;

  initial begin : watchdog
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic axi_write(input logic [5:0] a, input logic [31:0] d);
    awaddr <= a; wdata <= d; wstrb <= 4'hf; awvalid <= 1'b1; wvalid <= 1'b1;
    @(negedge clk);
    while (!awready) @(negedge clk);
    @(posedge clk);
    awvalid <= 1'b0; wvalid <= 1'b0; bready <= 1'b1;
    @(negedge clk);
    while (!bvalid) @(negedge clk);
    checks++; if (bresp != 2'b00) failures++;
    @(posedge clk);
    bready <= 1'b0;
  endtask

  task automatic axi_read(input logic [5:0] a, output logic [31:0] d);
    araddr <= a; arvalid <= 1'b1;
    @(negedge clk);
    while (!arready) @(negedge clk);
    @(posedge clk);
    arvalid <= 1'b0; rready <= 1'b1;
    @(negedge clk);
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(posedge clk);
    rready <= 1'b0;
  endtask

  task automatic expect_eq(input string what, input logic [31:0] got, input logic [31:0] exp_v);
    checks++;
    if (got !== exp_v) begin failures++; $display("FAIL: %s got %h exp %h", what, got, exp_v); end
  endtask

  initial begin
    logic [31:0] d;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    axi_read(6'h10, d); expect_eq("MODE reset", d, 32'd0);
    axi_read(6'h18, d); expect_eq("NITER reset", d, 32'd10);
    axi_read(6'h00, d); expect_eq("CTRL reset", d, 32'h4);
    axi_write(6'h10, 32'd1);  axi_read(6'h10, d); expect_eq("MODE", d, 32'd1);
    expect_eq("mode port", 32'(mode), 32'(MODE_FMAP));
    axi_write(6'h18, 32'd3);  axi_read(6'h18, d); expect_eq("NITER", d, 32'd3);
    expect_eq("n_iter port", 32'(n_iter), 32'd3);
    axi_read(6'h08, d); expect_eq("unmapped", d, 32'd0);
    // start while the core is busy: must wait
    core_busy <= 1'b1;
    axi_write(6'h00, 32'd1);
    repeat (5) @(posedge clk);
    expect_eq("no start while busy", 32'(starts), 32'd0);
    axi_read(6'h00, d); expect_eq("CTRL start pending", d & 32'h5, 32'h1);
    core_busy <= 1'b0;
    repeat (4) @(posedge clk);
    expect_eq("one start pulse", 32'(starts), 32'd1);
    // done flag
    core_done <= 1'b1; @(posedge clk); core_done <= 1'b0;
    repeat (2) @(posedge clk);
    axi_read(6'h00, d); expect_eq("CTRL done", d, 32'h6);
    axi_read(6'h00, d); expect_eq("CTRL done cleared", d, 32'h4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

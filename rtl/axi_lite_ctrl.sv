// axi_lite_ctrl: AXI4-Lite control registers of the dsODENet core.
//
// The processor sets the core up through these registers (32-bit data,
// byte address):
//   0x00 CTRL   bit 0 start (write 1 to start; reads 1 until accepted)
//               bit 1 done  (set when an operation ends, cleared by reading)
//               bit 2 idle  (core not busy)
//   0x10 MODE   bits 1:0, 0 = weight transfer, 1 = feature map computation
//   0x18 NITER  bits 7:0, executions C of each ODEBlock (reset value 10)
// start is a one-cycle pulse to the core, issued when the core is idle.
//
// Handshake: a write is taken when AWVALID and WVALID are both high and no
// response is pending; the response (OKAY) follows one cycle later. A read
// is answered one cycle after ARVALID. Unknown addresses read as zero.
// BRESP and RRESP are always OKAY and read data bits above the register
// fields are zero, so those outputs are constant.
//
// The AXI4-Lite control port, the two modes and C = 10 follow the published
// design; the register map imitates the usual HLS control block and is this
// design's choice.
module axi_lite_ctrl
  import dsode_pkg::*;
#(
  parameter int          AW           = 6,
  parameter logic [7:0]  NITER_RESET  = 8'd10
) (
  input  logic          clk,
  input  logic          rst_n,
  // AXI4-Lite slave
  input  logic [AW-1:0] s_axi_awaddr,
  input  logic          s_axi_awvalid,
  output logic          s_axi_awready,
  input  logic [31:0]   s_axi_wdata,
  input  logic [3:0]    s_axi_wstrb,
  input  logic          s_axi_wvalid,
  output logic          s_axi_wready,
  output logic [1:0]    s_axi_bresp,
  output logic          s_axi_bvalid,
  input  logic          s_axi_bready,
  input  logic [AW-1:0] s_axi_araddr,
  input  logic          s_axi_arvalid,
  output logic          s_axi_arready,
  output logic [31:0]   s_axi_rdata,
  output logic [1:0]    s_axi_rresp,
  output logic          s_axi_rvalid,
  input  logic          s_axi_rready,
  // to / from the core
  output logic          start,
  output mode_e         mode,
  output logic [7:0]    n_iter,
  input  logic          core_busy,
  input  logic          core_done
);

  localparam logic [AW-1:0] A_CTRL  = AW'(6'h00);
  localparam logic [AW-1:0] A_MODE  = AW'(6'h10);
  localparam logic [AW-1:0] A_NITER = AW'(6'h18);

  logic start_req, done_flag;
  logic wr_fire, rd_fire;

  assign s_axi_awready = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  assign s_axi_wready  = s_axi_awready;
  assign wr_fire       = s_axi_awready;
  assign s_axi_arready = !s_axi_rvalid;
  assign rd_fire       = s_axi_arvalid && s_axi_arready;
  assign s_axi_bresp   = 2'b00;
  assign s_axi_rresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axi_bvalid <= 1'b0;
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
      start_req    <= 1'b0;
      start        <= 1'b0;
      done_flag    <= 1'b0;
      mode         <= MODE_WEIGHT;
      n_iter       <= NITER_RESET;
    end else begin
      start <= 1'b0;
      if (s_axi_bvalid && s_axi_bready) s_axi_bvalid <= 1'b0;
      if (s_axi_rvalid && s_axi_rready) s_axi_rvalid <= 1'b0;

      // hand the start request to the core once it is idle
      if (start_req && !core_busy && !start) begin
        start     <= 1'b1;
        start_req <= 1'b0;
      end
      if (core_done) done_flag <= 1'b1;

      if (wr_fire) begin
        s_axi_bvalid <= 1'b1;
        unique case (s_axi_awaddr)
          A_CTRL:  if (s_axi_wstrb[0] && s_axi_wdata[0]) start_req <= 1'b1;
          A_MODE:  if (s_axi_wstrb[0]) mode <= mode_e'(s_axi_wdata[1:0]);
          A_NITER: if (s_axi_wstrb[0]) n_iter <= s_axi_wdata[7:0];
          default: ;
        endcase
      end

      if (rd_fire) begin
        s_axi_rvalid <= 1'b1;
        unique case (s_axi_araddr)
          A_CTRL: begin
            s_axi_rdata <= {29'd0, !core_busy && !start_req && !start,
                            done_flag || core_done, start_req || start};
            done_flag   <= 1'b0;
          end
          A_MODE:  s_axi_rdata <= {30'd0, mode};
          A_NITER: s_axi_rdata <= {24'd0, n_iter};
          default: s_axi_rdata <= '0;
        endcase
      end
    end
  end

  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata));

endmodule

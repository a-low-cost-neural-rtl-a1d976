// add_time: appends the time channel of a Neural-ODE step to a feature map.
//
// An ODEBlock works on C channels; before each of its two convolutions the
// AddTime unit writes one extra channel, channel index C, whose every pixel
// holds the current iteration count t_value. The buffer therefore has room
// for C + 1 channels. After a start pulse the unit writes the H * W pixels of
// that channel, one per cycle, into bank C % 8 at words (C / 8) * H * W + p,
// then pulses done. Latency: H * W + 2 cycles from start to done.
//
// The published design says only that AddTime adds a channel that carries
// the current iteration count; the value written is the
// iteration index as a fixed-point integer (t << FRAC), supplied by the
// ODEBlock sequencer. That encoding is this design's choice. Only the lane
// of the time channel is ever written, so the other seven write enables stay
// low by construction.
module add_time
  import dsode_pkg::*;
#(
  parameter int C = 64,
  parameter int H = 8,
  parameter int W = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  fm_t      t_value,
  output logic     busy,
  output logic     done,
  output lane_en_t dst_wr_en,
  output faddr_t   dst_wr_addr,
  output fm_vec_t  dst_wr_data
);

  localparam int HW   = H * W;
  localparam int BASE = (C / LANES) * HW;
  localparam int LANE = C % LANES;

  int  p;
  fm_t tv;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      p    <= 0;
      tv   <= '0;
      dst_wr_en <= '0;
      dst_wr_addr <= '0;
      dst_wr_data <= '0;
    end else begin
      done <= 1'b0;
      dst_wr_en <= '0;
      if (start && !busy) begin
        busy <= 1'b1;
        p    <= 0;
        tv   <= t_value;
      end else if (busy) begin
        dst_wr_en[LANE] <= 1'b1;
        dst_wr_addr     <= faddr_t'(BASE + p);
        for (int l = 0; l < LANES; l++) dst_wr_data[l] <= tv;
        if (p == HW - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        p <= p + 1;
      end
    end
  end

endmodule

// iserdes_1to4 -- 1:4 deserializer for one ADC core's DDR sample stream.
//
// The ADC presents one sample on each edge of its data strobe (double data
// rate).  Following the paper, the capture path deserializes by a factor of
// four, the smallest factor the FPGA's input deserializers allow for a DDR
// interface, although two would have been enough.  The paper uses the vendor
// ISERDES primitive; this module is a word-level equivalent in plain logic.
//
// Interface and timing: one clock is one strobe period.  d_rise and d_fall
// are the samples taken on the rising and falling strobe edge (d_rise is the
// earlier one).  Every second clock q_valid pulses for one cycle with q[0..3]
// the last four samples, q[0] the oldest.  Latency from the last sample of a
// word to q_valid is one clock.  Synchronous active-low reset restarts word
// alignment (the ADC synchronization logic uses it).
module iserdes_1to4 #(
  parameter int W = 10
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [W-1:0] d_rise,
  input  logic signed [W-1:0] d_fall,
  output logic signed [W-1:0] q [4],
  output logic                q_valid
);

  logic                half;      // 0: collecting samples 0/1, 1: samples 2/3
  logic signed [W-1:0] first_rise, first_fall;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      half    <= 1'b0;
      q_valid <= 1'b0;
    end else begin
      half    <= ~half;
      q_valid <= half;
      if (!half) begin
        first_rise <= d_rise;
        first_fall <= d_fall;
      end else begin
        q[0] <= first_rise;
        q[1] <= first_fall;
        q[2] <= d_rise;
        q[3] <= d_fall;
      end
    end
  end

endmodule

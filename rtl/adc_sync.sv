// adc_sync -- synchronizes the two ADCs and the capture paths.
//
// The board has a SYNC line from the FPGA to both quad ADCs so that their
// cores start sampling and strobing in step.  On a request this module
// drives SYNC high for SYNC_W clocks, then keeps the capture datapath
// (deserializers, data buffers, window counters and everything after them)
// in reset for SETTLE more clocks while the ADC outputs restart, and then
// releases both channels on the same clock.  Both F-engines therefore start
// their 16384-sample blocks on the same sample, which the cross-correlation
// needs.  A synchronization is also run once after reset.  Pulse width,
// settle time and the start-up sync are this design's choices.
//
// Interface and timing: req is a one-clock pulse.  sync_out drives the ADC
// SYNC pin.  dp_rst_n is the datapath reset (low during sync and settle).
// synced is high once the datapath runs.
module adc_sync #(
  parameter int SYNC_W = 16,
  parameter int SETTLE = 64
) (
  input  logic clk,
  input  logic rst_n,
  input  logic req,
  output logic sync_out,
  output logic dp_rst_n,
  output logic synced
);

  localparam int CW = $clog2(SYNC_W + SETTLE + 1);

  typedef enum logic [1:0] {PULSE, WAIT, RUN} state_e;
  state_e        state;
  logic [CW-1:0] cnt;

  assign sync_out = (state == PULSE);
  assign dp_rst_n = (state == RUN);
  assign synced   = (state == RUN);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= PULSE;
      cnt   <= '0;
    end else begin
      unique case (state)
        PULSE: if (cnt == CW'(SYNC_W - 1)) begin
                 state <= WAIT;
                 cnt   <= '0;
               end else cnt <= cnt + 1'b1;
        WAIT:  if (cnt == CW'(SETTLE - 1)) begin
                 state <= RUN;
                 cnt   <= '0;
               end else cnt <= cnt + 1'b1;
        RUN:   if (req) begin
                 state <= PULSE;
                 cnt   <= '0;
               end
        default: state <= PULSE;
      endcase
    end
  end

endmodule

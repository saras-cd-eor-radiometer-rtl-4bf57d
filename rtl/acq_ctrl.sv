// acq_ctrl -- sequences one data acquisition cycle of the spectrometer.
//
// In the paper the laptop switches the receiver into a state (antenna or
// reference, calibration noise on or off, phase-switch position), the FPGA
// integrates 16 sets of spectra (16 x 67 ms = 1.07 s) into its buffer and
// streams them out, and the laptop then switches to the next state.  This
// controller does the FPGA's part: on start it asks the X-engine for
// num_sets integrations (16 in the paper), waits for them, starts the packetizer, waits for the last
// frame and returns to idle.  Acquisition and read-out do not overlap, so
// the receiver may be switched while the data are read out.  The strict
// sequencing is this design's choice, as is the programmable set count:
// num_sets is sampled at start, and 0 or values above NSETS mean NSETS.
//
// Interface and timing: start is a one-clock pulse (ignored while busy).
// x_start and pkt_start are one-clock pulses; x_num_int holds the set count
// of the running cycle for the X-engine and the packetizer.  done pulses for one clock at
// the end; cycle counts completed cycles and is latched into the frames.
module acq_ctrl #(
  parameter int NSETS = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [$clog2(NSETS+1)-1:0] num_sets,
  output logic                       x_start,
  output logic [$clog2(NSETS+1)-1:0] x_num_int,
  input  logic                       x_busy,
  output logic                       pkt_start,
  input  logic                       pkt_busy,
  output logic                       busy,
  output logic                       done,
  output logic [15:0]                cycle
);

  typedef enum logic [2:0] {IDLE, ACQ_START, ACQ, RD_START, RD} state_e;
  state_e state;

  localparam int NW = $clog2(NSETS+1);
  logic [NW-1:0] nsets_q;

  assign x_num_int = nsets_q;
  assign busy      = (state != IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= IDLE;
      x_start   <= 1'b0;
      pkt_start <= 1'b0;
      done      <= 1'b0;
      cycle     <= '0;
      nsets_q   <= NW'(NSETS);
    end else begin
      x_start   <= 1'b0;
      pkt_start <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        IDLE:      if (start) begin
                     state   <= ACQ_START;
                     x_start <= 1'b1;
                     nsets_q <= (num_sets == '0 || int'(num_sets) > NSETS) ? NW'(NSETS)
                                                                         : num_sets;
                   end
        ACQ_START: state <= ACQ;                // x_busy rises this clock
        ACQ:       if (!x_busy) begin
                     state     <= RD_START;
                     pkt_start <= 1'b1;
                   end
        RD_START:  state <= RD;                 // pkt_busy rises this clock
        RD:        if (!pkt_busy) begin
                     state <= IDLE;
                     done  <= 1'b1;
                     cycle <= cycle + 1'b1;
                   end
        default:   state <= IDLE;
      endcase
    end
  end

endmodule

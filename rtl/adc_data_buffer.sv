// adc_data_buffer -- reduces the deserialized ADC data from four parallel
// sample paths to two.
//
// The 1:4 deserializer produces a four-sample word every second clock; the
// spectrometer only needs two parallel paths at the 250 MHz core clock
// (even and odd samples), so, as in the paper, a data buffer re-issues each
// word as two sample pairs on consecutive clocks.  The buffer is a small
// FIFO of words (depth DEPTH, this design's choice) so that the writer and
// reader may drift by a few clocks; in the single-clock form used here the
// occupancy stays at one or two words.
//
// Interface and timing: in_data/in_valid accept a word (in_data[0] oldest).
// out_even/out_odd/out_valid give samples 2n and 2n+1; the first pair leaves
// one clock after the word is written, the second pair the clock after.
// overflow is a sticky flag set when a word arrives while the FIFO is full
// (the word is dropped).  Synchronous active-low reset empties the FIFO.
module adc_data_buffer #(
  parameter int W     = 10,
  parameter int DEPTH = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [W-1:0] in_data [4],
  input  logic                in_valid,
  output logic signed [W-1:0] out_even,
  output logic signed [W-1:0] out_odd,
  output logic                out_valid,
  output logic                overflow
);

  localparam int AW = $clog2(DEPTH);

  logic [4*W-1:0] mem [DEPTH];
  logic [AW-1:0]  wptr, rptr;
  logic [AW:0]    count;
  logic           sel;        // which half of the head word is read next
  logic           push, pop;
  logic [4*W-1:0] head;

  assign head = mem[rptr];
  assign push = in_valid && (count != (AW+1)'(DEPTH));
  assign pop  = (count != '0) && sel;   // word retires after its second pair

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= {in_data[3], in_data[2], in_data[1], in_data[0]};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr      <= '0;
      rptr      <= '0;
      count     <= '0;
      sel       <= 1'b0;
      out_valid <= 1'b0;
      overflow  <= 1'b0;
    end else begin
      if (in_valid && !push) overflow <= 1'b1;
      if (push) wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (pop)  rptr <= (rptr == AW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
      out_valid <= (count != '0);
      if (count != '0) begin
        sel <= ~sel;
        if (!sel) begin
          out_even <= head[0*W +: W];
          out_odd  <= head[1*W +: W];
        end else begin
          out_even <= head[2*W +: W];
          out_odd  <= head[3*W +: W];
        end
      end
    end
  end

endmodule

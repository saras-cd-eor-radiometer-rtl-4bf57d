// f_engine -- 16384-point windowed channelizer for one ADC input.
//
// Following the paper, the F-engine is a split (M x N = 2 x 8192) FFT: the
// even and odd samples delivered by the capture buffer are windowed,
// transformed by two 8192-point pipelined FFTs running side by side,
// the odd path is phase-rotated by W_16384^k, and a 2-point FFT joins the
// two paths.  One channel leaves per clock, so at the 250 MHz core clock a
// full 8192-channel spectrum takes 8192 clocks = 32.768 us, the paper's
// figure.  Only channels 0..NFFT/2-1 (0 to 250 MHz) are forwarded; they
// leave in bit-reversed channel order with their index on out_ch.
// Everything is scaled by 1/2 per radix-2 step, so out = X/NFFT where X is
// the DFT of the windowed input (this design's scaling).
//
// Interface and timing: in_even/in_odd/in_valid from the capture buffer.
// out_sof marks the first channel of a spectrum; the latency from the first
// sample pair of a block to its out_sof is NFFT/2 + log2(NFFT/2) + 4 clocks.
module f_engine
  import saras_pkg::cplx_t, saras_pkg::adc_t, saras_pkg::FFT_W, saras_pkg::TW_W;
#(
  parameter int NFFT = 16384
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  adc_t                    in_even,
  input  adc_t                    in_odd,
  input  logic                    in_valid,
  output cplx_t                   out_data,
  output cplx_t                   out_hi,
  output logic [$clog2(NFFT)-2:0] out_ch,
  output logic                    out_valid,
  output logic                    out_sof
);

  localparam int CHW = $clog2(NFFT) - 1;

  logic signed [FFT_W-1:0] w_even, w_odd;
  logic                    w_valid, w_sof;
  cplx_t                   fe, fo, re_e, re_o;
  logic                    fe_valid, fe_sof, fo_valid, fo_sof, r_valid, r_sof;
  logic [CHW-1:0]          r_ch;

  window_weight #(.NFFT(NFFT)) u_window (
    .clk(clk), .rst_n(rst_n),
    .in_even(in_even), .in_odd(in_odd), .in_valid(in_valid),
    .out_even(w_even), .out_odd(w_odd), .out_valid(w_valid), .out_sof(w_sof)
  );

  fft_r2sdf #(.N(NFFT / 2), .TW_W(TW_W)) u_fft_even (
    .clk(clk), .rst_n(rst_n),
    .in_data('{re: w_even, im: '0}), .in_valid(w_valid), .in_sof(w_sof),
    .out_data(fe), .out_valid(fe_valid), .out_sof(fe_sof)
  );

  fft_r2sdf #(.N(NFFT / 2), .TW_W(TW_W)) u_fft_odd (
    .clk(clk), .rst_n(rst_n),
    .in_data('{re: w_odd, im: '0}), .in_valid(w_valid), .in_sof(w_sof),
    .out_data(fo), .out_valid(fo_valid), .out_sof(fo_sof)
  );

  twiddle_rotator #(.NFFT(NFFT), .TW_W(TW_W)) u_rotate (
    .clk(clk), .rst_n(rst_n),
    .in_e(fe), .in_o(fo), .in_valid(fe_valid), .in_sof(fe_sof),
    .out_e(re_e), .out_o(re_o), .out_ch(r_ch), .out_valid(r_valid), .out_sof(r_sof)
  );

  fft2_parallel #(.CHW(CHW)) u_fft2 (
    .clk(clk), .rst_n(rst_n),
    .in_e(re_e), .in_o(re_o), .in_ch(r_ch), .in_valid(r_valid), .in_sof(r_sof),
    .out_lo(out_data), .out_hi(out_hi), .out_ch(out_ch),
    .out_valid(out_valid), .out_sof(out_sof)
  );

  // The two cores see identical control inputs and so stay in lock step.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (fe_valid == fo_valid && fe_sof == fo_sof)
        else $error("f_engine: FFT paths out of step");
    end
  end

endmodule

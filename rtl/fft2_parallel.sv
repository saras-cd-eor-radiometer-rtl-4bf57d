// fft2_parallel -- the 2-point FFT that joins the two 8192-point paths.
//
// As in the paper, the last step of the split 16384-point transform is a
// 2-point FFT computed in a single clock cycle on the pair (E[k], W^k O[k])
// delivered every clock:  lo = (E + W^k O)/2 is bin k and
// hi = (E - W^k O)/2 is bin k + 8192 of the 16384-point spectrum.  The
// halving (rounded half to even) keeps the word width (this design's scaling choice, the same as in
// the FFT stages).  For a real input bin k + 8192 is the complex conjugate
// of bin 8192 - k, so the spectrometer uses only lo.
//
// Interface and timing: registered, latency 1; channel index, valid and
// frame start travel alongside.
module fft2_parallel
  import saras_pkg::cplx_t, saras_pkg::FFT_W, saras_pkg::half;
#(
  parameter int CHW = 13
) (
  input  logic           clk,
  input  logic           rst_n,
  input  cplx_t          in_e,
  input  cplx_t          in_o,
  input  logic [CHW-1:0] in_ch,
  input  logic           in_valid,
  input  logic           in_sof,
  output cplx_t          out_lo,
  output cplx_t          out_hi,
  output logic [CHW-1:0] out_ch,
  output logic           out_valid,
  output logic           out_sof
);

  logic signed [FFT_W:0] s_re, s_im, d_re, d_im;

  always_comb begin
    s_re = (FFT_W+1)'(in_e.re) + (FFT_W+1)'(in_o.re);
    s_im = (FFT_W+1)'(in_e.im) + (FFT_W+1)'(in_o.im);
    d_re = (FFT_W+1)'(in_e.re) - (FFT_W+1)'(in_o.re);
    d_im = (FFT_W+1)'(in_e.im) - (FFT_W+1)'(in_o.im);
  end

  always_ff @(posedge clk) begin
    out_lo.re <= half(s_re);
    out_lo.im <= half(s_im);
    out_hi.re <= half(d_re);
    out_hi.im <= half(d_im);
    out_ch    <= in_ch;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_sof   <= in_valid && in_sof;
    end
  end

endmodule

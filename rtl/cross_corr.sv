// cross_corr -- integrates the complex cross-power spectrum of the two
// inputs.
//
// For every channel k the module forms A[k] * conj(B[k]), i.e.
// re = Ar*Br + Ai*Bi and im = Ai*Br - Ar*Bi, and accumulates real and
// imaginary parts in two per-channel memories, exactly as auto_corr does for
// power: the first spectrum of an integration overwrites, the last one
// presents the finished sums.  Which input is conjugated is this design's
// choice.
//
// Interface and timing: as auto_corr; out_re/out_im registered, latency 1.
module cross_corr
  import saras_pkg::cplx_t, saras_pkg::FFT_W;
#(
  parameter int NCH   = 8192,
  parameter int ACC_W = 48
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  cplx_t                   in_a,
  input  cplx_t                   in_b,
  input  logic [$clog2(NCH)-1:0]  in_ch,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  logic                    in_last,
  output logic signed [ACC_W-1:0] out_re,
  output logic signed [ACC_W-1:0] out_im,
  output logic [$clog2(NCH)-1:0]  out_ch,
  output logic                    out_valid
);

  logic signed [ACC_W-1:0] acc_re [NCH];
  logic signed [ACC_W-1:0] acc_im [NCH];
  logic signed [ACC_W-1:0] p_re, p_im, n_re, n_im;

  always_comb begin
    p_re = ACC_W'(in_a.re * in_b.re) + ACC_W'(in_a.im * in_b.im);
    p_im = ACC_W'(in_a.im * in_b.re) - ACC_W'(in_a.re * in_b.im);
    n_re = in_first ? p_re : acc_re[in_ch] + p_re;
    n_im = in_first ? p_im : acc_im[in_ch] + p_im;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      acc_re[in_ch] <= n_re;
      acc_im[in_ch] <= n_im;
    end
    out_re <= n_re;
    out_im <= n_im;
    out_ch <= in_ch;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid && in_last;
  end

endmodule

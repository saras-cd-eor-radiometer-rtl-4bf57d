// fft_sdf_stage -- one radix-2 single-path delay-feedback (SDF) stage of a
// streaming decimation-in-frequency FFT.
//
// A stage of span 2*D takes samples in blocks of 2*D.  During the first D
// samples of a block it stores them in a D-word delay line while it emits the
// D twiddled differences left there by the previous block.  During the last D
// samples it forms the butterfly with the stored partner x[m] and the new
// sample x[m+D]: it emits (x[m]+x[m+D])/2 and stores
// (x[m]-x[m+D])/2 * W_{2D}^m in the delay line.  Each stage halves its
// outputs, so a chain of log2(N) stages returns DFT/N and cannot overflow
// except through twiddle rounding (products saturate).  Halving rounds half
// to even and products round half up, so the rounding errors of the stages
// carry no bias (plain truncation raised the error floor near DC to about
// -72 dB of full scale).  Twiddles are
// TW_W-bit signed cos/-sin scaled by 2^(TW_W-1)-1, computed at elaboration.
//
// Interface and timing: in_data/in_valid/in_sof, one sample per clock;
// in_sof marks the first sample of a block.  The output is registered:
// out_sof marks the first sum of a block and comes D+1 clocks after the
// corresponding in_sof.  Samples must arrive without gaps once a block
// starts (the spectrometer input is continuous).
module fft_sdf_stage
  import saras_pkg::cplx_t, saras_pkg::FFT_W, saras_pkg::sat, saras_pkg::rnd,
         saras_pkg::half;
#(
  parameter int D    = 1,
  parameter int TW_W = saras_pkg::TW_W
) (
  input  logic  clk,
  input  logic  rst_n,
  input  cplx_t in_data,
  input  logic  in_valid,
  input  logic  in_sof,
  output cplx_t out_data,
  output logic  out_valid,
  output logic  out_sof
);

  localparam int  CW = $clog2(2 * D);   // block position bits
  localparam int  MW = (D > 1) ? $clog2(D) : 1;
  localparam real PI = 3.14159265358979323846;
  localparam longint TW_ONE = (longint'(1) << (TW_W - 1)) - 1;

  cplx_t                  dline [D];
  logic signed [TW_W-1:0] tw_re [D];
  logic signed [TW_W-1:0] tw_im [D];

  initial begin
    for (int m = 0; m < D; m++) begin
      tw_re[m] = TW_W'(rnd( $cos(PI * real'(m) / real'(D)) * real'(TW_ONE)));
      tw_im[m] = TW_W'(rnd(-$sin(PI * real'(m) / real'(D)) * real'(TW_ONE)));
    end
  end

  logic [CW-1:0] cnt, idx;
  logic          upper;     // second half of the block: butterfly
  logic [MW-1:0] m;
  logic          primed;
  logic          sof_pend;  // a frame started in the current block
  cplx_t         a, b, sum, diff, rot, y;
  logic signed [FFT_W:0] s_re, s_im, d_re, d_im;
  logic signed [FFT_W+TW_W:0] p_re, p_im;

  // products are rounded half up (halving rounds half to even, see half())
  localparam logic signed [FFT_W+TW_W:0] PRND = (FFT_W+TW_W+1)'(1) <<< (TW_W - 2);

  always_comb begin
    idx   = in_sof ? '0 : cnt;
    upper = idx[CW-1];
    m     = (D > 1) ? MW'(idx) : '0;
    a     = dline[m];
    b     = in_data;
    s_re  = (FFT_W+1)'(a.re) + (FFT_W+1)'(b.re);
    s_im  = (FFT_W+1)'(a.im) + (FFT_W+1)'(b.im);
    d_re  = (FFT_W+1)'(a.re) - (FFT_W+1)'(b.re);
    d_im  = (FFT_W+1)'(a.im) - (FFT_W+1)'(b.im);
    sum.re  = half(s_re);
    sum.im  = half(s_im);
    diff.re = half(d_re);
    diff.im = half(d_im);
    p_re  = diff.re * tw_re[m] - diff.im * tw_im[m];
    p_im  = diff.re * tw_im[m] + diff.im * tw_re[m];
    if (m == '0) rot = diff;   // W^0 = 1 exactly
    else begin
      rot.re = sat((48'(p_re) + 48'(PRND)) >>> (TW_W - 1));
      rot.im = sat((48'(p_im) + 48'(PRND)) >>> (TW_W - 1));
    end
    y = upper ? sum : a;
  end

  always_ff @(posedge clk) begin
    if (in_valid) dline[m] <= upper ? rot : in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt       <= '0;
      primed    <= 1'b0;
      sof_pend  <= 1'b0;
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
    end else begin
      if (in_valid) cnt <= idx + 1'b1;
      if (in_valid && upper) primed <= 1'b1;
      out_valid <= in_valid && (primed || upper);
      if (in_valid && in_sof) sof_pend <= 1'b1;
      else if (in_valid && upper && m == '0) sof_pend <= 1'b0;
      out_sof   <= in_valid && upper && (m == '0) && sof_pend;
    end
    out_data <= y;
  end

endmodule

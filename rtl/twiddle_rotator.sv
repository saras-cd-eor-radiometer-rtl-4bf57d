// twiddle_rotator -- phase rotation between the two 8192-point FFTs and the
// 2-point FFT of the split 16384-point transform.
//
// A 16384-point DFT of x is assembled from the 8192-point DFTs E of the even
// samples and O of the odd samples:  X[k] = E[k] + W^k O[k] and
// X[k+8192] = E[k] - W^k O[k], with W = exp(-j 2 pi / 16384).  This module
// supplies W^k O[k].  The paper's figure draws a multiplier in each of the
// two paths; mathematically only the odd path needs a rotation, so the even
// path here is a plain delay of the same length (a multiply by one).
// Twiddles are TW_W-bit (16-bit, as in the paper) signed cos/-sin values
// scaled by 2^(TW_W-1)-1, computed at elaboration; products are rounded
// and saturated to FFT_W bits.
//
// Interface and timing: the FFT cores deliver bins in bit-reversed order, so
// the p-th pair after in_sof is bin k = bitrev(p).  Outputs (registered,
// latency 2): out_e = E[k], out_o = W^k O[k], out_ch = k, out_valid, out_sof.
module twiddle_rotator
  import saras_pkg::cplx_t, saras_pkg::FFT_W, saras_pkg::sat, saras_pkg::rnd;
#(
  parameter int NFFT = 16384,
  parameter int TW_W = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  cplx_t                  in_e,
  input  cplx_t                  in_o,
  input  logic                   in_valid,
  input  logic                   in_sof,
  output cplx_t                  out_e,
  output cplx_t                  out_o,
  output logic [$clog2(NFFT)-2:0] out_ch,
  output logic                   out_valid,
  output logic                   out_sof
);

  localparam int  KW = $clog2(NFFT) - 1;
  localparam int  NK = NFFT / 2;
  localparam real PI = 3.14159265358979323846;
  localparam longint TW_ONE = (longint'(1) << (TW_W - 1)) - 1;

  logic signed [TW_W-1:0] rom_re [NK];
  logic signed [TW_W-1:0] rom_im [NK];

  initial begin
    for (int k = 0; k < NK; k++) begin
      rom_re[k] = TW_W'(rnd( $cos(2.0 * PI * real'(k) / real'(NFFT)) * real'(TW_ONE)));
      rom_im[k] = TW_W'(rnd(-$sin(2.0 * PI * real'(k) / real'(NFFT)) * real'(TW_ONE)));
    end
  end

  logic [KW-1:0]          pos, p, k;
  logic signed [TW_W-1:0] w_re, w_im;
  cplx_t                  e1, o1;
  logic [KW-1:0]          k1;
  logic                   v1, sof1;
  logic signed [FFT_W+TW_W:0] p_re, p_im;
  localparam logic signed [FFT_W+TW_W:0] PRND = (FFT_W+TW_W+1)'(1) <<< (TW_W - 2);

  always_comb begin
    p = in_sof ? '0 : pos;
    k = {<<{p}};
  end

  // stage 1: register the pair and read the twiddle
  always_ff @(posedge clk) begin
    e1   <= in_e;
    o1   <= in_o;
    k1   <= k;
    w_re <= rom_re[k];
    w_im <= rom_im[k];
  end

  always_comb begin
    p_re = o1.re * w_re - o1.im * w_im;
    p_im = o1.re * w_im + o1.im * w_re;
  end

  // stage 2: complex multiply
  always_ff @(posedge clk) begin
    out_e  <= e1;
    out_ch <= k1;
    if (k1 == '0) out_o <= o1;   // W^0 = 1 exactly
    else begin
      out_o.re <= sat((48'(p_re) + 48'(PRND)) >>> (TW_W - 1));
      out_o.im <= sat((48'(p_im) + 48'(PRND)) >>> (TW_W - 1));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pos       <= '0;
      v1        <= 1'b0;
      sof1      <= 1'b0;
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
    end else begin
      if (in_valid) pos <= p + 1'b1;
      v1        <= in_valid;
      sof1      <= in_valid && in_sof;
      out_valid <= v1;
      out_sof   <= sof1;
    end
  end

endmodule

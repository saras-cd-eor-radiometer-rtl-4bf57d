// window_weight -- applies the window to the even and odd sample paths.
//
// Each 16384-sample block is split by the capture path into even samples
// x[2n] and odd samples x[2n+1], n = 0..NFFT/2-1, one pair per clock.  This
// module counts n, reads w[2n] and w[2n+1] from the coefficient table and
// multiplies, as in the paper (two multipliers sharing one coefficient
// table).  The product of a 10-bit signed sample and an 18-bit unsigned
// coefficient is shifted right by 10 (truncated) to an FFT_W-bit real input,
// i.e. x * w * 2^8 with w in [0,1); that scaling is this design's choice.
// Blocks follow each other without gap or overlap; the first pair after
// reset is sample 0 of a block (also this design's choice).
//
// Interface and timing: in_even/in_odd/in_valid from the data buffer.
// out_even/out_odd/out_valid/out_sof two clocks later; out_sof marks the
// first pair (n = 0) of a block.  Synchronous active-low reset restarts the
// block count.
module window_weight
  import saras_pkg::adc_t, saras_pkg::FFT_W, saras_pkg::ADC_W, saras_pkg::WIN_W;
#(
  parameter int NFFT = saras_pkg::NFFT
) (
  input  logic clk,
  input  logic rst_n,
  input  adc_t in_even,
  input  adc_t in_odd,
  input  logic in_valid,
  output logic signed [FFT_W-1:0] out_even,
  output logic signed [FFT_W-1:0] out_odd,
  output logic out_valid,
  output logic out_sof
);

  localparam int LN = $clog2(NFFT);

  logic [LN-2:0]      n;
  logic [WIN_W-1:0]   w_even, w_odd;
  adc_t               x_even_q, x_odd_q;
  logic               v_q, sof_q;
  logic signed [ADC_W+WIN_W:0] p_even, p_odd;

  window_coeff_rom #(.N(NFFT), .W(WIN_W)) u_rom (
    .clk   (clk),
    .addr_a({n, 1'b0}),
    .addr_b({n, 1'b1}),
    .coef_a(w_even),
    .coef_b(w_odd)
  );

  always_comb begin
    p_even = x_even_q * $signed({1'b0, w_even});
    p_odd  = x_odd_q  * $signed({1'b0, w_odd});
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      n         <= '0;
      v_q       <= 1'b0;
      sof_q     <= 1'b0;
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
    end else begin
      v_q       <= in_valid;
      sof_q     <= in_valid && (n == '0);
      if (in_valid) n <= n + 1'b1;
      out_valid <= v_q;
      out_sof   <= sof_q;
    end
    x_even_q <= in_even;
    x_odd_q  <= in_odd;
    out_even <= FFT_W'(p_even >>> (ADC_W + WIN_W - FFT_W));
    out_odd  <= FFT_W'(p_odd  >>> (ADC_W + WIN_W - FFT_W));
  end

endmodule

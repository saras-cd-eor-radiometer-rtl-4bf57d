// tb_f_engine_sidelobe -- spectral purity of the full-size F-engine.
//
// The spectrometer's windowed transform must keep a strong narrow-band
// signal out of distant channels: the instrument quotes about 98 dB of
// sidelobe suppression for the ideal minimum 4-term window and about 80 dB
// measured in practice, limited by 10-bit sampling and finite-precision
// arithmetic.  This test drives a 16384-point F-engine (default size) with a
// near full-scale tone placed between two channels (the worst case for
// leakage), plus +-1 LSB of random dither, averages the power of NSPEC
// spectra and measures, in dB relative to the tone's peak channel:
//   - the highest channel at least GUARD channels away from the tone and
//     from DC, which must be below -THRESH_DB (80 dB, the instrument's
//     measured figure).  The channels next to DC are left out because the
//     truncating arithmetic leaves a small DC offset (about half an LSB
//     after the window) whose main lobe covers them;
//   - the mean power of those channels (the arithmetic noise floor).
// It also checks that the peak lands on the tone's channel, that the main
// lobe is contained within GUARD channels, and the spectrum period of
// 8192 clocks.
module tb_f_engine_sidelobe;
  import saras_pkg::*;
  localparam int NFFT = 16384, NC = NFFT / 2, NSPEC = 32, GUARD = 8;
  localparam real TONE = 3000.37;          // in channels (bins of 16384)
  localparam real AMP = 500.0;
  localparam real THRESH_DB = 80.0;
  localparam real PI = 3.14159265358979;

  logic clk = 0, rst_n = 0;
  adc_t in_even, in_odd;
  logic in_valid = 0;
  cplx_t out_data, out_hi;
  logic [12:0] out_ch;
  logic out_valid, out_sof;
  int checks = 0, failures = 0, nsof = 0, last_sof = -1, cyc = 0;
  real pw [NC];

  f_engine dut (.*);

  always #2 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic adc_t sample(longint n);
    real v;
    int d;
    v = AMP * $sin(2.0 * PI * TONE * real'(n) / NFFT);
    d = int'($urandom_range(2)) - 1;
    return adc_t'($rtoi(v + (v < 0 ? -0.5 : 0.5)) + d);
  endfunction

  // accumulate the power of spectra 1..NSPEC (spectrum 0 is skipped)
  always @(posedge clk) if (rst_n && out_valid) begin
    logic signed [17:0] re, im;
    if (out_sof) begin
      nsof++;
      if (last_sof >= 0) begin
        checks++;
        if (cyc - last_sof != NC) begin failures++; $display("spectrum period %0d", cyc - last_sof); end
      end
      last_sof = cyc;
    end
    re = out_data.re;
    im = out_data.im;
    if (nsof >= 2 && nsof <= NSPEC + 1)
      pw[out_ch] += (real'(re) * re + real'(im) * im) / NSPEC;
  end

  initial begin
    longint n = 0;
    int kpk, k0, kworst;
    real ppk, pmax, psum, dbmax, dbmean;
    foreach (pw[i]) pw[i] = 0.0;
    repeat (4) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    while (nsof < NSPEC + 2) begin
      in_even <= sample(n);
      in_odd <= sample(n + 1);
      in_valid <= 1;
      n += 2;
      @(posedge clk);
    end
    in_valid <= 0;
    kpk = 0; ppk = 0.0;
    for (int k = 1; k < NC; k++) if (pw[k] > ppk) begin ppk = pw[k]; kpk = k; end
    k0 = $rtoi(TONE + 0.5);
    pmax = 0.0; psum = 0.0; kworst = 0;
    for (int k = GUARD; k < NC; k++) begin
      if (k > k0 - GUARD && k < k0 + GUARD) continue;
      psum += pw[k];
      if (pw[k] > pmax) begin pmax = pw[k]; kworst = k; end
    end
    dbmax = 10.0 * $log10(pmax / ppk);
    dbmean = 10.0 * $log10(psum / (NC - 3 * GUARD + 1) / ppk);
    $display("tone channel %0d, peak amplitude %0.0f LSB", kpk, $sqrt(ppk));
    $display("worst channel beyond +-%0d: %0d at %0.1f dB; mean floor %0.1f dB",
             GUARD, kworst, dbmax, dbmean);
    checks += 3;
    if (kpk != 3000) begin failures++; $display("peak at channel %0d", kpk); end
    if (dbmax > -THRESH_DB) begin failures++; $display("leakage above -%0.0f dB", THRESH_DB); end
    if (nsof < NSPEC + 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

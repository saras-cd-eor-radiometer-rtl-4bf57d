// tb_fft2_parallel -- checks the single-clock 2-point butterfly:
// lo = (E + O) >> 1 and hi = (E - O) >> 1, channel/valid/sof carried with a
// one-clock latency, on random inputs including full-scale extremes.
module tb_fft2_parallel;
  import saras_pkg::*;
  logic clk = 0, rst_n = 0;
  cplx_t in_e, in_o, out_lo, out_hi;
  logic [12:0] in_ch, out_ch;
  logic in_valid = 0, in_sof = 0, out_valid, out_sof;
  int checks = 0, failures = 0;

  fft2_parallel #(.CHW(13)) dut (.*);

  always #5 clk = ~clk;

  function automatic int half(int v);
    int h = (v >>> 1) + ((v & 3) == 3 ? 1 : 0);  // halve, ties to even
    return (h > 131071) ? 131071 : h;              // saturate to 18 bits
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 500; n++) begin
      int er, ei, orr, oi;
      er  = (n == 0) ? 131071 : (n == 1) ? -131072 : $urandom_range(262143) - 131072;
      ei  = (n == 0) ? 131071 : (n == 1) ? -131072 : $urandom_range(262143) - 131072;
      orr = (n == 0) ? 131071 : (n == 1) ? -131072 : $urandom_range(262143) - 131072;
      oi  = (n == 0) ? -131072 : (n == 1) ? 131071 : $urandom_range(262143) - 131072;
      in_e <= '{re: 18'(er), im: 18'(ei)};
      in_o <= '{re: 18'(orr), im: 18'(oi)};
      in_ch <= 13'(n * 7);
      in_valid <= 1;
      in_sof <= (n % 10 == 0);
      @(posedge clk);
      #1;
      checks += 6;
      if (out_lo.re != 18'(half(er + orr)) || out_lo.im != 18'(half(ei + oi))) begin
        failures++; $display("lo wrong at %0d", n);
      end
      if (out_hi.re != 18'(half(er - orr)) || out_hi.im != 18'(half(ei - oi))) begin
        failures++; $display("hi wrong at %0d", n);
      end
      if (out_ch != 13'(n * 7)) failures++;
      if (!out_valid) failures++;
      if (out_sof != (n % 10 == 0)) failures++;
      if (int'(out_lo.re) != half(er + orr)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_cross_corr -- accumulates random channel pairs and checks the finished
// sums of A*conj(B) (real and imaginary parts) against values computed here.
module tb_cross_corr;
  import saras_pkg::*;
  localparam int NCH = 8, NA = 5;
  logic clk = 0, rst_n = 0;
  cplx_t in_a, in_b;
  logic [2:0] in_ch, out_ch;
  logic in_valid = 0, in_first = 0, in_last = 0, out_valid;
  logic signed [47:0] out_re, out_im;
  longint rr [NCH], ri [NCH];
  int checks = 0, failures = 0, nout = 0;

  cross_corr #(.NCH(NCH), .ACC_W(48)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 2;
    nout++;
    if (out_re != 48'(rr[out_ch])) begin failures++; $display("re ch %0d got %0d exp %0d", out_ch, out_re, rr[out_ch]); end
    if (out_im != 48'(ri[out_ch])) begin failures++; $display("im ch %0d got %0d exp %0d", out_ch, out_im, ri[out_ch]); end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int it = 0; it < 2; it++)
      for (int s = 0; s < NA; s++)
        for (int c = 0; c < NCH; c++) begin
          int ar, ai, br, bi;
          ar = $urandom_range(262143) - 131072; ai = $urandom_range(262143) - 131072;
          br = $urandom_range(262143) - 131072; bi = $urandom_range(262143) - 131072;
          in_a <= '{re: 18'(ar), im: 18'(ai)};
          in_b <= '{re: 18'(br), im: 18'(bi)};
          in_ch <= 3'(c); in_valid <= 1; in_first <= (s == 0); in_last <= (s == NA - 1);
          if (s == 0) begin rr[c] = 0; ri[c] = 0; end
          rr[c] += longint'(ar) * br + longint'(ai) * bi;
          ri[c] += longint'(ai) * br - longint'(ar) * bi;
          @(posedge clk);
        end
    in_valid <= 0;
    repeat (3) @(posedge clk);
    checks++;
    if (nout != 2 * NCH) begin failures++; $display("outputs %0d", nout); end
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

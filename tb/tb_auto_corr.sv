// tb_auto_corr -- accumulates random spectra (8 channels, 2 integrations of
// 5 spectra, full-scale values included) and checks that each finished sum
// equals the sum of |X|^2 computed here, emitted only on the last spectrum.
module tb_auto_corr;
  import saras_pkg::*;
  localparam int NCH = 8, NA = 5;
  logic clk = 0, rst_n = 0;
  cplx_t in_data;
  logic [2:0] in_ch, out_ch;
  logic in_valid = 0, in_first = 0, in_last = 0, out_valid;
  logic signed [47:0] out_sum;
  longint ref_sum [NCH];
  int checks = 0, failures = 0, nout = 0;

  auto_corr #(.NCH(NCH), .ACC_W(48)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    nout++;
    if (out_sum != 48'(ref_sum[out_ch])) begin
      failures++; $display("ch %0d got %0d exp %0d", out_ch, out_sum, ref_sum[out_ch]);
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int it = 0; it < 2; it++)
      for (int s = 0; s < NA; s++)
        for (int c = 0; c < NCH; c++) begin
          int re, im;
          re = (s == 1) ? -131072 : $urandom_range(262143) - 131072;
          im = (s == 1) ? -131072 : $urandom_range(262143) - 131072;
          in_data <= '{re: 18'(re), im: 18'(im)};
          in_ch <= 3'(c); in_valid <= 1; in_first <= (s == 0); in_last <= (s == NA - 1);
          if (s == 0) ref_sum[c] = 0;
          ref_sum[c] += longint'(re) * re + longint'(im) * im;
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

// auto_corr -- integrates the power spectrum of one input.
//
// For every channel k of every spectrum the module forms
// |X[k]|^2 = re^2 + im^2 and adds it to a per-channel accumulator held in a
// memory of NCH words; each word is read, updated and written back once per
// spectrum.  On the first spectrum of an integration (in_first) the product
// replaces the stored value instead of being added; on the last (in_last)
// the finished sum is presented on out_sum.  With 18-bit components the
// power has 36 bits, and 2^11 = 2048 of them fit a 48-bit accumulator.
//
// Interface and timing: in_data/in_ch/in_valid with the in_first/in_last
// qualifiers; out_sum/out_ch/out_valid are registered, latency 1, and pulse
// only for in_last samples.
module auto_corr
  import saras_pkg::cplx_t, saras_pkg::FFT_W;
#(
  parameter int NCH   = 8192,
  parameter int ACC_W = 48
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  cplx_t                   in_data,
  input  logic [$clog2(NCH)-1:0]  in_ch,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  logic                    in_last,
  output logic signed [ACC_W-1:0] out_sum,
  output logic [$clog2(NCH)-1:0]  out_ch,
  output logic                    out_valid
);

  logic signed [ACC_W-1:0] acc [NCH];
  logic signed [ACC_W-1:0] pwr, nxt;

  always_comb begin
    pwr = ACC_W'(in_data.re * in_data.re) + ACC_W'(in_data.im * in_data.im);
    nxt = in_first ? pwr : acc[in_ch] + pwr;
  end

  always_ff @(posedge clk) begin
    if (in_valid) acc[in_ch] <= nxt;
    out_sum <= nxt;
    out_ch  <= in_ch;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid && in_last;
  end

endmodule

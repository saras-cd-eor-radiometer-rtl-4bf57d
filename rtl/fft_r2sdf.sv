// fft_r2sdf -- streaming N-point complex FFT, one sample per clock.
//
// The spectrometer's F-engine uses two 8192-point pipelined FFT cores per
// input.  The paper takes these cores from the FPGA vendor's IP generator;
// this module is an independent implementation of the same function: a
// chain of log2(N) radix-2 single-path delay-feedback stages
// (decimation in frequency) with delay lines N/2, N/4, ..., 1.  Each stage
// scales by 1/2, so the output is DFT/N (this scaling choice is this
// design's).  The output comes out in bit-reversed order: the p-th sample
// after out_sof is bin bitrev(p).
//
// Interface and timing: in_data/in_valid/in_sof with in_sof on sample 0 of
// each N-sample frame; frames must be contiguous.  out_sof marks bin 0 of a
// frame and follows the frame's in_sof by N - 1 + log2(N) clocks.
module fft_r2sdf
  import saras_pkg::cplx_t;
#(
  parameter int N    = 8192,
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

  localparam int S = $clog2(N);

  cplx_t d   [S+1];
  logic  v   [S+1];
  logic  sof [S+1];

  assign d[0]   = in_data;
  assign v[0]   = in_valid;
  assign sof[0] = in_sof;

  for (genvar s = 0; s < S; s++) begin : g_stage
    fft_sdf_stage #(.D(N >> (s + 1)), .TW_W(TW_W)) u_stage (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_data  (d[s]),
      .in_valid (v[s]),
      .in_sof   (sof[s]),
      .out_data (d[s+1]),
      .out_valid(v[s+1]),
      .out_sof  (sof[s+1])
    );
  end

  assign out_data  = d[S];
  assign out_valid = v[S];
  assign out_sof   = sof[S];

endmodule

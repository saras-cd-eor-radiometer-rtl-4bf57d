// window_coeff_rom -- coefficients of the 16384-point minimum 4-term window.
//
// The paper weights every FFT block with Nuttall's minimum 4-term
// Blackman-Harris window (ideal sidelobes about -98 dB) stored as 18-bit
// coefficients.  The coefficient values are
//   w[i] = a0 - a1 cos(2 pi i/N) + a2 cos(4 pi i/N) - a3 cos(6 pi i/N)
// with a0 = 0.3635819, a1 = 0.4891775, a2 = 0.1365995, a3 = 0.0106411
// (the published Nuttall constants), in the periodic form, as unsigned
// fixed point scaled by 2^W - 1 and rounded.  The periodic form and the
// scaling are this design's choice.  The table is computed when the design is
// elaborated, so no data file is needed.
//
// Interface and timing: two independent read ports (one per sample path),
// registered: the coefficient for addr_x appears on coef_x one clock later.
module window_coeff_rom #(
  parameter int N = 16384,
  parameter int W = 18
) (
  input  logic                 clk,
  input  logic [$clog2(N)-1:0] addr_a,
  input  logic [$clog2(N)-1:0] addr_b,
  output logic [W-1:0]         coef_a,
  output logic [W-1:0]         coef_b
);

  localparam real A0 = 0.3635819;
  localparam real A1 = 0.4891775;
  localparam real A2 = 0.1365995;
  localparam real A3 = 0.0106411;
  localparam real PI = 3.14159265358979323846;

  logic [W-1:0] rom [N];

  function automatic logic [W-1:0] coef(input int i);
    real ph, w;
    ph = 2.0 * PI * real'(i) / real'(N);
    w  = A0 - A1 * $cos(ph) + A2 * $cos(2.0 * ph) - A3 * $cos(3.0 * ph);
    if (w < 0.0) w = 0.0;
    return W'(longint'(w * real'((longint'(1) << W) - 1)));
  endfunction

  initial begin
    for (int i = 0; i < N; i++) rom[i] = coef(i);
  end

  always_ff @(posedge clk) begin
    coef_a <= rom[addr_a];
    coef_b <= rom[addr_b];
  end

endmodule

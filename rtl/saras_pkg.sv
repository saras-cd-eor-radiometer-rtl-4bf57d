// saras_pkg -- widths, constants and types shared by the SARAS correlation
// spectrometer datapath.
//
// The spectrometer digitises two baseband signals at 500 MSps with 10-bit
// ADCs, weights 16384-sample blocks with an 18-bit minimum 4-term window,
// Fourier transforms them with a split (2 x 8192) FFT and integrates auto and
// cross power spectra over 2048 spectra.  Those numbers follow the paper.
// The word width after the FFT (18 bits) and the accumulator width (48 bits,
// the DSP48E1 accumulator) are this design's choice: 36-bit powers summed over
// 2^11 spectra then fit the accumulator, which is the overflow argument the
// paper gives for averaging 2048 spectra.
package saras_pkg;

  localparam int ADC_W  = 10;     // ADC resolution
  localparam int WIN_W  = 18;     // window coefficient precision
  localparam int TW_W   = 16;     // twiddle factor precision (re, im)
  localparam int FFT_W  = 18;     // complex component width through the FFT
  localparam int ACC_W  = 48;     // integrator width
  localparam int NFFT   = 16384;  // transform length
  localparam int NCH    = NFFT / 2;
  localparam int NACC   = 2048;   // spectra per integration
  localparam int NSETS  = 16;     // integrations per acquisition cycle

  typedef logic signed [ADC_W-1:0] adc_t;

  typedef struct packed {
    logic signed [FFT_W-1:0] re;
    logic signed [FFT_W-1:0] im;
  } cplx_t;

  // One channel of one finished integration.
  typedef struct packed {
    logic signed [ACC_W-1:0] auto_a;
    logic signed [ACC_W-1:0] auto_b;
    logic signed [ACC_W-1:0] cross_re;
    logic signed [ACC_W-1:0] cross_im;
  } corr_t;

  typedef enum logic [1:0] {
    PROD_AUTO_A   = 2'd0,
    PROD_AUTO_B   = 2'd1,
    PROD_CROSS_RE = 2'd2,
    PROD_CROSS_IM = 2'd3
  } prod_e;

  // Bit reversal of the low `bits` bits of v.
  function automatic int unsigned bitrev(input int unsigned v, input int bits);
    int unsigned r = 0;
    for (int i = 0; i < bits; i++) r = (r << 1) | ((v >> i) & 1);
    return r;
  endfunction

  // Round-to-nearest of a real to an integer.
  function automatic longint rnd(input real x);
    return longint'(x);  // a real-to-integer cast rounds to nearest
  endfunction

  // Saturate a wide signed value to FFT_W bits.
  function automatic logic signed [FFT_W-1:0] sat(input logic signed [47:0] v);
    localparam logic signed [47:0] MAXV = (48'sd1 <<< (FFT_W-1)) - 48'sd1;
    localparam logic signed [47:0] MINV = -(48'sd1 <<< (FFT_W-1));
    if (v > MAXV) return MAXV[FFT_W-1:0];
    if (v < MINV) return MINV[FFT_W-1:0];
    return v[FFT_W-1:0];
  endfunction

  // Halve an (FFT_W+1)-bit sum or difference to FFT_W bits, rounding half
  // to even so that no bias builds up over the FFT's many halvings.
  function automatic logic signed [FFT_W-1:0] half(input logic signed [FFT_W:0] v);
    logic signed [47:0] h;
    h = 48'(v >>> 1);
    if (v[1] && v[0]) h = h + 48'sd1;
    return sat(h);
  endfunction

endpackage

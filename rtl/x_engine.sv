// x_engine -- multiply-and-accumulate stage of the FX correlator.
//
// The two F-engines deliver channel k of input A and of input B on the same
// clock.  The X-engine feeds both to two auto-correlators (|A|^2, |B|^2) and
// a cross-correlator (A conj(B)) and averages over blocks of NACC = 2048
// spectra, one block being one integration of 2048 x 32.768 us = 67.1 ms, as
// in the paper.  On a start pulse it waits for the next spectrum boundary,
// then runs num_int back-to-back integrations and stops; each finished
// integration streams out channel by channel during its last spectrum,
// tagged with its set number 0..num_int-1.  The start/stop sequencing is
// this design's choice.
//
// Interface and timing: a_*/b_* from the F-engines (A's valid, sof and
// channel index qualify both).  out_* registered, latency 1; int_done
// pulses with the last channel of each integration; busy is high from start
// until the last integration is out.
module x_engine
  import saras_pkg::cplx_t, saras_pkg::corr_t, saras_pkg::ACC_W;
#(
  parameter int NCH   = 8192,
  parameter int NACC  = 2048,
  parameter int NSETS = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [$clog2(NSETS+1)-1:0] num_int,
  input  cplx_t                      a_data,
  input  cplx_t                      b_data,
  input  logic [$clog2(NCH)-1:0]     in_ch,
  input  logic                       in_valid,
  input  logic                       in_sof,
  output corr_t                      out_corr,
  output logic [$clog2(NCH)-1:0]     out_ch,
  output logic [$clog2(NSETS)-1:0]   out_set,
  output logic                       out_valid,
  output logic                       int_done,
  output logic                       busy
);

  localparam int CHW = $clog2(NCH);
  localparam int AW  = $clog2(NACC);
  localparam int SW  = $clog2(NSETS);

  typedef enum logic [1:0] {IDLE, ARM, RUN} state_e;
  state_e state;

  logic [AW-1:0]   spec;       // spectrum number within the integration
  logic [AW-1:0]   spec_now;
  logic [SW-1:0]   set, set_q;
  logic [$clog2(NSETS+1)-1:0] nint;
  logic            act, first, last;
  logic            va, vb, vx;
  logic [CHW-1:0]  cha, chb, chx;
  logic signed [ACC_W-1:0] pa, pb, xre, xim;

  // the spectrum counter advances at each sof while running
  always_comb begin
    spec_now = spec;
    if (in_valid && in_sof && state == RUN) spec_now = spec + 1'b1;
    act   = in_valid && ((state == RUN) || (state == ARM && in_sof));
    if (state == ARM) spec_now = '0;
    first = (spec_now == '0);
    last  = (spec_now == AW'(NACC - 1));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= IDLE;
      spec     <= '0;
      set      <= '0;
      nint     <= '0;
      int_done <= 1'b0;
    end else begin
      int_done <= 1'b0;
      case (state)
        IDLE: if (start && num_int != '0) begin
          state <= ARM;
          nint  <= num_int;
          set   <= '0;
        end
        ARM: if (in_valid && in_sof) begin
          state <= RUN;
          spec  <= '0;
        end
        RUN: if (in_valid && in_sof) spec <= spec_now;
        default: state <= IDLE;
      endcase
      // the end of an integration: last channel of its last spectrum
      if (act && last && spec_end(in_ch)) begin
        int_done <= 1'b1;
        if (SW'(set) == SW'(nint - 1'b1)) state <= IDLE;
        else                             set   <= set + 1'b1;
      end
    end
    set_q <= set;
  end

  // channels arrive in bit-reversed order; the last one of a spectrum is
  // the one before the next sof, which is the all-ones index
  function automatic logic spec_end(input logic [CHW-1:0] ch);
    return ch == '1;
  endfunction

  auto_corr #(.NCH(NCH), .ACC_W(ACC_W)) u_auto_a (
    .clk(clk), .rst_n(rst_n), .in_data(a_data), .in_ch(in_ch), .in_valid(act),
    .in_first(first), .in_last(last), .out_sum(pa), .out_ch(cha), .out_valid(va)
  );

  auto_corr #(.NCH(NCH), .ACC_W(ACC_W)) u_auto_b (
    .clk(clk), .rst_n(rst_n), .in_data(b_data), .in_ch(in_ch), .in_valid(act),
    .in_first(first), .in_last(last), .out_sum(pb), .out_ch(chb), .out_valid(vb)
  );

  cross_corr #(.NCH(NCH), .ACC_W(ACC_W)) u_cross (
    .clk(clk), .rst_n(rst_n), .in_a(a_data), .in_b(b_data), .in_ch(in_ch),
    .in_valid(act), .in_first(first), .in_last(last),
    .out_re(xre), .out_im(xim), .out_ch(chx), .out_valid(vx)
  );

  assign out_corr  = '{auto_a: pa, auto_b: pb, cross_re: xre, cross_im: xim};
  assign out_ch    = cha;
  assign out_set   = set_q;
  assign out_valid = va;
  assign busy      = (state != IDLE);

  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (va == vb && va == vx && cha == chb && cha == chx)
        else $error("x_engine: correlators out of step");
    end
  end

endmodule

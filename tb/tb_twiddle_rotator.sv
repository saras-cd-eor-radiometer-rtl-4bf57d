// tb_twiddle_rotator -- drives random (E, O) bin pairs in bit-reversed order
// for a 32-point split transform and checks out_o = O * exp(-j 2 pi k/32)
// (within 2 LSB, computed here in floating point), out_e = E, the channel
// index k = bitrev(position) and the 2-clock latency.
module tb_twiddle_rotator;
  import saras_pkg::*;
  localparam int NFFT = 32, KW = 4;
  logic clk = 0, rst_n = 0;
  cplx_t in_e, in_o, out_e, out_o;
  logic in_valid = 0, in_sof = 0, out_valid, out_sof;
  logic [KW-1:0] out_ch;
  int checks = 0, failures = 0, cyc = 0, nout = 0;
  cplx_t qe [$], qo [$];
  int qc [$];

  twiddle_rotator #(.NFFT(NFFT), .TW_W(16)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic real rabs(real v);
    return (v < 0) ? -v : v;
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    cplx_t e, o;
    int c, pos, k;
    real ph, er, ei, tol;
    logic signed [17:0] gr, gi;
    e = qe.pop_front(); o = qo.pop_front(); c = qc.pop_front();
    pos = nout % (NFFT / 2);
    k = 0;
    for (int b = 0; b < KW; b++) k |= ((pos >> b) & 1) << (KW - 1 - b);
    ph = -2.0 * 3.14159265358979 * k / NFFT;
    er = o.re * $cos(ph) - o.im * $sin(ph);
    ei = o.re * $sin(ph) + o.im * $cos(ph);
    checks += 5;
    gr = out_o.re; gi = out_o.im;
    if (out_e != e) begin failures++; $display("e mismatch"); end
    // 2 LSB truncation plus the 1/32768 gain error of twiddles scaled by 2^15-1
    tol = 2.0 + 5.0e-5 * (rabs(er) + rabs(ei));
    if (rabs(real'(gr) - er) > tol || rabs(real'(gi) - ei) > tol) begin
      failures++; $display("k=%0d got (%0d,%0d) exp (%0.1f,%0.1f)", k, gr, gi, er, ei);
    end
    if (out_ch != KW'(k)) begin failures++; $display("ch %0d exp %0d", out_ch, k); end
    if (out_sof != (pos == 0)) begin failures++; $display("sof at pos %0d", pos); end
    if (cyc - c != 3) begin failures++; $display("latency %0d", cyc - c - 1); end
    nout++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 4 * NFFT / 2; n++) begin
      cplx_t e, o;
      e.re = 18'($urandom_range(200000) - 100000); e.im = 18'($urandom_range(200000) - 100000);
      o.re = 18'($urandom_range(180000) - 90000);  o.im = 18'($urandom_range(180000) - 90000);
      in_e <= e; in_o <= o; in_valid <= 1; in_sof <= (n % (NFFT / 2) == 0);
      qe.push_back(e); qo.push_back(o); qc.push_back(cyc);
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (5) @(posedge clk);
    checks++;
    if (nout != 2 * NFFT) begin failures++; $display("outputs %0d", nout); end
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

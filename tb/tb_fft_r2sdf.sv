// tb_fft_r2sdf -- streams random complex frames through a 64-point pipelined
// FFT and compares every bin with a direct DFT computed here in floating
// point (output = DFT/N, bins in bit-reversed order), and checks the
// N - 1 + log2(N) clock frame latency and the one-bin-per-clock rate.
module tb_fft_r2sdf;
  import saras_pkg::*;
  localparam int N = 64, S = 6, FRAMES = 5;
  localparam int TOL = 8;
  logic clk = 0, rst_n = 0;
  cplx_t in_data, out_data;
  logic in_valid = 0, in_sof = 0, out_valid, out_sof;
  int checks = 0, failures = 0, cyc = 0;
  int xr [FRAMES][N], xi [FRAMES][N];
  int sof_in_cyc [$];
  int fo = -1, p = 0, nbins = 0;

  fft_r2sdf #(.N(N), .TW_W(16)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic real rabs(real v);
    return (v < 0) ? -v : v;
  endfunction

  task automatic check_bin(int f, int pos, cplx_t y);
    int k;
    real er, ei, ph;
    k = 0;
    for (int b = 0; b < S; b++) k |= ((pos >> b) & 1) << (S - 1 - b);
    er = 0; ei = 0;
    for (int n = 0; n < N; n++) begin
      ph = -2.0 * 3.14159265358979 * k * n / N;
      er += xr[f][n] * $cos(ph) - xi[f][n] * $sin(ph);
      ei += xr[f][n] * $sin(ph) + xi[f][n] * $cos(ph);
    end
    er /= N; ei /= N;
    checks += 2;
    if (rabs(y.re - er) > TOL || rabs(y.im - ei) > TOL) begin
      failures++;
      if (failures < 10) $display("frame %0d bin %0d: got (%0d,%0d) exp (%0.1f,%0.1f)", f, k, y.re, y.im, er, ei);
    end
  endtask

  always @(posedge clk) if (rst_n && out_valid) begin
    if (out_sof) begin
      int ci;
      fo++;
      p = 0;
      ci = sof_in_cyc.pop_front();
      checks++;
      // in_sof driven before edge E, sampled at E; out_sof registered at
      // E + N - 1 + S and seen by this check one clock later
      if (cyc - ci != N + S) begin failures++; $display("latency %0d", cyc - ci - 1); end
    end
    if (fo >= 0 && fo < FRAMES) begin
      check_bin(fo, p, out_data);
      nbins++;
    end
    p++;
  end

  initial begin
    for (int f = 0; f < FRAMES; f++)
      for (int n = 0; n < N; n++) begin
        xr[f][n] = $urandom_range(131071) - 65536;
        xi[f][n] = (f == 1) ? 0 : $urandom_range(131071) - 65536;
      end
    // frame 2: a pure tone in bin 5
    for (int n = 0; n < N; n++) begin
      xr[2][n] = $rtoi(60000.0 * $cos(2.0 * 3.14159265358979 * 5 * n / N));
      xi[2][n] = $rtoi(60000.0 * $sin(2.0 * 3.14159265358979 * 5 * n / N));
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f <= FRAMES; f++)
      for (int n = 0; n < N; n++) begin
        in_data.re <= (f < FRAMES) ? 18'(xr[f][n]) : '0;
        in_data.im <= (f < FRAMES) ? 18'(xi[f][n]) : '0;
        in_valid <= 1;
        in_sof <= (n == 0);
        if (n == 0) sof_in_cyc.push_back(cyc);
        @(posedge clk);
      end
    in_valid <= 0;
    repeat (N) @(posedge clk);
    checks++;
    if (nbins != FRAMES * N) begin failures++; $display("bins seen %0d", nbins); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_f_engine -- end-to-end check of one channelizer at NFFT = 64: random
// 10-bit samples (plus one block holding a strong tone) go in as even/odd
// pairs; every output channel k < 32 of every block is compared with the
// DFT of the windowed block divided by 64, computed here in floating point
// from the window formula.  Also checks the spectrum period (NFFT/2 clocks,
// i.e. 32.768 us at 250 MHz for NFFT = 16384) and the pipeline latency.
module tb_f_engine;
  import saras_pkg::*;
  localparam int NFFT = 64, M = NFFT / 2, S = 5, BLOCKS = 4;
  logic clk = 0, rst_n = 0;
  adc_t in_even, in_odd;
  logic in_valid = 0;
  cplx_t out_data, out_hi;
  logic [S-1:0] out_ch;
  logic out_valid, out_sof;
  int checks = 0, failures = 0, cyc = 0, blk = -1, pos = 0, first_in = -1, last_sof = -1, nch = 0;
  int x [BLOCKS][NFFT];

  f_engine #(.NFFT(NFFT)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic real rabs(real v);
    return (v < 0) ? -v : v;
  endfunction

  function automatic int wx(int v, int i);
    real a = 2.0 * 3.14159265358979 * i / NFFT;
    real w = 0.3635819 - 0.4891775 * $cos(a) + 0.1365995 * $cos(2 * a) - 0.0106411 * $cos(3 * a);
    return int'((longint'(v) * longint'($rtoi(w * 262143.0 + 0.5))) >>> 10);
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    logic signed [17:0] gr, gi;
    real er, ei, ph, tol;
    int k;
    if (out_sof) begin
      if (blk < 0) begin
        checks++;
        // first pair driven before edge E; sof registered NFFT/2+S+4 later
        if (cyc - first_in != M + S + 4 + 1) begin failures++; $display("latency %0d", cyc - first_in - 1); end
      end else begin
        checks++;
        if (cyc - last_sof != M) begin failures++; $display("period %0d", cyc - last_sof); end
      end
      last_sof = cyc;
      blk++;
      pos = 0;
    end
    if (blk >= 0 && blk < BLOCKS) begin
      k = 0;
      for (int b = 0; b < S; b++) k |= ((pos >> b) & 1) << (S - 1 - b);
      checks++;
      if (int'(out_ch) != k) begin failures++; $display("ch %0d exp %0d", out_ch, k); end
      er = 0; ei = 0;
      for (int n = 0; n < NFFT; n++) begin
        ph = -2.0 * 3.14159265358979 * k * n / NFFT;
        er += wx(x[blk][n], n) * $cos(ph);
        ei += wx(x[blk][n], n) * $sin(ph);
      end
      er /= NFFT; ei /= NFFT;
      gr = out_data.re; gi = out_data.im;
      tol = 8.0 + 1.0e-4 * (rabs(er) + rabs(ei));
      checks += 2;
      if (rabs(real'(gr) - er) > tol || rabs(real'(gi) - ei) > tol) begin
        failures++;
        if (failures < 10) $display("blk %0d k %0d got (%0d,%0d) exp (%0.1f,%0.1f)", blk, k, gr, gi, er, ei);
      end
      nch++;
    end
    pos++;
  end

  initial begin
    for (int b = 0; b < BLOCKS; b++)
      for (int n = 0; n < NFFT; n++)
        x[b][n] = (b == 2) ? $rtoi(500.0 * $cos(2.0 * 3.14159265358979 * 7.3 * n / NFFT))
                           : $urandom_range(1023) - 512;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    first_in = cyc;
    for (int b = 0; b <= BLOCKS + 1; b++)
      for (int n = 0; n < M; n++) begin
        in_even <= (b < BLOCKS) ? 10'(x[b][2 * n]) : '0;
        in_odd  <= (b < BLOCKS) ? 10'(x[b][2 * n + 1]) : '0;
        in_valid <= 1;
        @(posedge clk);
      end
    in_valid <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (nch != BLOCKS * M) begin failures++; $display("channels %0d", nch); end
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

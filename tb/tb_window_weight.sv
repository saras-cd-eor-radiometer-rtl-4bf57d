// tb_window_weight -- streams random 10-bit sample pairs through the
// weighting stage (64-point window) and checks every output against
// x * w >> 10 computed here from the window formula, the block-start
// marker every 32 pairs and the 2-clock latency.
module tb_window_weight;
  localparam int NFFT = 64;
  logic clk = 0, rst_n = 0;
  logic signed [9:0] in_even, in_odd;
  logic in_valid = 0;
  logic signed [17:0] out_even, out_odd;
  logic out_valid, out_sof;
  int checks = 0, failures = 0, cyc = 0, nout = 0;
  int xe [$], xo [$], tin [$];

  window_weight #(.NFFT(NFFT)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic longint wcoef(int i);
    real x = 2.0 * 3.14159265358979 * i / NFFT;
    real w = 0.3635819 - 0.4891775 * $cos(x) + 0.1365995 * $cos(2 * x) - 0.0106411 * $cos(3 * x);
    return longint'($rtoi(w * 262143.0 + 0.5));
  endfunction

  function automatic int expect_out(int x, int i);
    longint p = longint'(x) * wcoef(i);
    return int'(p >>> 10);
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    int pe, po, ti, n;
    pe = xe.pop_front(); po = xo.pop_front(); ti = tin.pop_front();
    n = nout % (NFFT / 2);
    checks += 4;
    if (int'(out_even) - expect_out(pe, 2 * n) > 1 || expect_out(pe, 2 * n) - int'(out_even) > 1) begin
      failures++; $display("even n=%0d x=%0d got %0d exp %0d", n, pe, out_even, expect_out(pe, 2 * n));
    end
    if (int'(out_odd) - expect_out(po, 2 * n + 1) > 1 || expect_out(po, 2 * n + 1) - int'(out_odd) > 1) begin
      failures++; $display("odd n=%0d got %0d exp %0d", n, out_odd, expect_out(po, 2 * n + 1));
    end
    if (out_sof != (n == 0)) begin failures++; $display("sof wrong at n=%0d", n); end
    // driven before edge E, registered at E+2, seen by this check at E+3
    if (cyc - ti != 3) begin failures++; $display("latency %0d", cyc - ti); end
    nout++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int k = 0; k < 200; k++) begin
      int a, b;
      a = $urandom_range(1023) - 512;
      b = $urandom_range(1023) - 512;
      in_even <= 10'(a);
      in_odd  <= 10'(b);
      in_valid <= 1;
      xe.push_back(a); xo.push_back(b); tin.push_back(cyc);
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (5) @(posedge clk);
    checks++;
    if (nout != 200) begin failures++; $display("outputs %0d", nout); end
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

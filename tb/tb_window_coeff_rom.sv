// tb_window_coeff_rom -- compares the full 16384-entry window table with the
// minimum 4-term Blackman-Harris formula evaluated here (within 1 LSB), and
// checks its symmetry, peak and the one-clock read latency.
module tb_window_coeff_rom;
  localparam int N = 16384, W = 18;
  logic clk = 0;
  logic [13:0] addr_a, addr_b;
  logic [W-1:0] coef_a, coef_b;
  int checks = 0, failures = 0;
  real pi = 3.14159265358979;

  window_coeff_rom #(.N(N), .W(W)) dut (.*);

  always #5 clk = ~clk;

  function automatic int expected(int i);
    real x = 2.0 * 3.14159265358979 * i / N;
    real w = 0.3635819 - 0.4891775 * $cos(x) + 0.1365995 * $cos(2 * x) - 0.0106411 * $cos(3 * x);
    return $rtoi(w * 262143.0 + 0.5);
  endfunction

  initial begin
    for (int i = 0; i < N; i++) begin
      addr_a <= 14'(i);
      addr_b <= 14'((N - i) % N);
      @(posedge clk);
      #1;
      checks += 2;
      if ((int'(coef_a) - expected(i)) > 1 || (expected(i) - int'(coef_a)) > 1) begin
        failures++;
        if (failures < 10) $display("w[%0d] = %0d expected %0d", i, coef_a, expected(i));
      end
      if (coef_a != coef_b) begin
        failures++;
        if (failures < 10) $display("asymmetry at %0d", i);
      end
    end
    addr_a <= 14'(N / 2);
    @(posedge clk);
    #1;
    checks++;
    if (coef_a < 18'd262140) begin failures++; $display("peak %0d", coef_a); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

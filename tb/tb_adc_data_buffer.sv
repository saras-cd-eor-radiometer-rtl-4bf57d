// tb_adc_data_buffer -- feeds four-sample words every second clock and
// checks that they leave as consecutive (even, odd) pairs in order, one pair
// per clock; then writes every clock to check the overflow flag.
module tb_adc_data_buffer;
  logic clk = 0, rst_n = 0;
  logic signed [9:0] in_data [4];
  logic in_valid = 0;
  logic signed [9:0] out_even, out_odd;
  logic out_valid, overflow;
  int checks = 0, failures = 0, w = 0, expect_n = 0, pairs = 0;
  bit flood = 0;

  adc_data_buffer #(.W(10), .DEPTH(4)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic signed [9:0] smp(int n);
    return 10'((n * 13 + 5) % 1024);
  endfunction

  always @(posedge clk) if (rst_n && out_valid && !flood) begin
    checks += 2;
    if (out_even != smp(expect_n))     begin failures++; $display("even %0d got %0d", expect_n, out_even); end
    if (out_odd  != smp(expect_n + 1)) begin failures++; $display("odd %0d got %0d", expect_n + 1, out_odd); end
    expect_n += 2;
    pairs++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // steady state: one word every second clock, 100 words
    for (int k = 0; k < 100; k++) begin
      for (int i = 0; i < 4; i++) in_data[i] <= smp(w * 4 + i);
      in_valid <= 1;
      @(posedge clk);
      in_valid <= 0;
      w++;
      @(posedge clk);
    end
    repeat (5) @(posedge clk);
    checks++;
    if (pairs != 200) begin failures++; $display("pairs %0d", pairs); end
    checks++;
    if (overflow) begin failures++; $display("overflow at nominal rate"); end
    // a word every clock is twice the drain rate: the FIFO must fill
    flood = 1;
    for (int k = 0; k < 20; k++) begin
      in_valid <= 1;
      @(posedge clk);
    end
    in_valid <= 0;
    @(posedge clk);
    checks++;
    if (!overflow) begin failures++; $display("overflow not flagged"); end
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

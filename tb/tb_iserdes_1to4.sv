// tb_iserdes_1to4 -- checks that the 1:4 deserializer groups consecutive DDR
// samples (rising edge first) into words, oldest in q[0], one word every
// second clock.
module tb_iserdes_1to4;
  logic clk = 0, rst_n = 0;
  logic signed [9:0] d_rise, d_fall, q [4];
  logic q_valid;
  int checks = 0, failures = 0, words = 0, n = 0, last_word_cycle = -1, cyc = 0;

  iserdes_1to4 #(.W(10)) dut (.*);

  always #5 clk = ~clk;

  // sample stream: sample n has value (n*7+3) mod 1024, two per clock
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) n <= n + 2;
  end
  assign d_rise = 10'((n * 7 + 3) % 1024);
  assign d_fall = 10'(((n + 1) * 7 + 3) % 1024);

  always @(posedge clk) if (rst_n && q_valid) begin
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (q[i] != 10'(((words * 4 + i) * 7 + 3) % 1024)) begin
        failures++;
        $display("word %0d lane %0d: got %0d", words, i, q[i]);
      end
    end
    if (last_word_cycle >= 0) begin
      checks++;
      if (cyc - last_word_cycle != 2) begin
        failures++;
        $display("word spacing %0d", cyc - last_word_cycle);
      end
    end
    last_word_cycle = cyc;
    words++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (200) @(posedge clk);
    checks++;
    if (words < 90) failures++;
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

// tb_acq_ctrl -- runs two acquisition cycles against simple models of the
// X-engine (busy for a while after x_start) and the packetizer (busy for a
// while after pkt_start) and checks the order of events: x_start with
// NSETS integrations, read-out only after acquisition ends, done after the
// read-out, the cycle counter, and that a start while busy is ignored.
// The set count is left at 0 for the first cycle (meaning NSETS) and
// programmed to 3 for the second.
module tb_acq_ctrl;
  localparam int NSETS = 16;
  logic clk = 0, rst_n = 0, start = 0;
  logic x_start, pkt_start, busy, done;
  logic [4:0] x_num_int, num_sets = 0, exp_sets = 5'(NSETS);
  logic x_busy = 0, pkt_busy = 0;
  logic [15:0] cycle;
  int checks = 0, failures = 0, xs = 0, ps = 0, dn = 0, x_end = -1, cyc = 0;

  acq_ctrl #(.NSETS(NSETS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // X-engine model: busy 40 clocks; packetizer model: busy 25 clocks
  int xcnt = 0, pcnt = 0;
  always @(posedge clk) if (rst_n) begin
    if (x_start) begin
      xs++; xcnt = 40; x_busy <= 1;
      checks++;
      if (x_num_int != exp_sets) begin failures++; $display("num_int %0d", x_num_int); end
    end else if (xcnt > 0) begin
      xcnt--; if (xcnt == 0) begin x_busy <= 0; x_end = cyc; end
    end
    if (pkt_start) begin
      ps++; pcnt = 25; pkt_busy <= 1;
      checks++;
      if (x_busy || x_end < 0) begin failures++; $display("read-out before acquisition ended"); end
    end else if (pcnt > 0) begin
      pcnt--; if (pcnt == 0) pkt_busy <= 0;
    end
    if (done) begin
      dn++;
      checks++;
      if (pkt_busy) begin failures++; $display("done during read-out"); end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int c = 0; c < 2; c++) begin
      num_sets <= (c == 0) ? 5'd0 : 5'd3;
      exp_sets = (c == 0) ? 5'(NSETS) : 5'd3;
      @(posedge clk); start <= 1;
      @(posedge clk); start <= 0;
      repeat (10) @(posedge clk);
      start <= 1;                    // ignored: already busy
      @(posedge clk); start <= 0;
      wait (done);
      repeat (2) @(posedge clk);
      x_end = -1;
      checks++;
      if (busy) begin failures++; $display("busy after done"); end
    end
    checks += 4;
    if (xs != 2) begin failures++; $display("x_start %0d", xs); end
    if (ps != 2) begin failures++; $display("pkt_start %0d", ps); end
    if (dn != 2) begin failures++; $display("done %0d", dn); end
    if (cycle != 16'd2) begin failures++; $display("cycle %0d", cycle); end
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

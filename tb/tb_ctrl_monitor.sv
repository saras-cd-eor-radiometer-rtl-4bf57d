// tb_ctrl_monitor -- exercises the register set: start/sync pulses, state
// tag read-back, the set-count register (reset value and write), status bits, and ADC register writes and reads over SPI
// to two behavioural ADC register models (the write must land in the
// selected ADC only and the read must return the model's register).
module tb_ctrl_monitor;
  logic clk = 0, rst_n = 0;
  logic [3:0] addr = 0;
  logic wr = 0;
  logic [31:0] wdata = 0, rdata;
  logic acq_start, sync_req;
  logic [7:0] state_tag;
  logic [4:0] num_sets;
  logic acq_busy = 0, synced = 1, overflow = 0;
  logic [15:0] cycle = 16'd7;
  logic spi_sclk, spi_mosi, spi_miso;
  logic [1:0] spi_cs_n;
  logic miso0, miso1;
  int checks = 0, failures = 0, starts = 0, syncs = 0;

  ctrl_monitor #(.SPI_DIV(2)) dut (.*);
  adc_spi_model adc0 (.sclk(spi_sclk), .cs_n(spi_cs_n[0]), .mosi(spi_mosi), .miso(miso0));
  adc_spi_model adc1 (.sclk(spi_sclk), .cs_n(spi_cs_n[1]), .mosi(spi_mosi), .miso(miso1));
  assign spi_miso = !spi_cs_n[0] ? miso0 : miso1;

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    if (acq_start) starts++;
    if (sync_req) syncs++;
  end

  task automatic wreg(input logic [3:0] a, input logic [31:0] d);
    @(posedge clk); addr <= a; wdata <= d; wr <= 1;
    @(posedge clk); wr <= 0;
  endtask

  task automatic rreg(input logic [3:0] a, output logic [31:0] d);
    @(posedge clk); addr <= a;
    @(posedge clk); #1 d = rdata;
  endtask

  task automatic spi_wait();
    logic [31:0] st;
    do rreg(4'd1, st); while (st[2]);
  endtask

  initial begin
    logic [31:0] v;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // each control bit alone, then both together
    wreg(4'd0, 32'h1);
    repeat (2) @(posedge clk);
    checks += 2;
    if (starts != 1) begin failures++; $display("start bit: starts %0d", starts); end
    if (syncs != 0) begin failures++; $display("start bit: syncs %0d", syncs); end
    wreg(4'd0, 32'h2);
    repeat (2) @(posedge clk);
    checks += 2;
    if (starts != 1) begin failures++; $display("sync bit: starts %0d", starts); end
    if (syncs != 1) begin failures++; $display("sync bit: syncs %0d", syncs); end
    wreg(4'd0, 32'h3);
    repeat (2) @(posedge clk);
    checks += 2;
    if (starts != 2) begin failures++; $display("starts %0d", starts); end
    if (syncs != 2) begin failures++; $display("syncs %0d", syncs); end
    wreg(4'd2, 32'hA7);
    rreg(4'd2, v);
    checks += 2;
    if (v != 32'hA7 || state_tag != 8'hA7) begin failures++; $display("tag"); end
    rreg(4'd5, v);
    checks += 2;
    if (v != 32'd16 || num_sets != 5'd16) begin failures++; $display("set count reset %0d", v); end
    wreg(4'd5, 32'd3);
    rreg(4'd5, v);
    if (v != 32'd3 || num_sets != 5'd3) begin failures++; $display("set count %0d", v); end
    acq_busy = 1; overflow = 1;
    rreg(4'd1, v);
    if (v != {16'd7, 12'd0, 1'b1, 1'b0, 1'b1, 1'b1}) begin failures++; $display("status %h", v); end
    // write ADC1 register 0x15 = 0xBEEF, then read it back and read ADC0 0x15
    wreg(4'd3, {7'd0, 1'b1, 1'b1, 7'h15, 16'hBEEF});
    spi_wait();
    wreg(4'd3, {7'd0, 1'b1, 1'b0, 7'h15, 16'h0000});
    spi_wait();
    rreg(4'd4, v);
    checks += 4;
    if (v[15:0] != 16'hBEEF) begin failures++; $display("ADC1 read %h", v[15:0]); end
    if (adc1.regs[7'h15] != 16'hBEEF) begin failures++; $display("ADC1 not written"); end
    if (adc0.regs[7'h15] != 16'h1515) begin failures++; $display("ADC0 written"); end
    wreg(4'd3, {7'd0, 1'b0, 1'b0, 7'h2A, 16'h0000});
    spi_wait();
    rreg(4'd4, v);
    if (v[15:0] != 16'h2A2A) begin failures++; $display("ADC0 read %h", v[15:0]); end
    checks++;
    if (adc0.frames != 1 || adc1.frames != 2) begin failures++; $display("frames %0d %0d", adc0.frames, adc1.frames); end
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

// tb_adc_sync -- checks the start-up synchronization and a requested one:
// SYNC high for exactly SYNC_W clocks, the datapath held in reset SETTLE
// more clocks, then released with synced high; requests are repeated.
module tb_adc_sync;
  localparam int SYNC_W = 5, SETTLE = 9;
  logic clk = 0, rst_n = 0, req = 0;
  logic sync_out, dp_rst_n, synced;
  int checks = 0, failures = 0, hi = 0, lo = 0, cyc = 0;

  adc_sync #(.SYNC_W(SYNC_W), .SETTLE(SETTLE)) dut (.*);

  always #5 clk = ~clk;

  task automatic measure(input bit startup);
    hi = 0; lo = 0;
    while (!sync_out) @(posedge clk);
    while (sync_out) begin hi++; checks++; if (dp_rst_n) failures++; @(posedge clk); end
    while (!dp_rst_n) begin lo++; @(posedge clk); end
    checks += 3;
    if (startup ? (hi < SYNC_W || hi > SYNC_W + 1) : (hi != SYNC_W)) begin failures++; $display("sync width %0d", hi); end
    if (lo != SETTLE) begin failures++; $display("settle %0d", lo); end
    if (!synced) failures++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    measure(1);  // SYNC is already high while in reset
    for (int i = 0; i < 3; i++) begin
      repeat (7) @(posedge clk);
      checks++;
      if (sync_out || !dp_rst_n) failures++;
      req <= 1; @(posedge clk); req <= 0;
      measure(0);
    end
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

// tb_packetizer -- reads out a 2-set, 16-channel buffer in frames of 4
// channels through a MAC that refuses bytes at random.  A memory model of
// the buffer answers the read port with one clock of latency.  Each frame is
// parsed byte by byte: Ethernet type, IPv4 header fields and checksum
// (recomputed here), UDP length, marker, state tag, set/product, first
// channel, cycle count and every 48-bit value.  Frames must come in the
// documented order, with no gap inside a frame, and done must pulse once.
// A second read-out with the set count programmed to 1 must stop after the
// frames of set 0.
module tb_packetizer;
  import saras_pkg::*;
  localparam int NSETS = 2, NCH = 16, CPP = 4, VB = 6;
  localparam int FLEN = 50 + CPP * VB;
  logic clk = 0, rst_n = 0, start = 0;
  logic [7:0] state_tag = 8'h3C;
  logic [15:0] cycle = 16'h1234;
  logic [1:0] num_sets = 2'(NSETS);
  logic rd_en;
  logic [0:0] rd_set;
  prod_e rd_prod;
  logic [3:0] rd_ch;
  logic [47:0] rd_data;
  logic [7:0] tx_data;
  logic tx_valid, tx_last, tx_ready, busy, done;
  logic [47:0] mem [NSETS][4][NCH];
  byte unsigned fr [$];
  int checks = 0, failures = 0, frames = 0, ndone = 0, stalls = 0;
  bit in_frame = 0;

  packetizer #(.NSETS(NSETS), .NCH(NCH), .CH_PER_PKT(CPP)) dut (.*);

  always #5 clk = ~clk;

  always_ff @(posedge clk) if (rd_en) rd_data <= mem[rd_set][rd_prod][rd_ch];

  task automatic check_frame();
    int s, p, b, sum;
    int exp_set, exp_prod, exp_blk;
    exp_blk = frames % (NCH / CPP);
    exp_prod = (frames / (NCH / CPP)) % 4;
    exp_set = frames / (NCH / CPP) / 4;
    checks += 8;
    if (fr.size() != FLEN) begin failures++; $display("frame %0d length %0d", frames, fr.size()); return; end
    if (fr[12] != 8'h08 || fr[13] != 8'h00) begin failures++; $display("ethertype"); end
    if (fr[14] != 8'h45 || fr[23] != 8'd17) begin failures++; $display("ip version/protocol"); end
    if ({fr[16], fr[17]} != 16'(FLEN - 14)) begin failures++; $display("ip length"); end
    sum = 0;
    for (int i = 14; i < 34; i += 2) sum += {fr[i], fr[i + 1]};
    while (sum > 16'hFFFF) sum = (sum & 16'hFFFF) + (sum >> 16);
    if (sum != 16'hFFFF) begin failures++; $display("ip checksum"); end
    if ({fr[38], fr[39]} != 16'(FLEN - 34)) begin failures++; $display("udp length"); end
    if ({fr[42], fr[43]} != 16'h5A5A || fr[44] != state_tag || {fr[48], fr[49]} != cycle) begin
      failures++; $display("payload header");
    end
    if (fr[45] != {4'(exp_set), 2'b00, 2'(exp_prod)} || {fr[46], fr[47]} != 16'(exp_blk * CPP)) begin
      failures++; $display("frame %0d order: id %h ch %0d", frames, fr[45], {fr[46], fr[47]});
    end
    for (int v = 0; v < CPP; v++) begin
      logic [47:0] w;
      for (int k = 0; k < VB; k++) w = {w[39:0], fr[50 + v * VB + k]};
      checks++;
      if (w != mem[exp_set][exp_prod][exp_blk * CPP + v]) begin
        failures++; $display("frame %0d value %0d: %h", frames, v, w);
      end
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    tx_ready <= ($urandom_range(3) != 0);
    if (done) ndone++;
    if (in_frame && !tx_valid) begin failures++; $display("gap inside a frame"); end
    if (tx_valid && !tx_ready) stalls++;
    if (tx_valid && tx_ready) begin
      fr.push_back(tx_data);
      in_frame = 1;
      if (tx_last) begin
        check_frame();
        frames++;
        fr.delete();
        in_frame = 0;
      end
    end
  end

  initial begin
    for (int s = 0; s < NSETS; s++)
      for (int p = 0; p < 4; p++)
        for (int c = 0; c < NCH; c++) mem[s][p][c] = {$urandom, $urandom};
    tx_ready = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    wait (done);
    repeat (5) @(posedge clk);
    checks += 3;
    if (frames != NSETS * 4 * NCH / CPP) begin failures++; $display("frames %0d", frames); end
    if (ndone != 1) begin failures++; $display("done pulses %0d", ndone); end
    if (busy) begin failures++; $display("busy after done"); end
    frames = 0;
    num_sets <= 2'd1;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    num_sets <= 2'(NSETS);         // sampled at start only
    wait (done);
    repeat (5) @(posedge clk);
    checks += 2;
    if (frames != 4 * NCH / CPP) begin failures++; $display("one set: frames %0d", frames); end
    if (ndone != 2) begin failures++; $display("done pulses %0d", ndone); end
    $display("stalled bytes: %0d", stalls);
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

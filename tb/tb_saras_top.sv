// tb_saras_top -- end-to-end test of the spectrometer at reduced size
// (64-point transform, 4 spectra per integration, 2 integrations per
// acquisition cycle, 8 channels per frame).
//
// The two ADC inputs carry sample streams that repeat every transform block
// (a tone plus a fixed pseudo-random pattern, different per input), so every
// spectrum is the same and the expected integrated spectra are NACC times
// the power and cross spectra of one windowed block, computed here in
// floating point.  The ADC models restart their sample count when the
// capture path leaves synchronization, as real ADCs restart on SYNC.
// The host programs an ADC register over SPI, requests a SYNC, sets a
// receiver state tag and runs three acquisition cycles with different tags
// (the third with the set count programmed to 1) while the MAC side refuses
// bytes at random.  Every frame is parsed and
// every received value is checked against the reference (within the
// fixed-point error of the FFT).  Each mechanism (start-up and requested
// SYNC, SPI access, acquisition cycle, integration, frame, MAC back-pressure,
// state tag change, shortened cycle) is counted and must occur.
module tb_saras_top;
  import saras_pkg::*;
  localparam int NFFT = 64, NACC = 4, NSETS = 2, CPP = 8;
  localparam int NC = NFFT / 2, VB = 6, FLEN = 50 + CPP * VB;
  localparam real PI = 3.14159265358979;
  localparam real TOL = 10.0;   // amplitude error allowed per FFT bin, LSB

  logic clk = 0, rst_n = 0;
  adc_t adc_a_rise, adc_a_fall, adc_b_rise, adc_b_fall;
  logic adc_sync_out, spi_sclk, spi_mosi, spi_miso;
  logic [1:0] spi_cs_n;
  logic [3:0] host_addr = 0;
  logic host_wr = 0;
  logic [31:0] host_wdata = 0, host_rdata;
  logic [7:0] tx_data;
  logic tx_valid, tx_last, tx_ready = 0;

  saras_top #(.P_NFFT(NFFT), .P_NACC(NACC), .P_NSETS(NSETS), .P_CH_PER_PKT(CPP),
              .P_SYNC_W(4), .P_SETTLE(8), .P_SPI_DIV(2)) dut (.*);

  logic miso0, miso1;
  adc_spi_model adc0 (.sclk(spi_sclk), .cs_n(spi_cs_n[0]), .mosi(spi_mosi), .miso(miso0));
  adc_spi_model adc1 (.sclk(spi_sclk), .cs_n(spi_cs_n[1]), .mosi(spi_mosi), .miso(miso1));
  assign spi_miso = !spi_cs_n[0] ? miso0 : miso1;

  always #2 clk = ~clk;

  int checks = 0, failures = 0;
  int n_sync = 0, n_spi = 0, n_cycles = 0, n_int = 0, n_frames = 0, n_stall = 0, n_tags = 0, n_short = 0;

  // ---------------- ADC models ----------------
  int pat_a [NFFT], pat_b [NFFT];
  int ns = 0;
  function automatic int sa(int n); return pat_a[n % NFFT]; endfunction
  function automatic int sb(int n); return pat_b[n % NFFT]; endfunction
  always @(posedge clk) ns <= dut.dp_rst_n ? ns + 2 : 0;
  assign adc_a_rise = 10'(sa(ns));
  assign adc_a_fall = 10'(sa(ns + 1));
  assign adc_b_rise = 10'(sb(ns));
  assign adc_b_fall = 10'(sb(ns + 1));

  // ---------------- reference spectra ----------------
  real xar [NC], xai [NC], xbr [NC], xbi [NC];
  function automatic int wq(int v, int i);
    real a = 2.0 * PI * i / NFFT;
    real w = 0.3635819 - 0.4891775 * $cos(a) + 0.1365995 * $cos(2 * a) - 0.0106411 * $cos(3 * a);
    return int'((longint'(v) * longint'($rtoi(w * 262143.0 + 0.5))) >>> 10);
  endfunction
  function automatic real rabs(real v); return (v < 0) ? -v : v; endfunction

  task automatic reference();
    for (int k = 0; k < NC; k++) begin
      xar[k] = 0; xai[k] = 0; xbr[k] = 0; xbi[k] = 0;
      for (int n = 0; n < NFFT; n++) begin
        real c = $cos(-2.0 * PI * k * n / NFFT), s = $sin(-2.0 * PI * k * n / NFFT);
        xar[k] += wq(pat_a[n], n) * c; xai[k] += wq(pat_a[n], n) * s;
        xbr[k] += wq(pat_b[n], n) * c; xbi[k] += wq(pat_b[n], n) * s;
      end
      xar[k] /= NFFT; xai[k] /= NFFT; xbr[k] /= NFFT; xbi[k] /= NFFT;
    end
  endtask

  // ---------------- MAC side: frame parser ----------------
  byte unsigned fr [$];
  logic [7:0] cur_tag;
  int cur_cycle;

  task automatic check_value(int set, int prod, int ch, longint v);
    real ma, mb, e, tol;
    ma = $sqrt(xar[ch] * xar[ch] + xai[ch] * xai[ch]);
    mb = $sqrt(xbr[ch] * xbr[ch] + xbi[ch] * xbi[ch]);
    case (prod)
      0: begin e = NACC * (xar[ch] * xar[ch] + xai[ch] * xai[ch]); tol = NACC * (2 * TOL * ma + TOL * TOL); end
      1: begin e = NACC * (xbr[ch] * xbr[ch] + xbi[ch] * xbi[ch]); tol = NACC * (2 * TOL * mb + TOL * TOL); end
      2: begin e = NACC * (xar[ch] * xbr[ch] + xai[ch] * xbi[ch]); tol = NACC * (TOL * (ma + mb) + TOL * TOL); end
      default: begin e = NACC * (xai[ch] * xbr[ch] - xar[ch] * xbi[ch]); tol = NACC * (TOL * (ma + mb) + TOL * TOL); end
    endcase
    checks++;
    if (rabs(real'(v) - e) > tol) begin
      failures++;
      if (failures < 12) $display("set %0d prod %0d ch %0d: got %0d exp %0.0f (tol %0.0f)", set, prod, ch, v, e, tol);
    end
  endtask

  task automatic check_frame();
    int set, prod, ch0;
    checks += 3;
    if (fr.size() != FLEN) begin failures++; $display("frame length %0d", fr.size()); return; end
    if ({fr[42], fr[43]} != 16'h5A5A) begin failures++; $display("marker"); end
    if (fr[44] != cur_tag || {fr[48], fr[49]} != 16'(cur_cycle)) begin
      failures++; $display("tag %h cycle %0d", fr[44], {fr[48], fr[49]});
    end
    set = fr[45] >> 4; prod = fr[45] & 3; ch0 = {fr[46], fr[47]};
    for (int v = 0; v < CPP; v++) begin
      logic signed [47:0] w;
      for (int k = 0; k < VB; k++) w = {w[39:0], fr[50 + v * VB + k]};
      check_value(set, prod, ch0 + v, longint'(w));
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    tx_ready <= ($urandom_range(4) != 0);
    if (tx_valid && !tx_ready) n_stall++;
    if (tx_valid && tx_ready) begin
      fr.push_back(tx_data);
      if (tx_last) begin
        check_frame();
        n_frames++;
        fr.delete();
      end
    end
    if (dut.x_done) n_int++;
  end

  logic sync_q = 0;
  always @(posedge clk) begin
    sync_q <= adc_sync_out;
    if (adc_sync_out && !sync_q) n_sync++;
  end

  // ---------------- host ----------------
  task automatic wreg(input logic [3:0] a, input logic [31:0] d);
    @(posedge clk); host_addr <= a; host_wdata <= d; host_wr <= 1;
    @(posedge clk); host_wr <= 0;
  endtask
  task automatic rreg(input logic [3:0] a, output logic [31:0] d);
    @(posedge clk); host_addr <= a;
    @(posedge clk); #1 d = host_rdata;
  endtask
  task automatic wait_status(input int bitn);
    logic [31:0] st;
    do rreg(4'd1, st); while (st[bitn]);
  endtask

  initial begin
    logic [31:0] v;
    for (int n = 0; n < NFFT; n++) begin
      pat_a[n] = $rtoi(300.0 * $cos(2.0 * PI * 5 * n / NFFT)) + $urandom_range(160) - 80;
      pat_b[n] = $rtoi(200.0 * $cos(2.0 * PI * 5 * n / NFFT + 0.7))
               + $rtoi(150.0 * $sin(2.0 * PI * 11.5 * n / NFFT)) + $urandom_range(100) - 50;
    end
    reference();
    repeat (4) @(posedge clk);
    rst_n <= 1;
    // configure ADC 2 through the register set (SPI), read it back
    wreg(4'd3, {7'd0, 1'b1, 1'b1, 7'h01, 16'h0003});
    wait_status(2);
    wreg(4'd3, {7'd0, 1'b1, 1'b0, 7'h01, 16'h0000});
    wait_status(2);
    rreg(4'd4, v);
    checks++;
    if (v[15:0] != 16'h0003) begin failures++; $display("SPI read-back %h", v[15:0]); end
    else n_spi++;
    // synchronize the ADCs
    wreg(4'd0, 32'h2);
    repeat (2) @(posedge clk);
    do rreg(4'd1, v); while (!v[1]);
    // three acquisition cycles in three receiver states, the last one
    // with a single integration
    for (int c = 0; c < 3; c++) begin
      cur_tag = (c == 0) ? 8'hA0 : (c == 1) ? 8'hB1 : 8'hC2;
      cur_cycle = c;
      wreg(4'd2, {24'd0, cur_tag});
      n_tags++;
      if (c == 2) begin
        wreg(4'd5, 32'd1);
        n_short++;
      end
      wreg(4'd0, 32'h1);
      repeat (2) @(posedge clk);
      wait_status(0);
      n_cycles++;
    end
    repeat (5) @(posedge clk);
    rreg(4'd1, v);
    checks += 4;
    if (v[31:16] != 16'd3) begin failures++; $display("cycle count %0d", v[31:16]); end
    if (v[3]) begin failures++; $display("capture overflow"); end
    if (n_frames != (2 * NSETS + 1) * 4 * NC / CPP) begin failures++; $display("frames %0d", n_frames); end
    if (n_int != 2 * NSETS + 1) begin failures++; $display("integrations %0d", n_int); end
    $display("mechanisms: sync=%0d spi=%0d cycles=%0d integrations=%0d frames=%0d stalls=%0d tag_changes=%0d short_cycles=%0d",
             n_sync, n_spi, n_cycles, n_int, n_frames, n_stall, n_tags, n_short);
    checks += 8;
    if (n_sync < 2) failures++;
    if (n_spi < 1) failures++;
    if (n_cycles < 2) failures++;
    if (n_int < 1) failures++;
    if (n_frames < 1) failures++;
    if (n_stall < 1) failures++;
    if (n_tags < 2) failures++;
    if (n_short < 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

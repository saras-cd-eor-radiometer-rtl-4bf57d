// tb_saras_top_full -- one acquisition cycle of the spectrometer at its full
// size: 16384-point transforms, 2048 spectra per integration (67.1 ms of
// signal at 250 MHz), then the read-out of 4 x 8192 words per set as UDP
// frames of 128 values.  The top is used with its default parameters.  The
// cycle is shortened from the default 16 integrations to RUN_SETS = 3
// through the set-count register, because simulating all 16 (268 million
// clocks) takes too long; the 16-set sequencing is covered by the
// reduced-size test.
//
// As in the reduced end-to-end test, both ADC streams repeat every 16384
// samples (tones plus a fixed pseudo-random pattern), so every integration
// equals 2048 times the spectra of one windowed block.  The reference DFT is
// evaluated here for a selection of channels (the tone channels, their
// neighbours and a spread of others); those channels are checked in every
// set, and every frame's header is checked.  The test also checks the
// integration period, 2048 x 8192 clocks.
module tb_saras_top_full;
  import saras_pkg::*;
  localparam int N = NFFT, NC = NFFT / 2, VB = 6, CPP = 128, FLEN = 50 + CPP * VB;
  localparam real PI = 3.14159265358979;
  localparam int RUN_SETS = 3;
  localparam real TOL = 24.0;   // amplitude error allowed per FFT bin, LSB

  logic clk = 0, rst_n = 0;
  adc_t adc_a_rise, adc_a_fall, adc_b_rise, adc_b_fall;
  logic adc_sync_out, spi_sclk, spi_mosi, spi_miso = 0;
  logic [1:0] spi_cs_n;
  logic [3:0] host_addr = 0;
  logic host_wr = 0;
  logic [31:0] host_wdata = 0, host_rdata;
  logic [7:0] tx_data;
  logic tx_valid, tx_last, tx_ready = 1;

  saras_top dut (.*);

  always #2 clk = ~clk;

  int checks = 0, failures = 0, n_frames = 0, n_int = 0, n_checked = 0;
  longint cyc = 0, last_int = -1;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- ADC models ----------------
  int pat_a [N], pat_b [N];
  int ns = 0;
  always @(posedge clk) ns <= dut.dp_rst_n ? (ns + 2) % N : 0;
  assign adc_a_rise = 10'(pat_a[ns]);
  assign adc_a_fall = 10'(pat_a[ns + 1]);
  assign adc_b_rise = 10'(pat_b[ns]);
  assign adc_b_fall = 10'(pat_b[ns + 1]);

  // ---------------- reference for selected channels ----------------
  real xar [NC], xai [NC], xbr [NC], xbi [NC];
  bit  sel [NC];
  int  wq_a [N], wq_b [N];
  function automatic real rabs(real v); return (v < 0) ? -v : v; endfunction

  task automatic reference();
    for (int n = 0; n < N; n++) begin
      real a = 2.0 * PI * n / N;
      real w = 0.3635819 - 0.4891775 * $cos(a) + 0.1365995 * $cos(2 * a) - 0.0106411 * $cos(3 * a);
      longint wi = longint'($rtoi(w * 262143.0 + 0.5));
      wq_a[n] = int'((longint'(pat_a[n]) * wi) >>> 10);
      wq_b[n] = int'((longint'(pat_b[n]) * wi) >>> 10);
    end
    for (int k = 0; k < NC; k++) begin
      sel[k] = (k % 509 == 3) || (k >= 1996 && k <= 2004) || (k >= 5117 && k <= 5123) || k == 0;
      if (sel[k]) begin
        xar[k] = 0; xai[k] = 0; xbr[k] = 0; xbi[k] = 0;
        for (int n = 0; n < N; n++) begin
          real ph, c, s;
          ph = 2.0 * PI * real'((k * n) % N) / real'(N);
          c = $cos(ph);
          s = 0.0 - $sin(ph);
          xar[k] += wq_a[n] * c; xai[k] += wq_a[n] * s;
          xbr[k] += wq_b[n] * c; xbi[k] += wq_b[n] * s;
        end
        xar[k] /= N; xai[k] /= N; xbr[k] /= N; xbi[k] /= N;
      end
    end
  endtask

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
    n_checked++;
    if (rabs(real'(v) - e) > tol) begin
      failures++;
      if (failures < 12) $display("set %0d prod %0d ch %0d: got %0d exp %0.0f (tol %0.0f)", set, prod, ch, v, e, tol);
    end
  endtask

  byte unsigned fr [$];
  task automatic check_frame();
    int set, prod, ch0, exp_id;
    checks += 2;
    if (fr.size() != FLEN) begin failures++; $display("frame length %0d", fr.size()); return; end
    set = fr[45] >> 4; prod = fr[45] & 3; ch0 = {fr[46], fr[47]};
    exp_id = n_frames;
    if ({fr[42], fr[43]} != 16'h5A5A || fr[44] != 8'h5E ||
        set != exp_id / (4 * NC / CPP) || prod != (exp_id / (NC / CPP)) % 4 ||
        ch0 != (exp_id % (NC / CPP)) * CPP) begin
      failures++; $display("frame %0d header: id %h ch %0d", n_frames, fr[45], ch0);
    end
    for (int v = 0; v < CPP; v++) begin
      logic signed [47:0] w;
      if (sel[ch0 + v]) begin
        for (int k = 0; k < VB; k++) w = {w[39:0], fr[50 + v * VB + k]};
        check_value(set, prod, ch0 + v, longint'(w));
      end
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (tx_valid && tx_ready) begin
      fr.push_back(tx_data);
      if (tx_last) begin
        check_frame();
        n_frames++;
        fr.delete();
      end
    end
    if (dut.x_done) begin
      n_int++;
      if (last_int >= 0) begin
        checks++;
        if (cyc - last_int != longint'(NACC) * NC) begin failures++; $display("integration period %0d", cyc - last_int); end
      end
      last_int = cyc;
      $display("integration %0d done at cycle %0d", n_int, cyc);
      $fflush();
    end
  end

  task automatic wreg(input logic [3:0] a, input logic [31:0] d);
    @(posedge clk); host_addr <= a; host_wdata <= d; host_wr <= 1;
    @(posedge clk); host_wr <= 0;
  endtask

  initial begin
    logic [31:0] v;
    for (int n = 0; n < N; n++) begin
      pat_a[n] = $rtoi(250.0 * $cos(2.0 * PI * 2000 * n / N)) + $urandom_range(120) - 60;
      pat_b[n] = $rtoi(180.0 * $cos(2.0 * PI * 2000 * n / N + 1.1))
               + $rtoi(120.0 * $sin(2.0 * PI * 5120.5 * n / N)) + $urandom_range(80) - 40;
    end
    reference();
    repeat (4) @(posedge clk);
    rst_n <= 1;
    wait (dut.synced);
    wreg(4'd2, 32'h5E);
    wreg(4'd5, 32'(RUN_SETS));
    wreg(4'd0, 32'h1);
    repeat (4) @(posedge clk);
    do begin
      #4000;
      host_addr <= 4'd1;
      @(posedge clk);
      #1 v = host_rdata;
    end while (v[0]);
    repeat (5) @(posedge clk);
    checks += 3;
    if (n_frames != RUN_SETS * 4 * NC / CPP) begin failures++; $display("frames %0d", n_frames); end
    if (n_int != RUN_SETS) begin failures++; $display("integrations %0d", n_int); end
    if (v[31:16] != 16'd1) begin failures++; $display("cycle count %0d", v[31:16]); end
    $display("frames=%0d integrations=%0d values checked=%0d cycles=%0d", n_frames, n_int, n_checked, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'd320_000_000);              // 80 million clocks
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

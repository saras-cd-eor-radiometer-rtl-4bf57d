// tb_x_engine -- X-engine with 8 channels, 4 spectra per integration and 3
// integrations per run.  Spectra stream continuously in bit-reversed channel
// order, as the F-engines deliver them; the start pulse arrives mid-spectrum,
// so the engine must wait for the next spectrum boundary.  Every output
// record (both powers, cross re/im) is compared with sums computed here,
// the set numbers must run 0,1,2, an integration must span NACC spectra
// (NACC*NCH clocks between int_done pulses), every record must hold exactly
// NACC spectra, and busy must fall afterwards.
module tb_x_engine;
  import saras_pkg::*;
  localparam int NCH = 8, NACC = 4, NSETS = 3, CHW = 3;
  logic clk = 0, rst_n = 0, start = 0;
  logic [1:0] num_int;
  cplx_t a_data, b_data;
  logic [CHW-1:0] in_ch, out_ch;
  logic in_valid = 0, in_sof = 0, out_valid, int_done, busy;
  corr_t out_corr;
  logic [1:0] out_set;
  int checks = 0, failures = 0, cyc = 0, spec = 0, run_start_spec = -1, ndone = 0, last_done = -1, nrec = 0;
  int nspec [NSETS][NCH];
  longint ea [NSETS][NCH], eb [NSETS][NCH], er [NSETS][NCH], ei [NSETS][NCH];

  x_engine #(.NCH(NCH), .NACC(NACC), .NSETS(NSETS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      checks += 5;
      nrec++;
      if (out_corr.auto_a != 48'(ea[out_set][out_ch])) begin failures++; $display("A set %0d ch %0d", out_set, out_ch); end
      if (out_corr.auto_b != 48'(eb[out_set][out_ch])) begin failures++; $display("B set %0d ch %0d", out_set, out_ch); end
      if (out_corr.cross_re != 48'(er[out_set][out_ch])) begin failures++; $display("Xr set %0d ch %0d", out_set, out_ch); end
      if (out_corr.cross_im != 48'(ei[out_set][out_ch])) begin failures++; $display("Xi set %0d ch %0d", out_set, out_ch); end
      if (int'(out_set) >= NSETS) failures++;
      else if (nspec[out_set][out_ch] != NACC) begin
        failures++; $display("set %0d ch %0d summed %0d spectra", out_set, out_ch, nspec[out_set][out_ch]);
      end
    end
    if (int_done) begin
      ndone++;
      if (last_done >= 0) begin
        checks++;
        if (cyc - last_done != NACC * NCH) begin failures++; $display("integration length %0d", cyc - last_done); end
      end
      last_done = cyc;
    end
  end

  initial begin
    num_int = 2'(NSETS);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (spec = 0; spec < 20; spec++)
      for (int p = 0; p < NCH; p++) begin
        int c, ar, ai, br, bi, rel, set, s;
        c = 0;
        for (int b = 0; b < CHW; b++) c |= ((p >> b) & 1) << (CHW - 1 - b);
        ar = $urandom_range(262143) - 131072; ai = $urandom_range(262143) - 131072;
        br = $urandom_range(262143) - 131072; bi = $urandom_range(262143) - 131072;
        a_data <= '{re: 18'(ar), im: 18'(ai)};
        b_data <= '{re: 18'(br), im: 18'(bi)};
        in_ch <= CHW'(c); in_valid <= 1; in_sof <= (p == 0);
        // start is pulsed in the middle of spectrum 2: spectra 3.. are used
        start <= (spec == 2 && p == 3);
        rel = spec - 3;
        if (rel >= 0 && rel < NSETS * NACC) begin
          set = rel / NACC; s = rel % NACC;
          if (s == 0) begin nspec[set][c] = 0; ea[set][c] = 0; eb[set][c] = 0; er[set][c] = 0; ei[set][c] = 0; end
          nspec[set][c]++;
          ea[set][c] += longint'(ar) * ar + longint'(ai) * ai;
          eb[set][c] += longint'(br) * br + longint'(bi) * bi;
          er[set][c] += longint'(ar) * br + longint'(ai) * bi;
          ei[set][c] += longint'(ai) * br - longint'(ar) * bi;
        end
        @(posedge clk);
      end
    in_valid <= 0;
    start <= 0;
    repeat (3) @(posedge clk);
    checks += 3;
    if (ndone != NSETS) begin failures++; $display("integrations %0d", ndone); end
    if (nrec != NSETS * NCH) begin failures++; $display("records %0d", nrec); end
    if (busy) begin failures++; $display("still busy"); end
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

// tb_spectra_buffer -- writes random records into every (set, channel) slot
// of a 4-set, 16-channel buffer, then reads back each product of each slot
// in random order and checks the word, the one-clock read latency and that
// rd_data holds while rd_en is low.
module tb_spectra_buffer;
  import saras_pkg::*;
  localparam int NSETS = 4, NCH = 16;
  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [1:0] wr_set, rd_set;
  logic [3:0] wr_ch, rd_ch;
  corr_t wr_data;
  prod_e rd_prod;
  logic [47:0] rd_data;
  corr_t model [NSETS][NCH];
  int checks = 0, failures = 0;

  spectra_buffer #(.NSETS(NSETS), .NCH(NCH)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [47:0] pick(corr_t r, int p);
    case (p)
      0: return r.auto_a;
      1: return r.auto_b;
      2: return r.cross_re;
      default: return r.cross_im;
    endcase
  endfunction

  initial begin
    for (int s = 0; s < NSETS; s++)
      for (int c = 0; c < NCH; c++) begin
        corr_t r;
        r = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
        model[s][c] = r;
        wr_en <= 1; wr_set <= 2'(s); wr_ch <= 4'(c); wr_data <= r;
        @(posedge clk);
      end
    wr_en <= 0;
    for (int n = 0; n < 300; n++) begin
      int s, c, p;
      logic [47:0] held;
      s = $urandom_range(NSETS - 1); c = $urandom_range(NCH - 1); p = $urandom_range(3);
      rd_en <= 1; rd_set <= 2'(s); rd_ch <= 4'(c); rd_prod <= prod_e'(p);
      @(posedge clk);
      rd_en <= 0;
      #1;
      checks++;
      if (rd_data != pick(model[s][c], p)) begin failures++; $display("set %0d ch %0d prod %0d", s, c, p); end
      held = rd_data;
      rd_set <= 2'($urandom_range(NSETS - 1));
      @(posedge clk);
      #1;
      checks++;
      if (rd_data != held) begin failures++; $display("rd_data did not hold"); end
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

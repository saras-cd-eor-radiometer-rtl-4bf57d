// spectra_buffer -- holds the integrated spectra of one acquisition cycle.
//
// The paper buffers 16 sets of integrated spectra (16 x 67 ms = 1.07 s of
// data) and streams them out together, so that the receiver can be switched
// to another state between acquisition cycles.  Each set holds, for every
// channel, the two auto-power and the two cross-power words of one
// integration.  Here the buffer is a single memory of NSETS x NCH records
// (one corr_t per channel, written in one clock by the X-engine); the read
// port returns one word selected by product code.  Keeping the buffer on
// chip is this design's choice (the paper says only "within the pSPEC
// board").
//
// Interface and timing: write port wr_en/wr_set/wr_ch/wr_data.  Read port
// rd_en/rd_set/rd_prod/rd_ch; rd_data is registered, valid one clock after
// rd_en, and holds its value until the next rd_en.
module spectra_buffer
  import saras_pkg::corr_t, saras_pkg::prod_e, saras_pkg::PROD_AUTO_A,
         saras_pkg::PROD_AUTO_B, saras_pkg::PROD_CROSS_RE, saras_pkg::PROD_CROSS_IM, saras_pkg::ACC_W;
#(
  parameter int NSETS = 16,
  parameter int NCH   = 8192
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(NSETS)-1:0] wr_set,
  input  logic [$clog2(NCH)-1:0]   wr_ch,
  input  corr_t                    wr_data,
  input  logic                     rd_en,
  input  logic [$clog2(NSETS)-1:0] rd_set,
  input  prod_e                    rd_prod,
  input  logic [$clog2(NCH)-1:0]   rd_ch,
  output logic [ACC_W-1:0]         rd_data
);

  corr_t mem [NSETS * NCH];
  corr_t rec;

  always_ff @(posedge clk) begin
    if (wr_en) mem[{wr_set, wr_ch}] <= wr_data;
  end

  assign rec = mem[{rd_set, rd_ch}];

  always_ff @(posedge clk) begin
    if (rd_en) begin
      unique case (rd_prod)
        PROD_AUTO_A:   rd_data <= rec.auto_a;
        PROD_AUTO_B:   rd_data <= rec.auto_b;
        PROD_CROSS_RE: rd_data <= rec.cross_re;
        PROD_CROSS_IM: rd_data <= rec.cross_im;
        default:       rd_data <= rec.auto_a;
      endcase
    end
  end

endmodule

// saras_top -- FPGA firmware of the SARAS digital correlation spectrometer.
//
// Two baseband signals (0-250 MHz) are sampled at 500 MSps by two cores of
// the board's quad ADCs.  For each signal the samples are deserialized,
// reduced to an even and an odd sample path, windowed with a minimum 4-term
// window and channelized by a 16384-point split FFT (two 8192-point pipelined
// FFTs, a phase rotation and a 2-point FFT) into 8192 complex channels every
// 32.768 us.  The X-engine integrates the two power spectra and the complex
// cross spectrum over 2048 spectra (67.1 ms); 16 such integrations are
// buffered (1.07 s) and then sent as UDP frames to the Ethernet MAC.  A
// register set gives the host control of acquisition, ADC synchronization
// and ADC configuration over SPI; one register can shorten a cycle to fewer
// than 16 integrations (an addition of this design, for tests).  The chain and its numbers follow the
// paper; widths after the FFT, scaling, the frame layout, the register map
// and the sequencing are this design's.
//
// Clocking: everything runs on one clock, the paper's 250 MHz core clock.
// Each ADC delivers two samples per clock (its DDR outputs).  The clock
// generation and the Ethernet MAC are outside this module.
//
// Interface: adc_{a,b}_{rise,fall} ADC samples; adc_sync_out the common SYNC
// pin; spi_* to the two ADCs; host_* register bus; tx_* byte stream to the
// MAC client port (valid/ready, last on a frame's final byte).
module saras_top
  import saras_pkg::*;
#(
  parameter int P_NFFT       = 16384,
  parameter int P_NACC       = 2048,
  parameter int P_NSETS      = 16,
  parameter int P_CH_PER_PKT = 128,
  parameter int P_SYNC_W     = 16,
  parameter int P_SETTLE     = 64,
  parameter int P_SPI_DIV    = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  adc_t        adc_a_rise,
  input  adc_t        adc_a_fall,
  input  adc_t        adc_b_rise,
  input  adc_t        adc_b_fall,
  output logic        adc_sync_out,
  output logic        spi_sclk,
  output logic        spi_mosi,
  output logic [1:0]  spi_cs_n,
  input  logic        spi_miso,
  input  logic [3:0]  host_addr,
  input  logic        host_wr,
  input  logic [31:0] host_wdata,
  output logic [31:0] host_rdata,
  output logic [7:0]  tx_data,
  output logic        tx_valid,
  output logic        tx_last,
  input  logic        tx_ready
);

  localparam int NC  = P_NFFT / 2;
  localparam int CHW = $clog2(NC);
  localparam int SW  = $clog2(P_NSETS);

  // ---------------- control ----------------
  logic        acq_start, sync_req, synced, dp_rst_n, sync_rst_n;
  logic [7:0]  state_tag;
  logic [$clog2(P_NSETS+1)-1:0] reg_nsets;
  logic        acq_busy, acq_done;
  logic [15:0] cycle;
  logic        ovf_a, ovf_b;

  adc_sync #(.SYNC_W(P_SYNC_W), .SETTLE(P_SETTLE)) u_sync (
    .clk(clk), .rst_n(rst_n), .req(sync_req),
    .sync_out(adc_sync_out), .dp_rst_n(sync_rst_n), .synced(synced)
  );
  assign dp_rst_n = rst_n && sync_rst_n;

  ctrl_monitor #(.SPI_DIV(P_SPI_DIV), .NSETS(P_NSETS)) u_ctrl (
    .clk(clk), .rst_n(rst_n),
    .addr(host_addr), .wr(host_wr), .wdata(host_wdata), .rdata(host_rdata),
    .acq_start(acq_start), .sync_req(sync_req), .state_tag(state_tag),
    .num_sets(reg_nsets),
    .acq_busy(acq_busy), .synced(synced), .overflow(ovf_a || ovf_b), .cycle(cycle),
    .spi_sclk(spi_sclk), .spi_mosi(spi_mosi), .spi_cs_n(spi_cs_n), .spi_miso(spi_miso)
  );

  // ---------------- capture and F-engines ----------------
  adc_t  ser_a [4], ser_b [4];
  logic  ser_a_v, ser_b_v;
  adc_t  ev_a, od_a, ev_b, od_b;
  logic  buf_a_v, buf_b_v;
  cplx_t fa, fb, fa_hi, fb_hi;
  logic [CHW-1:0] ch_a, ch_b;
  logic  fa_v, fa_sof, fb_v, fb_sof;

  iserdes_1to4 #(.W(ADC_W)) u_ser_a (
    .clk(clk), .rst_n(dp_rst_n), .d_rise(adc_a_rise), .d_fall(adc_a_fall),
    .q(ser_a), .q_valid(ser_a_v)
  );
  iserdes_1to4 #(.W(ADC_W)) u_ser_b (
    .clk(clk), .rst_n(dp_rst_n), .d_rise(adc_b_rise), .d_fall(adc_b_fall),
    .q(ser_b), .q_valid(ser_b_v)
  );

  adc_data_buffer #(.W(ADC_W)) u_buf_a (
    .clk(clk), .rst_n(dp_rst_n), .in_data(ser_a), .in_valid(ser_a_v),
    .out_even(ev_a), .out_odd(od_a), .out_valid(buf_a_v), .overflow(ovf_a)
  );
  adc_data_buffer #(.W(ADC_W)) u_buf_b (
    .clk(clk), .rst_n(dp_rst_n), .in_data(ser_b), .in_valid(ser_b_v),
    .out_even(ev_b), .out_odd(od_b), .out_valid(buf_b_v), .overflow(ovf_b)
  );

  f_engine #(.NFFT(P_NFFT)) u_feng_a (
    .clk(clk), .rst_n(dp_rst_n), .in_even(ev_a), .in_odd(od_a), .in_valid(buf_a_v),
    .out_data(fa), .out_hi(fa_hi), .out_ch(ch_a), .out_valid(fa_v), .out_sof(fa_sof)
  );
  f_engine #(.NFFT(P_NFFT)) u_feng_b (
    .clk(clk), .rst_n(dp_rst_n), .in_even(ev_b), .in_odd(od_b), .in_valid(buf_b_v),
    .out_data(fb), .out_hi(fb_hi), .out_ch(ch_b), .out_valid(fb_v), .out_sof(fb_sof)
  );

  // ---------------- X-engine, buffer, packetizer ----------------
  logic        x_start, x_busy, x_valid, x_done;
  logic [$clog2(P_NSETS+1)-1:0] x_num;
  corr_t       x_corr;
  logic [CHW-1:0] x_ch;
  logic [SW-1:0]  x_set;
  logic        pkt_start, pkt_busy, pkt_done;
  logic        rd_en;
  logic [SW-1:0]  rd_set;
  prod_e       rd_prod;
  logic [CHW-1:0] rd_ch;
  logic [ACC_W-1:0] rd_data;

  x_engine #(.NCH(NC), .NACC(P_NACC), .NSETS(P_NSETS)) u_xeng (
    .clk(clk), .rst_n(rst_n), .start(x_start), .num_int(x_num),
    .a_data(fa), .b_data(fb), .in_ch(ch_a), .in_valid(fa_v), .in_sof(fa_sof),
    .out_corr(x_corr), .out_ch(x_ch), .out_set(x_set), .out_valid(x_valid),
    .int_done(x_done), .busy(x_busy)
  );

  spectra_buffer #(.NSETS(P_NSETS), .NCH(NC)) u_sbuf (
    .clk(clk),
    .wr_en(x_valid), .wr_set(x_set), .wr_ch(x_ch), .wr_data(x_corr),
    .rd_en(rd_en), .rd_set(rd_set), .rd_prod(rd_prod), .rd_ch(rd_ch), .rd_data(rd_data)
  );

  acq_ctrl #(.NSETS(P_NSETS)) u_acq (
    .clk(clk), .rst_n(rst_n), .start(acq_start), .num_sets(reg_nsets),
    .x_start(x_start), .x_num_int(x_num), .x_busy(x_busy),
    .pkt_start(pkt_start), .pkt_busy(pkt_busy),
    .busy(acq_busy), .done(acq_done), .cycle(cycle)
  );

  packetizer #(.NSETS(P_NSETS), .NCH(NC), .CH_PER_PKT(P_CH_PER_PKT)) u_pkt (
    .clk(clk), .rst_n(rst_n), .start(pkt_start), .num_sets(x_num), .state_tag(state_tag), .cycle(cycle),
    .rd_en(rd_en), .rd_set(rd_set), .rd_prod(rd_prod), .rd_ch(rd_ch), .rd_data(rd_data),
    .tx_data(tx_data), .tx_valid(tx_valid), .tx_last(tx_last), .tx_ready(tx_ready),
    .busy(pkt_busy), .done(pkt_done)
  );

  // The two channels are reset and fed together, so their spectra coincide.
  always_ff @(posedge clk) begin
    if (dp_rst_n) begin
      assert (fa_v == fb_v && fa_sof == fb_sof && ch_a == ch_b)
        else $error("saras_top: F-engines out of step");
    end
  end

endmodule

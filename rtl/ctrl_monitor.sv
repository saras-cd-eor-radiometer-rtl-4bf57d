// ctrl_monitor -- host-visible control and status registers.
//
// In the paper a laptop controls the spectrometer through a small interface
// card (XPort) connected to the FPGA: it starts and monitors acquisition and
// reads and writes the ADC configuration registers through a dedicated set of
// registers inside the FPGA that are relayed to the ADCs over SPI.  This
// module is that register set.  The host bus and register map are this
// design's own:
//   0 CTRL    write: bit0 start acquisition cycle, bit1 ADC SYNC (pulses)
//   1 STATUS  read : bit0 acquisition busy, bit1 ADCs synchronized,
//                    bit2 SPI busy, bit3 capture overflow seen,
//                    [31:16] completed acquisition cycles
//   2 TAG     r/w  : [7:0] receiver state tag copied into every frame
//   3 SPI_CMD r/w  : [23:0] frame {rw, addr[6:0], data[15:0]}, [24] ADC
//                    select; a write starts the transfer
//   4 SPI_RD  read : [15:0] data returned by the last transfer
//   5 NSETS   r/w  : integrations per acquisition cycle, reset value NSETS
//                    (16, as in the paper); smaller values shorten a cycle
//
// Interface and timing: host bus with address, write strobe and write data;
// rdata is combinational from addr.  Pulses appear one clock after the
// write.
module ctrl_monitor #(
  parameter int SPI_DIV = 4,
  parameter int NSETS   = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [3:0]  addr,
  input  logic        wr,
  input  logic [31:0] wdata,
  output logic [31:0] rdata,
  output logic        acq_start,
  output logic        sync_req,
  output logic [7:0]  state_tag,
  output logic [$clog2(NSETS+1)-1:0] num_sets,
  input  logic        acq_busy,
  input  logic        synced,
  input  logic        overflow,
  input  logic [15:0] cycle,
  output logic        spi_sclk,
  output logic        spi_mosi,
  output logic [1:0]  spi_cs_n,
  input  logic        spi_miso
);

  typedef enum logic [3:0] {
    R_CTRL = 4'd0, R_STATUS = 4'd1, R_TAG = 4'd2, R_SPI_CMD = 4'd3, R_SPI_RD = 4'd4,
    R_NSETS = 4'd5
  } reg_e;

  logic [24:0] spi_cmd;
  logic        spi_go, spi_busy;
  logic [15:0] spi_rdata;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acq_start <= 1'b0;
      sync_req  <= 1'b0;
      state_tag <= '0;
      spi_cmd   <= '0;
      spi_go    <= 1'b0;
      num_sets  <= ($clog2(NSETS+1))'(NSETS);
    end else begin
      acq_start <= wr && (addr == R_CTRL) && wdata[0];
      sync_req  <= wr && (addr == R_CTRL) && wdata[1];
      spi_go    <= wr && (addr == R_SPI_CMD);
      if (wr && addr == R_TAG)     state_tag <= wdata[7:0];
      if (wr && addr == R_SPI_CMD) spi_cmd   <= wdata[24:0];
      if (wr && addr == R_NSETS)   num_sets  <= wdata[$clog2(NSETS+1)-1:0];
    end
  end

  always_comb begin
    unique case (addr)
      R_STATUS:  rdata = {cycle, 12'd0, overflow, spi_busy, synced, acq_busy};
      R_TAG:     rdata = {24'd0, state_tag};
      R_SPI_CMD: rdata = {7'd0, spi_cmd};
      R_SPI_RD:  rdata = {16'd0, spi_rdata};
      R_NSETS:   rdata = 32'(num_sets);
      default:   rdata = '0;
    endcase
  end

  spi_master #(.DIV(SPI_DIV), .NCS(2)) u_spi (
    .clk(clk), .rst_n(rst_n), .go(spi_go), .frame(spi_cmd[23:0]), .sel(spi_cmd[24]),
    .busy(spi_busy), .rdata(spi_rdata),
    .sclk(spi_sclk), .mosi(spi_mosi), .cs_n(spi_cs_n), .miso(spi_miso)
  );

endmodule

// spi_master -- serial access to the configuration registers of the ADCs.
//
// The ADCs' mode (four independent channels, two or one interleaved channel)
// and their offset, gain and phase registers are reached over SPI from the
// FPGA.  This master sends one 24-bit frame {rw, addr[6:0], data[15:0]}
// MSB first to the selected ADC, mode 0 (data changes on the falling edge of
// sclk and is sampled on the rising edge), and captures the last 16 bits
// returned on miso as read data.  The frame format and clocking are this
// design's assumptions.
//
// Interface and timing: a one-clock go with frame and sel starts a transfer
// (ignored while busy).  sclk runs at clk / (2*DIV).  busy stays high for
// 24 sclk periods plus one; rdata is valid when busy falls.
module spi_master #(
  parameter int DIV = 4,
  parameter int NCS = 2
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   go,
  input  logic [23:0]            frame,
  input  logic [$clog2(NCS)-1:0] sel,
  output logic                   busy,
  output logic [15:0]            rdata,
  output logic                   sclk,
  output logic                   mosi,
  output logic [NCS-1:0]         cs_n,
  input  logic                   miso
);

  logic [$clog2(DIV)-1:0] div;
  logic [4:0]             bitn;   // bits still to send
  logic [23:0]            sh;
  logic                   tick;

  assign tick = (div == ($clog2(DIV))'(DIV - 1));
  assign mosi = sh[23];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      sclk <= 1'b0;
      cs_n <= '1;
      div  <= '0;
      bitn <= '0;
    end else if (!busy) begin
      if (go) begin
        busy       <= 1'b1;
        sh         <= frame;
        bitn       <= 5'd24;
        div        <= '0;
        cs_n       <= '1;
        cs_n[sel]  <= 1'b0;
      end
    end else begin
      div <= tick ? '0 : div + 1'b1;
      if (tick) begin
        if (bitn == '0) begin
          busy <= 1'b0;
          cs_n <= '1;
        end else if (!sclk) begin
          sclk  <= 1'b1;                 // rising edge: sample
          rdata <= {rdata[14:0], miso};
        end else begin
          sclk <= 1'b0;                  // falling edge: shift
          sh   <= {sh[22:0], 1'b0};
          bitn <= bitn - 1'b1;
        end
      end
    end
  end

endmodule

// adc_spi_model -- behavioural model of the SPI register port of one ADC,
// for testbenches.  It shifts in a 24-bit frame {rw, addr[6:0], data[15:0]}
// on rising sclk edges while cs_n is low; rw = 1 writes data to a 128-entry
// register file, rw = 0 returns regs[addr] on miso during the 16 data bits
// (changed on falling edges).  Counts completed frames.
module adc_spi_model (
  input  logic sclk,
  input  logic cs_n,
  input  logic mosi,
  output logic miso
);
  logic [15:0] regs [128];
  logic [23:0] sh;
  int nbits = 0, frames = 0;
  logic [6:0] addr;
  logic       rw;

  initial begin
    for (int i = 0; i < 128; i++) regs[i] = 16'(i * 16'h0101);
    miso = 0;
  end

  always @(negedge cs_n) nbits = 0;

  always @(posedge sclk) if (!cs_n) begin
    sh = {sh[22:0], mosi};
    nbits++;
    if (nbits == 8) begin addr = sh[6:0]; rw = sh[7]; end
    if (nbits == 24) begin
      frames++;
      if (sh[23]) regs[sh[22:16]] = sh[15:0];
    end
  end

  always @(negedge sclk) if (!cs_n) begin
    if (nbits >= 8 && nbits < 24 && !rw) miso = regs[addr][23 - nbits];
    else miso = 0;
  end
endmodule

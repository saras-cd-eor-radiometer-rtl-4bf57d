// packetizer -- turns the buffered spectra into UDP/IPv4 Ethernet frames.
//
// After an acquisition cycle the num_sets integrations in the spectra buffer
// are streamed to the Ethernet MAC.  As in the paper, the spectra travel as
// UDP datagrams carrying data markers and identifiers; the layout below is
// this design's own:
//   14 bytes  Ethernet header (DST_MAC, SRC_MAC, type 0x0800)
//   20 bytes  IPv4 header (no options, identification 0, don't-fragment,
//             TTL 64, protocol 17); all its fields are constant, so its
//             checksum is computed at elaboration
//    8 bytes  UDP header (checksum 0, i.e. not used)
//    8 bytes  payload header: marker 0x5A5A, receiver state tag,
//             {set[3:0], 2'b00, product[1:0]}, first channel (16 bits),
//             acquisition cycle count (16 bits)
//   CH_PER_PKT x 6 bytes  48-bit words, big-endian, channels in order.
// Frames go out set by set, then product (auto A, auto B, cross re, cross
// im), then in blocks of CH_PER_PKT channels.  The MAC adds preamble and
// frame check sequence.
//
// Interface and timing: start begins a read-out of num_sets (1..NSETS,
// sampled at start) sets; the buffer read port
// rd_* is driven here and rd_data is expected one clock after rd_en and held
// until the next rd_en.  tx_* is a byte stream with valid/ready handshake
// and last on the final byte of a frame; within a frame tx_valid never
// drops.  done pulses after the last frame's last byte.
module packetizer
  import saras_pkg::prod_e, saras_pkg::ACC_W;
#(
  parameter int          NSETS      = 16,
  parameter int          NCH        = 8192,
  parameter int          CH_PER_PKT = 128,
  parameter logic [47:0] DST_MAC    = 48'hFF_FF_FF_FF_FF_FF,
  parameter logic [47:0] SRC_MAC    = 48'h02_00_00_00_00_01,
  parameter logic [31:0] SRC_IP     = {8'd192, 8'd168, 8'd1, 8'd10},
  parameter logic [31:0] DST_IP     = {8'd192, 8'd168, 8'd1, 8'd1},
  parameter logic [15:0] SRC_PORT   = 16'd5000,
  parameter logic [15:0] DST_PORT   = 16'd5000
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [$clog2(NSETS+1)-1:0] num_sets,
  input  logic [7:0]               state_tag,
  input  logic [15:0]              cycle,
  output logic                     rd_en,
  output logic [$clog2(NSETS)-1:0] rd_set,
  output prod_e                    rd_prod,
  output logic [$clog2(NCH)-1:0]   rd_ch,
  input  logic [ACC_W-1:0]         rd_data,
  output logic [7:0]               tx_data,
  output logic                     tx_valid,
  output logic                     tx_last,
  input  logic                     tx_ready,
  output logic                     busy,
  output logic                     done
);

  localparam int VB      = ACC_W / 8;               // bytes per value
  localparam int FIX_LEN = 42;                      // Ethernet + IPv4 + UDP
  localparam int HDR_LEN = FIX_LEN + 8;
  localparam int UDP_LEN = 8 + 8 + CH_PER_PKT * VB;
  localparam int IP_LEN  = 20 + UDP_LEN;
  localparam int NBLK    = NCH / CH_PER_PKT;
  localparam int SW      = $clog2(NSETS);
  localparam int CHW     = $clog2(NCH);
  localparam int BW      = (NBLK > 1) ? $clog2(NBLK) : 1;
  localparam int VW      = $clog2(CH_PER_PKT + 1);

  function automatic logic [15:0] ip_checksum();
    logic [15:0] w [10];
    logic [31:0] s;
    w = '{16'h4500, 16'(IP_LEN), 16'h0000, 16'h4000, 16'h4011, 16'h0000,
          SRC_IP[31:16], SRC_IP[15:0], DST_IP[31:16], DST_IP[15:0]};
    s = 0;
    for (int i = 0; i < 10; i++) s += 32'(w[i]);
    s = (s & 32'hFFFF) + (s >> 16);
    s = (s & 32'hFFFF) + (s >> 16);
    return ~s[15:0];
  endfunction

  localparam logic [FIX_LEN*8-1:0] FIX_HDR = {
    DST_MAC, SRC_MAC, 16'h0800,
    16'h4500, 16'(IP_LEN), 16'h0000, 16'h4000, 8'd64, 8'd17, ip_checksum(),
    SRC_IP, DST_IP,
    SRC_PORT, DST_PORT, 16'(UDP_LEN), 16'h0000
  };

  typedef enum logic [1:0] {IDLE, HDR, DATA} state_e;
  state_e state;

  logic [SW-1:0]      set;
  prod_e              prod;
  logic [BW-1:0]      blk;
  logic [$clog2(HDR_LEN)-1:0] bidx;
  logic [VW-1:0]      vidx;
  logic [2:0]         vbyte;
  logic [ACC_W-1:0]   cur;
  logic [CHW-1:0]     base;
  logic [63:0]        phdr;
  logic               fire, last_pkt;
  logic [$clog2(NSETS+1)-1:0] nsets_q;

  assign base     = CHW'(blk) * CHW'(CH_PER_PKT);
  assign phdr     = {16'h5A5A, state_tag, 4'(set), 2'b00, 2'(prod), 16'(base), cycle};
  assign fire     = tx_valid && tx_ready;
  assign last_pkt = (set == SW'(nsets_q - 1'b1)) && (prod == prod_e'(2'd3)) &&
                    (blk == BW'(NBLK - 1));
  assign tx_valid = (state != IDLE);
  assign tx_last  = (state == DATA) && (vbyte == 3'(VB - 1)) &&
                    (vidx == VW'(CH_PER_PKT - 1));
  assign busy     = (state != IDLE);
  assign rd_set   = set;
  assign rd_prod  = prod;

  always_comb begin
    if (state == HDR)
      tx_data = (int'(bidx) < FIX_LEN) ? FIX_HDR[8*(FIX_LEN-1-int'(bidx)) +: 8]
                                 : phdr[8*(HDR_LEN-1-int'(bidx)) +: 8];
    else
      tx_data = cur[8*(VB-1-int'(vbyte)) +: 8];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= IDLE;
      rd_en <= 1'b0;
      done  <= 1'b0;
      set   <= '0;
      prod  <= prod_e'(2'd0);
      blk   <= '0;
      bidx  <= '0;
      vidx  <= '0;
      vbyte <= '0;
    end else begin
      rd_en <= 1'b0;
      done  <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          state <= HDR;
          nsets_q <= num_sets;
          set   <= '0;
          prod  <= prod_e'(2'd0);
          blk   <= '0;
          bidx  <= '0;
          rd_en <= 1'b1;          // fetch value 0 of the first frame
          rd_ch <= '0;
        end
        HDR: if (fire) begin
          if (bidx == $bits(bidx)'(HDR_LEN - 1)) begin
            state <= DATA;
            cur   <= rd_data;     // value 0
            vidx  <= '0;
            vbyte <= '0;
            rd_en <= (CH_PER_PKT > 1);
            rd_ch <= base + CHW'(1);
          end else begin
            bidx <= bidx + 1'b1;
          end
        end
        DATA: if (fire) begin
          if (vbyte != 3'(VB - 1)) begin
            vbyte <= vbyte + 1'b1;
          end else if (vidx != VW'(CH_PER_PKT - 1)) begin
            vbyte <= '0;
            vidx  <= vidx + 1'b1;
            cur   <= rd_data;
            rd_en <= (int'(vidx) + 2 < CH_PER_PKT);
            rd_ch <= base + CHW'(vidx) + CHW'(2);
          end else if (last_pkt) begin
            state <= IDLE;
            done  <= 1'b1;
          end else begin
            // next frame: block, then product, then set
            state <= HDR;
            bidx  <= '0;
            rd_en <= 1'b1;
            if (blk != BW'(NBLK - 1)) begin
              blk   <= blk + 1'b1;
              rd_ch <= base + CHW'(CH_PER_PKT);
            end else begin
              blk   <= '0;
              rd_ch <= '0;
              if (prod != prod_e'(2'd3)) prod <= prod_e'(prod + 2'd1);
              else begin
                prod <= prod_e'(2'd0);
                set  <= set + 1'b1;
              end
            end
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

endmodule

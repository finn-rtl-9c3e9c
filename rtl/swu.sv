// swu: Sliding Window Unit, the front half of a convolutional layer.
//
// Turns a stream of interleaved feature-map pixels into the image matrix that
// the MVTU multiplies with the filter matrix. A pixel holds all CH channels of
// one image position (IBITS bits each, channel 0 in the low bits). Incoming
// pixels are written at sequential addresses into one wide pixel memory; an
// address generator then reads, for every output position (row-major), the
// K x K window pixels in row-major order, and splits each pixel into CH/S
// chunks of S channels. The output stream is therefore the image matrix column
// by column, each column ordered (window row, window column, channel) with the
// channel fastest -- the order of the interleaved filter matrix.
//
// The pixel memory is a ring of K+1 image rows. A window is read as soon as its
// last pixel has been written, and a new row may be written as soon as the
// oldest of the K+1 rows is no longer used by any remaining window, so the
// unit starts producing output after K-1 rows and one window of the first
// image, and the next image streams in while the last windows of the current
// one are read. Stride 1.
//
// Padding: with PAD > 0 the image is surrounded by PAD rows and columns of
// pixels whose every bit is PAD_BIT (1 = +1, 0 = -1: the bipolar encoding has
// no zero). Window positions that fall on the border produce these pad words
// without reading the memory. PAD must be below K/2 + 1 (at most "same"
// padding); the default is no padding, as in the CNV network.
//
// Interface: valid/ready streams. in_data: one pixel, CH*IBITS bits.
// out_data: S channels, S*IBITS bits. One output word per cycle while the
// window's pixels are present and the consumer is ready.
//
// Follows the paper: interleaved channels, the single wide pixel memory filled
// in sequential order, the address generator producing the image matrix.
// Also from the paper: padding with +1 or -1, since there is no zero. Own
// choices: the K+1-row ring depth, the split of pixels into S-channel words,
// the handshake.
module swu #(
  parameter int unsigned CH    = 64,  // input channels
  parameter int unsigned IBITS = 1,   // bits per channel
  parameter int unsigned DIM   = 30,  // input image is DIM x DIM
  parameter int unsigned K     = 3,   // window is K x K
  parameter int unsigned S     = 64,  // channels per output word
  parameter int unsigned PAD   = 0,   // border width of padding
  parameter bit          PAD_BIT = 1'b1 // value of every padded bit
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [CH*IBITS-1:0]   in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [S*IBITS-1:0]    out_data
);

  localparam int unsigned ODIM   = DIM + 2 * PAD - K + 1;
  localparam int unsigned NCHUNK = CH / S;
  localparam int unsigned ROWS   = K + 1;
  localparam int unsigned DEPTH  = ROWS * DIM;
  localparam int unsigned AW     = $clog2(DEPTH);
  localparam int unsigned CW     = $clog2(DIM + 1);
  localparam int unsigned RW     = $clog2(ROWS + 1);
  localparam int unsigned KW     = $clog2(K + 1);
  localparam int unsigned NW     = $clog2(NCHUNK + 1);

  initial begin
    if (NCHUNK * S != CH) $fatal(1, "swu: S must divide CH");
    if (2 * PAD > K) $fatal(1, "swu: PAD too large");
  end

  logic [CH*IBITS-1:0] mem [DEPTH];

  // ---------------- writer ----------------
  // global row counters, compared through their difference so that they may wrap
  logic [31:0]   wrow;        // global row being written
  logic [CW-1:0] wcol;
  logic [RW-1:0] wslot;       // wrow % ROWS
  logic [31:0]   rbase;       // global row of the top of the current window row
  logic [RW-1:0] rslot;       // rbase % ROWS
  logic          wr_fire;
  logic [31:0]   ahead;

  assign ahead    = wrow - rbase;               // rows written ahead of the window top
  assign in_ready = (ahead <= 32'(K));          // slot of row rbase+K is free
  assign wr_fire  = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (wr_fire) mem[AW'(wslot) * AW'(DIM) + AW'(wcol)] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wrow  <= '0;
      wcol  <= '0;
      wslot <= '0;
    end else if (wr_fire) begin
      if (wcol == CW'(DIM - 1)) begin
        wcol  <= '0;
        wrow  <= wrow + 1;
        wslot <= (wslot == RW'(ROWS - 1)) ? '0 : wslot + 1'b1;
      end else begin
        wcol <= wcol + 1'b1;
      end
    end
  end

  // ---------------- reader / address generator ----------------
  logic [CW-1:0] ocol, orow;
  logic [KW-1:0] ky, kx;
  logic [NW-1:0] ch;
  logic [RW-1:0] pslot;
  logic [31:0]   prow;       // global row of the pixel to read
  logic [CW-1:0] pcol;
  logic          avail, rd_fire, out_free;
  logic          last_ch, last_kx, last_ky, last_oc, last_or;

  // position of the pixel inside the unpadded image
  int py, px;
  logic is_pad;
  assign py     = int'(orow) + int'(ky) - int'(PAD);
  assign px     = int'(ocol) + int'(kx) - int'(PAD);
  assign is_pad = (py < 0) || (py >= int'(DIM)) || (px < 0) || (px >= int'(DIM));

  assign prow  = rbase + 32'(ky);
  assign pcol  = CW'(px);
  assign pslot = RW'((32'(rslot) + 32'(ky)) % ROWS);
  // pixel present when its row is complete, or it is in the row being written
  assign avail = is_pad || (wrow - rbase > 32'(ky)) ||
                 ((wrow == prow) && (wcol > pcol));

  assign out_free = !out_valid || out_ready;
  assign rd_fire  = avail && out_free;

  assign last_ch = (ch == NW'(NCHUNK - 1));
  assign last_kx = (kx == KW'(K - 1));
  assign last_ky = (ky == KW'(K - 1));
  assign last_oc = (ocol == CW'(ODIM - 1));
  assign last_or = (orow == CW'(ODIM - 1));

  logic [CH*IBITS-1:0] pix;
  assign pix = mem[AW'(pslot) * AW'(DIM) + AW'(pcol)];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ch <= '0; kx <= '0; ky <= '0; ocol <= '0; orow <= '0;
      rbase <= -32'(PAD);                       // global row of padded row 0
      rslot <= RW'((ROWS - PAD) % ROWS);
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (rd_fire) begin
        out_valid <= 1'b1;
        out_data  <= is_pad ? {(S * IBITS){PAD_BIT}} : pix[int'(ch) * S * IBITS +: S * IBITS];
        if (!last_ch) ch <= ch + 1'b1;
        else begin
          ch <= '0;
          if (!last_kx) kx <= kx + 1'b1;
          else begin
            kx <= '0;
            if (!last_ky) ky <= ky + 1'b1;
            else begin
              ky <= '0;
              if (!last_oc) ocol <= ocol + 1'b1;
              else begin
                ocol <= '0;
                if (!last_or) begin
                  orow  <= orow + 1'b1;
                  rbase <= rbase + 1;
                  rslot <= RW'((32'(rslot) + 1) % ROWS);
                end else begin
                  // next image: skip the bottom rows already consumed
                  orow  <= '0;
                  rbase <= rbase + 32'(K - 2 * PAD);
                  rslot <= RW'((32'(rslot) + K - 2 * PAD) % ROWS);
                end
              end
            end
          end
        end
      end
    end
  end

  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      out_valid && !out_ready |=> out_valid && $stable(out_data);
  endproperty
  a_hold: assert property (p_hold);

endmodule

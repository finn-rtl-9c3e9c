// pool_unit: streaming K x K max-pooling of a binary feature map.
//
// For +-1 activations encoded as bits (1 = +1), the maximum of a window is +1
// exactly when any bit of the window is set, so max-pooling after the
// threshold activation is a Boolean OR. Pixels arrive row-major, one per
// stream word, with all CH channels interleaved in the word. Each pixel is
// written into line buffer (row % K) at its column: K line buffers of DIM
// pixels, i.e. CH*K line buffers of DIM bits as the channels sit side by side.
// When the bottom-right pixel of a K x K block arrives, the K consecutive
// pixels of each line buffer are OR'ed (horizontal subsampling), the K results
// are OR'ed with each other (vertical subsampling), and the pooled pixel is
// emitted. The oldest line buffer is overwritten by the next rows. Pooling
// windows do not overlap (stride K); rows or columns beyond the last full
// block are dropped.
//
// Interface: valid/ready streams, one CH-bit pixel per word in and out.
// Timing: the pooled pixel is on the output the cycle after the last pixel
// of its block is accepted. The input stalls only while a pooled pixel waits
// for the consumer.
//
// Follows the paper: OR for max-pooling, the line buffers and the order of
// horizontal then vertical OR. Own choices: the handshake and the emission
// on the last pixel of each block.
module pool_unit #(
  parameter int unsigned CH  = 64,  // channels (bits per pixel)
  parameter int unsigned DIM = 28,  // input image is DIM x DIM
  parameter int unsigned K   = 2    // pooling window K x K, stride K
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  output logic           in_ready,
  input  logic [CH-1:0]  in_data,
  output logic           out_valid,
  input  logic           out_ready,
  output logic [CH-1:0]  out_data
);

  localparam int unsigned CW = $clog2(DIM + 1);
  localparam int unsigned KW = $clog2(K + 1);
  localparam int unsigned LIM = (DIM / K) * K;  // rows/cols that belong to a block

  logic [CH-1:0] lb [K][DIM];
  logic [CW-1:0] row, col;
  logic [KW-1:0] rk, ck;    // row % K, col % K
  logic          fire, emit;
  logic [CH-1:0] pooled;

  assign in_ready = !out_valid || out_ready;
  assign fire     = in_valid && in_ready;
  assign emit     = (rk == KW'(K - 1)) && (ck == KW'(K - 1)) &&
                    (row < CW'(LIM)) && (col < CW'(LIM));

  // horizontal OR inside each line buffer, then vertical OR across them;
  // the incoming pixel stands in for its own (not yet written) position
  always_comb begin
    pooled = '0;
    for (int i = 0; i < K; i++) begin
      for (int j = 0; j < K; j++) begin
        if (i == K - 1 && j == 0) pooled = pooled | in_data;
        else                      pooled = pooled | lb[i][int'(col) - j];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (fire) lb[rk][col] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row <= '0; col <= '0; rk <= '0; ck <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        if (emit) begin
          out_valid <= 1'b1;
          out_data  <= pooled;
        end
        if (col == CW'(DIM - 1)) begin
          col <= '0;
          ck  <= '0;
          if (row == CW'(DIM - 1)) begin
            row <= '0;
            rk  <= '0;
          end else begin
            row <= row + 1'b1;
            rk  <= (rk == KW'(K - 1)) ? '0 : rk + 1'b1;
          end
        end else begin
          col <= col + 1'b1;
          ck  <= (ck == KW'(K - 1)) ? '0 : ck + 1'b1;
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

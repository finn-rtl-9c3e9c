// mvtu: Matrix-Vector-Threshold Unit, the compute engine of every layer.
//
// Multiplies an MW-element input vector by an MH x MW binary weight matrix and
// thresholds the MH results. The matrix is folded onto P processing elements
// (hardware neurons) of S SIMD lanes (hardware synapses): a P-high, S-wide tile
// is processed per cycle, so one matrix-vector product takes
// F = Fn * Fs = (MH/P) * (MW/S) cycles. Row n of the matrix lives in PE n % P at
// weight word (n / P) * Fs + column / S, lane column % S; its threshold lives in
// the same PE at entry n / P.
//
// Input vector buffer: the S-lane input words of one vector arrive during the
// first neuron fold (nf == 0) and are stored; the later neuron folds replay
// them from the buffer, so the input stream is only read for Fs of the F
// cycles. Output vector buffer: after the last synapse fold of each neuron
// fold the P result bits (or P raw dot products when THRESH == 0) are written
// into it; when the last neuron fold ends the whole MH-element vector is moved
// to the output register and offered on the output stream. The engine stalls
// only when its input word is missing or when it would finish a vector while
// the previous one has not been taken.
//
// Interface: valid/ready streams (a word moves when valid and ready are both
// high). in_data holds S lanes of IBITS bits, lane 0 in the low bits.
// out_data holds MH results of OBITS bits, result 0 in the low bits. Weights
// and thresholds are written through the ld port (finn_pkg::ld_t), whose
// `layer` field must equal LAYER_ID.
//
// Timing: the output vector appears the cycle after the last of its F compute
// cycles; back to back vectors are accepted every F cycles.
//
// Follows the paper: the PE/SIMD organisation, the folding and its cycle
// count, the weight/threshold distribution among PEs, the input and output
// buffers. Own choices: the stream handshake, the load port, the width of the
// raw outputs (OBITS) when thresholding is off.
module mvtu
  import finn_pkg::*;
#(
  parameter int unsigned MW       = 576,  // synapses per neuron (matrix width Y)
  parameter int unsigned MH       = 64,   // neurons (matrix height X)
  parameter int unsigned P        = 64,   // PEs
  parameter int unsigned S        = 64,   // SIMD lanes per PE
  parameter int unsigned IBITS    = 1,    // bits per input element
  parameter bit          THRESH   = 1'b1, // 1: binary outputs via thresholds
  parameter int unsigned OBITS    = THRESH ? 1 : 16, // bits per output element
  parameter int unsigned TW       = acc_width(MW, IBITS),
  parameter int unsigned LAYER_ID = 0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  ld_t                   ld,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [S*IBITS-1:0]    in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [MH*OBITS-1:0]   out_data
);

  localparam int unsigned FN = MH / P;
  localparam int unsigned FS = MW / S;
  localparam int unsigned WDEPTH = FN * FS;
  localparam int unsigned WAW = $clog2(WDEPTH + 1);
  localparam int unsigned TAW = $clog2(FN + 1);

  // synthesis-time sanity of the folding
  initial begin
    if (FN * P != MH || FS * S != MW)
      $fatal(1, "mvtu: P must divide MH and S must divide MW");
    if (!THRESH && OBITS < TW)
      $fatal(1, "mvtu: OBITS too narrow for the dot product");
  end

  // ---------------- fold counters ----------------
  logic [TAW-1:0] nf;
  logic [WAW-1:0] sf;
  logic last_sf, last_nf, need_in, out_free, fire;

  assign last_sf  = (sf == WAW'(FS - 1));
  assign last_nf  = (nf == TAW'(FN - 1));
  assign need_in  = (nf == '0);
  assign out_free = !out_valid || out_ready;
  assign fire     = (!need_in || in_valid) && (!(last_sf && last_nf) || out_free);
  assign in_ready = need_in && (!(last_sf && last_nf) || out_free);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nf <= '0;
      sf <= '0;
    end else if (fire) begin
      if (last_sf) begin
        sf <= '0;
        nf <= last_nf ? '0 : nf + 1'b1;
      end else begin
        sf <= sf + 1'b1;
      end
    end
  end

  // ---------------- input vector buffer ----------------
  logic [S*IBITS-1:0] ibuf [FS];
  logic [S*IBITS-1:0] cur_in;

  always_ff @(posedge clk) begin
    if (fire && need_in) ibuf[sf] <= in_data;
  end
  assign cur_in = need_in ? in_data : ibuf[sf];

  // ---------------- PE array ----------------
  logic [WAW-1:0] widx;
  logic signed [TW-1:0] pe_sum [P];
  logic [P-1:0] pe_bit;

  assign widx = WAW'(nf * FS + sf);

  for (genvar p = 0; p < P; p++) begin : g_pe
    logic w_we, t_we;
    assign w_we = ld.en && !ld.thr && ld.layer == 4'(LAYER_ID) && ld.pe == 8'(p);
    assign t_we = ld.en &&  ld.thr && ld.layer == 4'(LAYER_ID) && ld.pe == 8'(p);
    mvtu_pe #(
      .S(S), .IBITS(IBITS), .WDEPTH(WDEPTH), .TDEPTH(FN), .TW(TW), .THRESH(THRESH)
    ) u_pe (
      .clk     (clk),
      .w_we    (w_we),
      .w_waddr (WAW'(ld.addr)),
      .w_wdata (S'(ld.data)),
      .t_we    (t_we),
      .t_waddr (TAW'(ld.addr)),
      .t_wdata (TW'(ld.data)),
      .en      (fire),
      .first   (sf == '0),
      .widx    (widx),
      .tidx    (nf),
      .in_vec  (cur_in),
      .sum     (pe_sum[p]),
      .out_bit (pe_bit[p])
    );
  end

  // ---------------- output vector buffer ----------------
  logic [MH*OBITS-1:0] obuf, obuf_next;

  always_comb begin
    obuf_next = obuf;
    for (int p = 0; p < P; p++) begin
      if (THRESH)
        obuf_next[(int'(nf) * P + p) * OBITS +: OBITS] = OBITS'(pe_bit[p]);
      else
        obuf_next[(int'(nf) * P + p) * OBITS +: OBITS] = OBITS'(pe_sum[p]);
    end
  end

  always_ff @(posedge clk) begin
    if (fire && last_sf) obuf <= obuf_next;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire && last_sf && last_nf) begin
        out_valid <= 1'b1;
        out_data  <= obuf_next;
      end
    end
  end

  // stream rules: a held output must not change until it is taken
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      out_valid && !out_ready |=> out_valid && $stable(out_data);
  endproperty
  a_hold: assert property (p_hold);

endmodule

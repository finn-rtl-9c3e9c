// cnv_top: heterogeneous streaming accelerator for the CNV binarized network
// in its maximum-throughput folding (CNV-max).
//
// Every layer of the network has its own compute engine, and the engines are
// chained by on-chip streams, so each one starts as soon as its predecessor
// produces output and a new image can enter once the first engine is done
// with the previous one. All weights and thresholds stay in the PEs' on-chip
// memories.
//
//   32x32x3 image, 8 bits per channel (24 bits per pixel)
//   L0 conv 3x3,  3->64   (multi-bit input)  30x30   P=64 S=3   fold 8100
//   L1 conv 3x3, 64->64                      28x28   P=64 S=64  fold 7056
//   pool 2x2                                 14x14
//   L2 conv 3x3, 64->128                     12x12   P=32 S=64  fold 5184
//   L3 conv 3x3,128->128                     10x10   P=32 S=64  fold 7200
//   pool 2x2                                  5x5
//   L4 conv 3x3,128->256                      3x3    P=8  S=64  fold 5184
//   L5 conv 3x3,256->256                      1x1    P=4  S=32  fold 4608
//   L6 fully connected 256->512                      P=1  S=16  fold 8192
//   L7 fully connected 512->512                      P=1  S=32  fold 8192
//   L8 fully connected 512->10 (no threshold, 16-bit results)
//                                                    P=1  S=4   fold 1280
//
// The layer sizes and the per-layer total folds are the network's; the split
// of each fold into PEs and SIMD lanes is this design's choice among the
// splits that give those folds. Width converters split a whole vector into the
// S-lane words of the next fully connected layer.
//
// Interface: in_* is the image stream, one interleaved RGB pixel per word,
// row-major, channel 0 in bits 7:0. out_* is the result stream, one word per
// image holding ten unsigned 16-bit dot products (class 0 in bits 15:0); the
// largest one is the classification. ld loads weights and thresholds; the
// MVTU ids 0..8 follow the layer list above. Streams are valid/ready.
// Timing: one image every max(fold) = 8192 cycles in steady state, plus the
// small per-vector stalls of the FC stages.
module cnv_top
  import finn_pkg::*;
#(
  parameter int unsigned P0 = 64, parameter int unsigned S0 = 3,
  parameter int unsigned P1 = 64, parameter int unsigned S1 = 64,
  parameter int unsigned P2 = 32, parameter int unsigned S2 = 64,
  parameter int unsigned P3 = 32, parameter int unsigned S3 = 64,
  parameter int unsigned P4 = 8,  parameter int unsigned S4 = 64,
  parameter int unsigned P5 = 4,  parameter int unsigned S5 = 32,
  parameter int unsigned P6 = 1,  parameter int unsigned S6 = 16,
  parameter int unsigned P7 = 1,  parameter int unsigned S7 = 32,
  parameter int unsigned P8 = 1,  parameter int unsigned S8 = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  ld_t           ld,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [23:0]   in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [159:0]  out_data
);

  // stream between stages i and i+1
  logic          v0, r0;  logic [63:0]  d0;   // L0 -> L1
  logic          v1, r1;  logic [63:0]  d1;   // L1 -> pool
  logic          v2, r2;  logic [63:0]  d2;   // pool -> L2
  logic          v3, r3;  logic [127:0] d3;   // L2 -> L3
  logic          v4, r4;  logic [127:0] d4;   // L3 -> pool
  logic          v5, r5;  logic [127:0] d5;   // pool -> L4
  logic          v6, r6;  logic [255:0] d6;   // L4 -> L5
  logic          v7, r7;  logic [255:0] d7;   // L5 -> dwc
  logic          v8, r8;  logic [S6-1:0] d8;  // dwc -> L6
  logic          v9, r9;  logic [511:0] d9;   // L6 -> dwc
  logic          va, ra;  logic [S7-1:0] da;  // dwc -> L7
  logic          vb, rb;  logic [511:0] db;   // L7 -> dwc
  logic          vc, rc;  logic [S8-1:0] dc;  // dwc -> L8

  conv_layer #(.CH(3), .IBITS(8), .DIM(32), .K(3), .OCH(64), .P(P0), .S(S0),
               .LAYER_ID(0)) u_l0 (
    .clk, .rst_n, .ld, .in_valid, .in_ready, .in_data,
    .out_valid(v0), .out_ready(r0), .out_data(d0));

  conv_layer #(.CH(64), .IBITS(1), .DIM(30), .K(3), .OCH(64), .P(P1), .S(S1),
               .LAYER_ID(1)) u_l1 (
    .clk, .rst_n, .ld, .in_valid(v0), .in_ready(r0), .in_data(d0),
    .out_valid(v1), .out_ready(r1), .out_data(d1));

  pool_unit #(.CH(64), .DIM(28), .K(2)) u_pool0 (
    .clk, .rst_n, .in_valid(v1), .in_ready(r1), .in_data(d1),
    .out_valid(v2), .out_ready(r2), .out_data(d2));

  conv_layer #(.CH(64), .IBITS(1), .DIM(14), .K(3), .OCH(128), .P(P2), .S(S2),
               .LAYER_ID(2)) u_l2 (
    .clk, .rst_n, .ld, .in_valid(v2), .in_ready(r2), .in_data(d2),
    .out_valid(v3), .out_ready(r3), .out_data(d3));

  conv_layer #(.CH(128), .IBITS(1), .DIM(12), .K(3), .OCH(128), .P(P3), .S(S3),
               .LAYER_ID(3)) u_l3 (
    .clk, .rst_n, .ld, .in_valid(v3), .in_ready(r3), .in_data(d3),
    .out_valid(v4), .out_ready(r4), .out_data(d4));

  pool_unit #(.CH(128), .DIM(10), .K(2)) u_pool1 (
    .clk, .rst_n, .in_valid(v4), .in_ready(r4), .in_data(d4),
    .out_valid(v5), .out_ready(r5), .out_data(d5));

  conv_layer #(.CH(128), .IBITS(1), .DIM(5), .K(3), .OCH(256), .P(P4), .S(S4),
               .LAYER_ID(4)) u_l4 (
    .clk, .rst_n, .ld, .in_valid(v5), .in_ready(r5), .in_data(d5),
    .out_valid(v6), .out_ready(r6), .out_data(d6));

  conv_layer #(.CH(256), .IBITS(1), .DIM(3), .K(3), .OCH(256), .P(P5), .S(S5),
               .LAYER_ID(5)) u_l5 (
    .clk, .rst_n, .ld, .in_valid(v6), .in_ready(r6), .in_data(d6),
    .out_valid(v7), .out_ready(r7), .out_data(d7));

  stream_dwc #(.IW(256), .OW(S6)) u_dwc6 (
    .clk, .rst_n, .in_valid(v7), .in_ready(r7), .in_data(d7),
    .out_valid(v8), .out_ready(r8), .out_data(d8));

  mvtu #(.MW(256), .MH(512), .P(P6), .S(S6), .LAYER_ID(6)) u_l6 (
    .clk, .rst_n, .ld, .in_valid(v8), .in_ready(r8), .in_data(d8),
    .out_valid(v9), .out_ready(r9), .out_data(d9));

  stream_dwc #(.IW(512), .OW(S7)) u_dwc7 (
    .clk, .rst_n, .in_valid(v9), .in_ready(r9), .in_data(d9),
    .out_valid(va), .out_ready(ra), .out_data(da));

  mvtu #(.MW(512), .MH(512), .P(P7), .S(S7), .LAYER_ID(7)) u_l7 (
    .clk, .rst_n, .ld, .in_valid(va), .in_ready(ra), .in_data(da),
    .out_valid(vb), .out_ready(rb), .out_data(db));

  stream_dwc #(.IW(512), .OW(S8)) u_dwc8 (
    .clk, .rst_n, .in_valid(vb), .in_ready(rb), .in_data(db),
    .out_valid(vc), .out_ready(rc), .out_data(dc));

  mvtu #(.MW(512), .MH(10), .P(P8), .S(S8), .THRESH(1'b0), .OBITS(16),
         .LAYER_ID(8)) u_l8 (
    .clk, .rst_n, .ld, .in_valid(vc), .in_ready(rc), .in_data(dc),
    .out_valid, .out_ready, .out_data);

endmodule

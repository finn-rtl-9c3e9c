// conv_layer: a convolutional layer built from a Sliding Window Unit and a
// Matrix-Vector-Threshold Unit.
//
// The convolution is lowered to a matrix-matrix product: the SWU streams the
// image matrix one column (one K x K x CH window) at a time, and the MVTU
// multiplies each column with the OCH x (K*K*CH) filter matrix, producing one
// output pixel with all OCH channels interleaved. One image therefore costs
// Fm * Fn * Fs cycles, Fm = (DIM-K+1)^2 output pixels, Fn = OCH/P,
// Fs = K*K*CH/S. Weight column y of output channel n is the filter tap
// (y / CH) in row-major window order at input channel y % CH, which is the
// interleaved filter matrix. The MVTU's S-lane input words are exactly the
// SWU's S-channel output words.
//
// Interface: valid/ready streams. in_data: one input pixel, CH*IBITS bits.
// out_data: one output pixel, OCH*OBITS bits. ld: weight/threshold loading
// for the MVTU (finn_pkg::ld_t) addressed by LAYER_ID.
//
// Follows the paper: SWU + MVTU composition and the interleaved lowering.
module conv_layer
  import finn_pkg::*;
#(
  parameter int unsigned CH       = 64,
  parameter int unsigned IBITS    = 1,
  parameter int unsigned DIM      = 30,
  parameter int unsigned K        = 3,
  parameter int unsigned OCH      = 64,
  parameter int unsigned P        = 64,
  parameter int unsigned S        = 64,
  parameter bit          THRESH   = 1'b1,
  parameter int unsigned OBITS    = THRESH ? 1 : 16,
  parameter int unsigned LAYER_ID = 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  ld_t                   ld,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [CH*IBITS-1:0]   in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [OCH*OBITS-1:0]  out_data
);

  logic                 col_valid, col_ready;
  logic [S*IBITS-1:0]   col_data;

  swu #(.CH(CH), .IBITS(IBITS), .DIM(DIM), .K(K), .S(S)) u_swu (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .out_valid (col_valid), .out_ready (col_ready), .out_data (col_data)
  );

  mvtu #(
    .MW(K * K * CH), .MH(OCH), .P(P), .S(S), .IBITS(IBITS),
    .THRESH(THRESH), .OBITS(OBITS), .LAYER_ID(LAYER_ID)
  ) u_mvtu (
    .clk, .rst_n, .ld,
    .in_valid (col_valid), .in_ready (col_ready), .in_data (col_data),
    .out_valid, .out_ready, .out_data
  );

endmodule

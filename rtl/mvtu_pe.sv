// mvtu_pe: one processing element (hardware neuron) of the
// Matrix-Vector-Threshold Unit.
//
// Each cycle the PE reads one S-bit word of its weight memory at `widx`,
// multiplies it lane by lane with the S-lane input word and adds the result to
// its accumulator. For binary inputs (IBITS == 1) the multiply is an XNOR and
// the sum a popcount, so the accumulator counts the lanes where weight and
// input agree. For multi-bit inputs (IBITS > 1, the first layer of a network
// that takes non-binary pixels) each lane adds +x for a set weight bit and -x
// for a clear one, x being the unsigned input value. On the last synapse fold
// of a row the finished dot product `sum` is compared against the row's entry
// of the threshold memory (at `tidx`); `out_bit` is 1 when sum >= threshold.
// With THRESH == 0 the threshold memory is left out and the raw dot product is
// the result (a layer with non-binarized outputs).
//
// Timing: purely single cycle. `sum` and `out_bit` are combinational from the
// inputs of the current cycle (weight read is asynchronous); the accumulator
// register is updated when `en` is high. `first` restarts the accumulation.
//
// Follows the paper: weight memory, XNOR, popcount, T-bit accumulator and
// adder, threshold memory and a ">=" comparator, one output bit. This design's
// own choices: asynchronous memory reads, the write ports used to load
// weights and thresholds, and the +-x lanes for multi-bit inputs.
module mvtu_pe #(
  parameter int unsigned S      = 64,   // SIMD lanes (hardware synapses)
  parameter int unsigned IBITS  = 1,    // bits per input lane
  parameter int unsigned WDEPTH = 9,    // weight words: Fn * Fs
  parameter int unsigned TDEPTH = 1,    // thresholds: Fn
  parameter int unsigned TW     = 11,   // accumulator / threshold width (signed)
  parameter bit          THRESH = 1'b1  // 1: threshold the dot product
) (
  input  logic                          clk,
  // parameter load
  input  logic                          w_we,
  input  logic [$clog2(WDEPTH+1)-1:0]   w_waddr,
  input  logic [S-1:0]                  w_wdata,
  input  logic                          t_we,
  input  logic [$clog2(TDEPTH+1)-1:0]   t_waddr,
  input  logic signed [TW-1:0]          t_wdata,
  // compute
  input  logic                          en,
  input  logic                          first,
  input  logic [$clog2(WDEPTH+1)-1:0]   widx,
  input  logic [$clog2(TDEPTH+1)-1:0]   tidx,
  input  logic [S*IBITS-1:0]            in_vec,
  output logic signed [TW-1:0]          sum,
  output logic                          out_bit
);

  logic [S-1:0]         wmem [WDEPTH];
  logic signed [TW-1:0] acc;
  logic [S-1:0]         w;
  logic signed [TW-1:0] partial;

  always_ff @(posedge clk) begin
    if (w_we) wmem[w_waddr] <= w_wdata;
  end

  assign w = wmem[widx];

  // lane products, then their sum
  logic signed [TW-1:0] term [S];

  for (genvar i = 0; i < S; i++) begin : g_lane
    if (IBITS == 1) begin : g_xnor
      assign term[i] = {{(TW-1){1'b0}}, w[i] ~^ in_vec[i]};
    end else begin : g_mul
      logic signed [TW-1:0] x;
      assign x       = TW'(in_vec[i*IBITS +: IBITS]);
      assign term[i] = w[i] ? x : -x;
    end
  end

  always_comb begin
    partial = '0;
    for (int i = 0; i < S; i++) partial = partial + term[i];
  end

  assign sum = (first ? '0 : acc) + partial;

  always_ff @(posedge clk) begin
    if (en) acc <= sum;
  end

  if (THRESH) begin : g_thr
    logic signed [TW-1:0] tmem [TDEPTH];
    always_ff @(posedge clk) begin
      if (t_we) tmem[t_waddr] <= t_wdata;
    end
    assign out_bit = (sum >= tmem[tidx]);
  end else begin : g_nothr
    assign out_bit = 1'b0;
  end

endmodule

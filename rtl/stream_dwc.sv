// stream_dwc: stream width down-converter.
//
// Splits each IW-bit input word into IW/OW output words of OW bits, lowest
// bits first. It joins a layer that produces a whole vector per word (an MVTU
// output buffer) to a fully connected MVTU that reads S lanes per word.
// A new input word is taken when the last piece of the previous one leaves.
// Not described in the paper; it is this design's glue between layers.
module stream_dwc #(
  parameter int unsigned IW = 256,
  parameter int unsigned OW = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  output logic           in_ready,
  input  logic [IW-1:0]  in_data,
  output logic           out_valid,
  input  logic           out_ready,
  output logic [OW-1:0]  out_data
);

  localparam int unsigned N  = IW / OW;
  localparam int unsigned NW = $clog2(N + 1);

  logic [IW-1:0] word;
  logic [NW-1:0] idx;
  logic          full;

  initial begin
    if (N * OW != IW) $fatal(1, "stream_dwc: OW must divide IW");
  end

  assign out_valid = full;
  assign out_data  = word[int'(idx) * OW +: OW];
  assign in_ready  = !full || (out_ready && idx == NW'(N - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= 1'b0;
      idx  <= '0;
      word <= '0;
    end else begin
      if (full && out_ready) begin
        if (idx == NW'(N - 1)) begin
          idx  <= '0;
          full <= 1'b0;
        end else begin
          idx <= idx + 1'b1;
        end
      end
      if (in_valid && in_ready) begin
        word <= in_data;
        full <= 1'b1;
        idx  <= '0;
      end
    end
  end

endmodule

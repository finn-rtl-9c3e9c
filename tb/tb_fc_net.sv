// tb_fc_net: helper for tb_fc_mnist. Builds one fully connected MNIST
// network (784 -> HID -> HID -> HID -> 10) from MVTU instances with width
// converters between them, loads random weights and thresholds, streams
// NIMG random 28 x 28 binary images and checks each 10-value result (raw
// 16-bit popcounts of the last layer) against a reference computed here.
// The first layer's matrix may be padded from 784 to MW0 columns (a multiple
// of S0): the pad columns carry weight bit 1 and input bit 0, so each adds
// XNOR(1,0) = 0 to the popcount and the thresholds are unchanged.
// It also checks that the interval between the last two results equals the
// largest layer fold, max over layers of (MH/P)*(MW/S), within 1/16.
module tb_fc_net #(
  parameter int HID  = 256,
  parameter int NIMG = 3,
  parameter int MW0  = 784,   // first-layer matrix width, 784 or padded
  parameter int IN_S = 16,    // input stream word, bits (divides MW0)
  parameter int P0 = 1, S0 = 16,
  parameter int P1 = 1, S1 = 4,
  parameter int P2 = 1, S2 = 4,
  parameter int P3 = 1, S3 = 1
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures
);
  import finn_pkg::*;
  localparam int F0 = (HID / P0) * (MW0 / S0);
  localparam int F1 = (HID / P1) * (HID / S1);
  localparam int F2 = (HID / P2) * (HID / S2);
  localparam int F3 = (10 / P3) * (HID / S3);
  localparam int FMAX = (F0 > F1 ? F0 : F1) > (F2 > F3 ? F2 : F3) ?
                        (F0 > F1 ? F0 : F1) : (F2 > F3 ? F2 : F3);
  localparam int MW [4] = '{MW0, HID, HID, HID};
  localparam int MH [4] = '{HID, HID, HID, 10};
  localparam int PP [4] = '{P0, P1, P2, P3};
  localparam int SS [4] = '{S0, S1, S2, S3};

  logic rst_n = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  ld_t ld;
  logic iv, ir;  logic [IN_S-1:0] id;
  logic v0, r0;  logic [HID-1:0] d0;
  logic v1, r1;  logic [S1-1:0]  d1;
  logic v2, r2;  logic [HID-1:0] d2;
  logic v3, r3;  logic [S2-1:0]  d3;
  logic v4, r4;  logic [HID-1:0] d4;
  logic v5, r5;  logic [S3-1:0]  d5;
  logic ov, orr; logic [159:0]   od;
  logic v0s, r0s; logic [S0-1:0] d0s;

  if (IN_S == S0) begin : g_in_direct
    assign v0s = iv; assign ir = r0s; assign d0s = id;
  end else begin : g_in_dwc
    stream_dwc #(.IW(IN_S), .OW(S0)) u_ci (.clk, .rst_n,
      .in_valid(iv), .in_ready(ir), .in_data(id), .out_valid(v0s), .out_ready(r0s), .out_data(d0s));
  end
  mvtu #(.MW(MW0), .MH(HID), .P(P0), .S(S0), .LAYER_ID(0)) u_l0 (.clk, .rst_n, .ld,
    .in_valid(v0s), .in_ready(r0s), .in_data(d0s), .out_valid(v0), .out_ready(r0), .out_data(d0));
  stream_dwc #(.IW(HID), .OW(S1)) u_c0 (.clk, .rst_n,
    .in_valid(v0), .in_ready(r0), .in_data(d0), .out_valid(v1), .out_ready(r1), .out_data(d1));
  mvtu #(.MW(HID), .MH(HID), .P(P1), .S(S1), .LAYER_ID(1)) u_l1 (.clk, .rst_n, .ld,
    .in_valid(v1), .in_ready(r1), .in_data(d1), .out_valid(v2), .out_ready(r2), .out_data(d2));
  stream_dwc #(.IW(HID), .OW(S2)) u_c1 (.clk, .rst_n,
    .in_valid(v2), .in_ready(r2), .in_data(d2), .out_valid(v3), .out_ready(r3), .out_data(d3));
  mvtu #(.MW(HID), .MH(HID), .P(P2), .S(S2), .LAYER_ID(2)) u_l2 (.clk, .rst_n, .ld,
    .in_valid(v3), .in_ready(r3), .in_data(d3), .out_valid(v4), .out_ready(r4), .out_data(d4));
  stream_dwc #(.IW(HID), .OW(S3)) u_c2 (.clk, .rst_n,
    .in_valid(v4), .in_ready(r4), .in_data(d4), .out_valid(v5), .out_ready(r5), .out_data(d5));
  mvtu #(.MW(HID), .MH(10), .P(P3), .S(S3), .THRESH(1'b0), .OBITS(16), .LAYER_ID(3)) u_l3 (
    .clk, .rst_n, .ld, .in_valid(v5), .in_ready(r5), .in_data(d5),
    .out_valid(ov), .out_ready(orr), .out_data(od));

  bit [MW0-1:0] W0w [HID];
  bit [HID-1:0] Wh [1:3][HID];     // layers 1..3
  int           T [3][HID];
  bit [MW0-1:0] img [NIMG];
  logic [159:0] expq [$];

  function automatic logic [159:0] reference(bit [MW0-1:0] x);
    bit [HID-1:0] h0, h1, h2;
    logic [159:0] res;
    for (int n = 0; n < HID; n++) h0[n] = ($countones(~(W0w[n] ^ x)) >= T[0][n]);
    for (int n = 0; n < HID; n++) h1[n] = ($countones(~(Wh[1][n] ^ h0)) >= T[1][n]);
    for (int n = 0; n < HID; n++) h2[n] = ($countones(~(Wh[2][n] ^ h1)) >= T[2][n]);
    for (int n = 0; n < 10; n++) res[n*16 +: 16] = 16'($countones(~(Wh[3][n] ^ h2)));
    return res;
  endfunction

  function automatic bit wbit(int l, int n, int col);
    return (l == 0) ? W0w[n][col] : Wh[l][n][col];
  endfunction

  task automatic load(input int layer, input bit thr, input int pe, input int addr, input longint data);
    ld = '0; ld.en = 1; ld.thr = thr; ld.layer = 4'(layer); ld.pe = 8'(pe);
    ld.addr = 16'(addr); ld.data = LD_DATA_W'(data);
    @(negedge clk);
  endtask

  int nout = 0;
  longint t_out [NIMG];
  longint t_first_in = -1;
  always @(posedge clk) if (rst_n && iv && ir && t_first_in < 0) t_first_in = cyc;
  assign orr = 1'b1;
  always @(posedge clk) if (rst_n && ov && orr) begin
    logic [159:0] e;
    e = expq.pop_front();
    for (int k = 0; k < 10; k++) begin
      checks++;
      if (od[k*16 +: 16] !== e[k*16 +: 16]) begin
        failures++;
        $display("HID=%0d image %0d class %0d got %0d exp %0d", HID, nout, k, od[k*16 +: 16], e[k*16 +: 16]);
      end
    end
    t_out[nout] = cyc;
    nout++;
  end

  initial begin
    done = 0; checks = 0; failures = 0;
    ld = '0; iv = 0; id = '0;
    for (int n = 0; n < HID; n++) begin
      for (int b = 0; b < 784; b += 16) W0w[n][b +: 16] = 16'($urandom);
      for (int b = 784; b < MW0; b++) W0w[n][b] = 1'b1;
      for (int l = 1; l < 4; l++)
        for (int b = 0; b < HID; b += 16) Wh[l][n][b +: 16] = 16'($urandom);
      T[0][n] = 392 + int'($urandom % 29) - 14;
      for (int l = 1; l < 3; l++)
        T[l][n] = HID / 2 + int'($urandom % (HID / 8 + 1)) - HID / 16;
    end
    for (int m = 0; m < NIMG; m++)
      begin
        for (int b = 0; b < 784; b += 16) img[m][b +: 16] = 16'($urandom);
        for (int b = 784; b < MW0; b++) img[m][b] = 1'b0;
      end
    for (int m = 0; m < NIMG; m++) expq.push_back(reference(img[m]));
    repeat (2) @(negedge clk);
    for (int l = 0; l < 4; l++) begin
      int fs;
      fs = MW[l] / SS[l];
      for (int n = 0; n < MH[l]; n++) begin
        for (int sf = 0; sf < fs; sf++) begin
          longint w;
          w = 0;
          for (int s = 0; s < SS[l]; s++) w[s] = wbit(l, n, sf*SS[l] + s);
          load(l, 0, n % PP[l], (n / PP[l]) * fs + sf, w);
        end
        if (l < 3) load(l, 1, n % PP[l], n / PP[l], longint'(T[l][n]));
      end
    end
    ld = '0;
    rst_n = 1;
    for (int m = 0; m < NIMG; m++)
      for (int w = 0; w < MW0 / IN_S; w++) begin
        @(negedge clk);
        iv = 1; id = img[m][w*IN_S +: IN_S];
        forever begin logic rr; #1 rr = ir; @(posedge clk); if (rr) break; @(negedge clk); end
      end
    @(negedge clk); iv = 0;
    wait (nout == NIMG);
    begin
      longint ii;
      ii = t_out[NIMG-1] - t_out[NIMG-2];
      $display("HID=%0d MW0=%0d folds %0d %0d %0d %0d: latency of image 0 %0d cycles, interval %0d cycles",
               HID, MW0, F0, F1, F2, F3, t_out[0] - t_first_in, ii);
      checks++;
      if (ii < FMAX || ii > FMAX + FMAX / 16) begin
        failures++; $display("HID=%0d interval out of range (expected %0d)", HID, FMAX);
      end
    end
    done = 1;
  end
endmodule

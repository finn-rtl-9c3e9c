// tb_conv_layer: self-checking test of a convolutional layer (SWU + MVTU).
//
// Instance A: binary 6 x 6 image, 4 input channels, 3 x 3 window, 4 output
// channels on 2 PEs of 2 lanes (Fm = 16, Fn = 2, Fs = 18). Instance B: the
// multi-bit first-layer case, 8-bit 3-channel pixels, 2 output channels on 2
// PEs of 3 lanes. Filters are random 4-D arrays [och][ky][kx][ich]; they are
// packed here into the interleaved filter matrix (column (ky*K+kx)*CH + ich)
// and loaded into the PEs. The expected output is the direct convolution
// sum_{ky,kx,ich} of the +-1 product (binary) or +-x (multi-bit) followed by
// the threshold, computed straight from the 4-D filters. Two images each, with
// random backpressure. Also checks the image II: in instance A with no
// backpressure, consecutive images are Fm*Fn*Fs cycles apart.
module tb_conv_layer;
  import finn_pkg::*;
  localparam int DIM = 6, K = 3, NIMG = 3;
  localparam int OD = DIM - K + 1;
  // A
  localparam int CA = 4, OA = 4, PA = 2, SA = 2;
  // B
  localparam int CB = 3, OB = 2, PB = 2, SB = 3, IB = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ld_t ld;
  logic a_iv, a_ir, a_ov, a_or, b_iv, b_ir, b_ov, b_or;
  logic [CA-1:0] a_id;  logic [OA-1:0] a_od;
  logic [CB*IB-1:0] b_id;  logic [OB-1:0] b_od;

  conv_layer #(.CH(CA), .IBITS(1), .DIM(DIM), .K(K), .OCH(OA), .P(PA), .S(SA),
               .LAYER_ID(3)) dut_a (
    .clk, .rst_n, .ld, .in_valid(a_iv), .in_ready(a_ir), .in_data(a_id),
    .out_valid(a_ov), .out_ready(a_or), .out_data(a_od));
  conv_layer #(.CH(CB), .IBITS(IB), .DIM(DIM), .K(K), .OCH(OB), .P(PB), .S(SB),
               .LAYER_ID(4)) dut_b (
    .clk, .rst_n, .ld, .in_valid(b_iv), .in_ready(b_ir), .in_data(b_id),
    .out_valid(b_ov), .out_ready(b_or), .out_data(b_od));

  bit fa [OA][K][K][CA];  int ta [OA];
  bit fb [OB][K][K][CB];  int tb [OB];
  bit xa [NIMG][DIM][DIM][CA];
  int xb [NIMG][DIM][DIM][CB];
  logic [OA-1:0] ea [$];
  logic [OB-1:0] eb [$];
  bit bp = 1;

  initial begin
    repeat (60000) @(posedge clk);
    $display("watchdog: na=%0d nb=%0d", na, nb);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input int layer, input bit thr, input int pe, input int addr, input longint data);
    ld = '0; ld.en = 1; ld.thr = thr; ld.layer = 4'(layer); ld.pe = 8'(pe);
    ld.addr = 16'(addr); ld.data = LD_DATA_W'(data);
    @(negedge clk);
    ld = '0;
  endtask

  always @(negedge clk) begin
    a_or <= bp ? ($urandom % 3 != 0) : 1'b1;
    b_or <= ($urandom % 3 != 0);
  end

  int na = 0, nb = 0, ones = 0, zeros = 0, last_a = 0, cyc = 0, ii_ok = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n && a_ov && a_or) begin
    logic [OA-1:0] e; e = ea.pop_front();
    checks++;
    if (a_od !== e) begin failures++; $display("A pixel %0d got %b exp %b", na, a_od, e); end
    for (int i = 0; i < OA; i++) if (a_od[i]) ones++; else zeros++;
    na++;
    if (na % (OD*OD) == 0) begin
      if (na == 3 * OD * OD) begin
        checks++;
        if (cyc - last_a != OD*OD*(OA/PA)*(K*K*CA/SA)) begin
          failures++; $display("A image interval %0d", cyc - last_a);
        end else ii_ok++;
      end
      last_a = cyc;
    end
  end
  always @(posedge clk) if (rst_n && b_ov && b_or) begin
    logic [OB-1:0] e; e = eb.pop_front();
    checks++;
    if (b_od !== e) begin failures++; $display("B pixel %0d got %b exp %b", nb, b_od, e); end
    nb++;
  end

  initial begin
    ld = '0; a_iv = 0; b_iv = 0; a_id = 0; b_id = 0;
    foreach (fa[o, y, x, c]) fa[o][y][x][c] = 1'($urandom);
    foreach (fb[o, y, x, c]) fb[o][y][x][c] = 1'($urandom);
    foreach (ta[o]) ta[o] = 15 + int'($urandom % 7);
    foreach (tb[o]) tb[o] = int'($urandom % 1001) - 500;
    foreach (xa[n, r, c, i]) xa[n][r][c][i] = 1'($urandom);
    foreach (xb[n, r, c, i]) xb[n][r][c][i] = int'($urandom % 256);
    // reference: direct convolution
    for (int n = 0; n < NIMG; n++)
      for (int r = 0; r < OD; r++)
        for (int c = 0; c < OD; c++) begin
          logic [OA-1:0] va; logic [OB-1:0] vb;
          for (int o = 0; o < OA; o++) begin
            int acc; acc = 0;
            for (int y = 0; y < K; y++) for (int x = 0; x < K; x++) for (int i = 0; i < CA; i++)
              acc += (fa[o][y][x][i] == xa[n][r+y][c+x][i]) ? 1 : 0;
            va[o] = (acc >= ta[o]);
          end
          for (int o = 0; o < OB; o++) begin
            int acc; acc = 0;
            for (int y = 0; y < K; y++) for (int x = 0; x < K; x++) for (int i = 0; i < CB; i++)
              acc += fb[o][y][x][i] ? xb[n][r+y][c+x][i] : -xb[n][r+y][c+x][i];
            vb[o] = (acc >= tb[o]);
          end
          ea.push_back(va); eb.push_back(vb);
        end
    repeat (2) @(negedge clk);
    // interleaved filter matrix, column (ky*K+kx)*CH + ich, mapped to PEs
    for (int o = 0; o < OA; o++) begin
      for (int sf = 0; sf < K*K*CA/SA; sf++) begin
        longint w; w = 0;
        for (int s = 0; s < SA; s++) begin
          int col; col = sf*SA + s;
          w[s] = fa[o][col/(K*CA)][(col/CA)%K][col%CA];
        end
        load(3, 0, o % PA, (o / PA) * (K*K*CA/SA) + sf, w);
      end
      load(3, 1, o % PA, o / PA, ta[o]);
    end
    for (int o = 0; o < OB; o++) begin
      for (int sf = 0; sf < K*K*CB/SB; sf++) begin
        longint w; w = 0;
        for (int s = 0; s < SB; s++) begin
          int col; col = sf*SB + s;
          w[s] = fb[o][col/(K*CB)][(col/CB)%K][col%CB];
        end
        load(4, 0, o % PB, (o / PB) * (K*K*CB/SB) + sf, w);
      end
      load(4, 1, o % PB, o / PB, longint'(tb[o]) & 64'hFFFF);
    end
    rst_n = 1;
    fork
      for (int n = 0; n < NIMG; n++) begin
        if (n == 1) begin @(negedge clk); a_iv = 0; wait (na == OD*OD); bp = 0; end
        for (int r = 0; r < DIM; r++) for (int c = 0; c < DIM; c++) begin
          @(negedge clk);
          a_iv = 1;
          for (int i = 0; i < CA; i++) a_id[i] = xa[n][r][c][i];
          forever begin logic rr; #1 rr = a_ir; @(posedge clk); if (rr) break; @(negedge clk); end
        end
      end
      for (int n = 0; n < NIMG; n++)
        for (int r = 0; r < DIM; r++) for (int c = 0; c < DIM; c++) begin
          @(negedge clk);
          b_iv = 1;
          for (int i = 0; i < CB; i++) b_id[i*IB +: IB] = IB'(xb[n][r][c][i]);
          forever begin logic rr; #1 rr = b_ir; @(posedge clk); if (rr) break; @(negedge clk); end
          if (n == NIMG-1 && r == DIM-1 && c == DIM-1) begin @(negedge clk); b_iv = 0; end
        end
    join
    @(negedge clk); a_iv = 0; b_iv = 0;
    wait (na == NIMG*OD*OD && nb == NIMG*OD*OD);
    repeat (10) @(posedge clk);
    checks += 2;
    if (ones == 0 || zeros == 0) begin failures++; $display("one-sided"); end
    if (ii_ok == 0) begin failures++; $display("II not measured"); end
    $display("pixels %0d / %0d", na, nb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

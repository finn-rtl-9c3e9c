// tb_cnv_top: end-to-end test of the CNV accelerator at its full size.
//
// Random binary weights and thresholds are generated for all nine layers and
// loaded through the load port (row n of a layer goes to PE n % P, word
// (n / P) * Fs + column / S). Three random 32 x 32 RGB images then stream
// through the whole network back to back, with the result stream held back for
// 20 cycles at the first result. A reference model written here
// computes every layer directly -- convolutions over interleaved pixels,
// OR pooling, fully connected layers -- and each 10 x 16-bit result word is
// compared with it. The test also measures the latency of the first image and
// the interval between the last two results, which in steady state must be
// the largest per-layer fold (8192 cycles) plus a small per-vector overhead,
// and it counts that each mechanism happened: input held off by the first
// layer, result backpressure, pooling output, a new image entering before the
// previous result left, and both threshold outcomes inside the network.
module tb_cnv_top;
  import finn_pkg::*;
  localparam int NIMG = 3;
  localparam int NL = 9;
  // per layer: matrix width, height, P, S (default folding of cnv_top)
  localparam int MW [NL] = '{27, 576, 576, 1152, 1152, 2304, 256, 512, 512};
  localparam int MH [NL] = '{64, 64, 128, 128, 256, 256, 512, 512, 10};
  localparam int PP [NL] = '{64, 64, 32, 32, 8, 4, 1, 1, 1};
  localparam int SS [NL] = '{3, 64, 64, 64, 64, 32, 16, 32, 4};
  localparam int FOLD [NL] = '{8100, 7056, 5184, 7200, 5184, 4608, 8192, 8192, 1280};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ld_t ld;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [23:0] in_data;
  logic [159:0] out_data;

  cnv_top dut (.clk, .rst_n, .ld, .in_valid, .in_ready, .in_data,
               .out_valid, .out_ready, .out_data);

  bit [2303:0] W [NL][512];
  int          T [NL][512];
  int          img [NIMG][32][32][3];
  logic [159:0] expq [$];

  longint cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog at cycle %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  function automatic int pop(bit [2303:0] v);
    return $countones(v);
  endfunction

  // binary convolution layer on DxD pixels of C channels -> OD x OD
  function automatic void conv_bin(int l, int C, int D, ref bit [255:0] fin [32][32],
                                   ref bit [255:0] fout [32][32]);
    int OD = D - 2;
    for (int r = 0; r < OD; r++)
      for (int c = 0; c < OD; c++) begin
        bit [2303:0] col = '0;
        bit [2303:0] mask = '0;
        for (int y = 0; y < 3; y++) for (int x = 0; x < 3; x++)
          for (int i = 0; i < C; i++) col[(y*3+x)*C + i] = fin[r+y][c+x][i];
        for (int b = 0; b < MW[l]; b++) mask[b] = 1'b1;
        fout[r][c] = '0;
        for (int n = 0; n < MH[l]; n++)
          fout[r][c][n] = (pop(~(W[l][n] ^ col) & mask) >= T[l][n]);
      end
  endfunction

  function automatic void pool2(int C, int D, ref bit [255:0] fin [32][32],
                                ref bit [255:0] fout [32][32]);
    for (int r = 0; r < D/2; r++)
      for (int c = 0; c < D/2; c++)
        fout[r][c] = fin[2*r][2*c] | fin[2*r][2*c+1] | fin[2*r+1][2*c] | fin[2*r+1][2*c+1];
  endfunction

  function automatic bit [511:0] fc(int l, bit [511:0] v);
    bit [2303:0] x = '0, mask = '0;
    bit [511:0] o = '0;
    for (int b = 0; b < MW[l]; b++) begin x[b] = v[b]; mask[b] = 1'b1; end
    for (int n = 0; n < MH[l]; n++) o[n] = (pop(~(W[l][n] ^ x) & mask) >= T[l][n]);
    return o;
  endfunction

  int act_ones = 0, act_zeros = 0;

  function automatic logic [159:0] reference(int m);
    bit [255:0] a [32][32];
    bit [255:0] b [32][32];
    bit [511:0] v;
    bit [2303:0] x, mask;
    logic [159:0] res;
    // L0: 8-bit inputs, +-x products
    for (int r = 0; r < 30; r++)
      for (int c = 0; c < 30; c++) begin
        a[r][c] = '0;
        for (int n = 0; n < 64; n++) begin
          int acc = 0;
          for (int y = 0; y < 3; y++) for (int xx = 0; xx < 3; xx++)
            for (int i = 0; i < 3; i++)
              acc += W[0][n][(y*3+xx)*3+i] ? img[m][r+y][c+xx][i] : -img[m][r+y][c+xx][i];
          a[r][c][n] = (acc >= T[0][n]);
          if (a[r][c][n]) act_ones++; else act_zeros++;
        end
      end
    conv_bin(1, 64, 30, a, b);     // 28x28x64
    pool2(64, 28, b, a);           // 14x14x64
    conv_bin(2, 64, 14, a, b);     // 12x12x128
    conv_bin(3, 128, 12, b, a);    // 10x10x128
    pool2(128, 10, a, b);          // 5x5x128
    conv_bin(4, 128, 5, b, a);     // 3x3x256
    conv_bin(5, 256, 3, a, b);     // 1x1x256
    v = '0; v[255:0] = b[0][0];
    v = fc(6, v);
    v = fc(7, v);
    x = '0; mask = '0;
    for (int i = 0; i < 512; i++) begin x[i] = v[i]; mask[i] = 1'b1; end
    for (int n = 0; n < 10; n++) res[n*16 +: 16] = 16'(pop(~(W[8][n] ^ x) & mask));
    return res;
  endfunction

  // ---------------- stimulus ----------------
  task automatic load(input int layer, input bit thr, input int pe, input int addr, input longint data);
    ld = '0; ld.en = 1; ld.thr = thr; ld.layer = 4'(layer); ld.pe = 8'(pe);
    ld.addr = 16'(addr); ld.data = LD_DATA_W'(data);
    @(negedge clk);
  endtask

  // the first result is held back for 20 cycles, later ones are taken at once
  int first_wait = 0;
  always @(posedge clk) if (out_valid && nout == 0) first_wait++;
  always @(negedge clk) out_ready <= !(nout == 0 && first_wait < 20);

  int nin = 0, nout = 0, held = 0, stalled = 0, pooled = 0, overlap = 0;
  longint t_first_in = -1, t_out [NIMG];

  always @(posedge clk) if (rst_n) begin
    if (in_valid && !in_ready) held++;
    if (out_valid && !out_ready) stalled++;
    if (dut.u_pool0.out_valid && dut.u_pool0.out_ready) pooled++;
    if (in_valid && in_ready) begin
      if (t_first_in < 0) t_first_in = cyc;
      nin++;
      if (nin > 1024 && nout == 0) overlap++;
    end
    if (out_valid && out_ready) begin
      logic [159:0] e;
      e = expq.pop_front();
      for (int k = 0; k < 10; k++) begin
        checks++;
        if (out_data[k*16 +: 16] !== e[k*16 +: 16]) begin
          failures++;
          $display("image %0d class %0d got %0d exp %0d", nout, k, out_data[k*16 +: 16], e[k*16 +: 16]);
        end
      end
      t_out[nout] = cyc;
      $display("image %0d result at cycle %0d", nout, cyc);
      nout++;
    end
  end

  initial begin
    ld = '0; in_valid = 0; in_data = '0;
    for (int l = 0; l < NL; l++) begin
      int spread;
      spread = (l == 0) ? 400 : $rtoi($sqrt(real'(MW[l]))) / 2 + 1;
      for (int n = 0; n < MH[l]; n++) begin
        for (int b = 0; b < MW[l]; b += 32) W[l][n][b +: 32] = $urandom;
        for (int b = MW[l]; b < 2304; b++) W[l][n][b] = 1'b0;
        if (l == 0) T[l][n] = int'($urandom % (2*spread+1)) - spread;
        else        T[l][n] = MW[l]/2 + int'($urandom % (2*spread+1)) - spread;
      end
    end
    foreach (img[m, r, c, i]) img[m][r][c][i] = int'($urandom % 256);
    for (int m = 0; m < NIMG; m++) expq.push_back(reference(m));
    $display("reference done");
    repeat (2) @(negedge clk);
    for (int l = 0; l < NL; l++) begin
      int fs;
      fs = MW[l] / SS[l];
      for (int n = 0; n < MH[l]; n++) begin
        for (int sf = 0; sf < fs; sf++) begin
          longint w;
          w = 0;
          for (int s = 0; s < SS[l]; s++) w[s] = W[l][n][sf*SS[l] + s];
          load(l, 0, n % PP[l], (n / PP[l]) * fs + sf, w);
        end
        if (l < 8) load(l, 1, n % PP[l], n / PP[l], longint'(T[l][n]) & 64'hFFFF);
      end
    end
    ld = '0;
    $display("parameters loaded at cycle %0d", cyc);
    rst_n = 1;
    for (int m = 0; m < NIMG; m++)
      for (int r = 0; r < 32; r++) for (int c = 0; c < 32; c++) begin
        @(negedge clk);
        in_valid = 1;
        in_data = {8'(img[m][r][c][2]), 8'(img[m][r][c][1]), 8'(img[m][r][c][0])};
        forever begin logic rr; #1 rr = in_ready; @(posedge clk); if (rr) break; @(negedge clk); end
        
      end
    @(negedge clk); in_valid = 0;
    wait (nout == NIMG);
    repeat (20) @(posedge clk);
    begin
      longint lat, ii;
      lat = t_out[0] - t_first_in;
      ii  = t_out[NIMG-1] - t_out[NIMG-2];
      $display("latency %0d cycles, interval %0d cycles", lat, ii);
      $display("input held %0d, result stalls %0d, pooled pixels %0d, overlap %0d, L0 ones/zeros %0d/%0d",
               held, stalled, pooled, overlap, act_ones, act_zeros);
      checks += 6;
      if (ii < 8192 || ii > 8192 + 8192/16) begin failures++; $display("interval out of range"); end
      if (held == 0)    begin failures++; $display("input never held off"); end
      if (stalled == 0) begin failures++; $display("no result backpressure"); end
      if (pooled != NIMG * 14 * 14) begin failures++; $display("pool count %0d", pooled); end
      if (overlap == 0) begin failures++; $display("no image overlap"); end
      if (act_ones == 0 || act_zeros == 0) begin failures++; $display("one-sided thresholds"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

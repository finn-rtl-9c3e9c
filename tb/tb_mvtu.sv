// tb_mvtu: self-checking test of the Matrix-Vector-Threshold Unit.
//
// Instance A is the folding example of a 6 x 4 binary matrix on 3 PEs with 2
// SIMD lanes each (Fn = 2, Fs = 2, F = 4 cycles per vector). Instance B has
// multi-bit (8-bit) inputs and no thresholding: a 4 x 6 matrix on 2 PEs of
// 3 lanes, 16-bit raw results. Weights and thresholds are random and loaded
// through the load port with the row-to-PE mapping row = nf * P + pe. Input
// vectors arrive with random gaps and outputs meet random backpressure; each
// output is compared with a product computed here. A third phase streams
// vectors with no gaps and no backpressure and checks that instance A accepts
// one vector every F = 4 cycles.
module tb_mvtu;
  import finn_pkg::*;
  localparam int MWA = 4, MHA = 6, PA = 3, SA = 2;
  localparam int MWB = 6, MHB = 4, PB = 2, SB = 3, IBB = 8;
  localparam int NVEC = 60;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  ld_t ld;
  logic a_iv, a_ir, a_ov, a_or;
  logic [SA-1:0] a_id;
  logic [MHA-1:0] a_od;
  logic b_iv, b_ir, b_ov, b_or;
  logic [SB*IBB-1:0] b_id;
  logic [MHB*16-1:0] b_od;

  mvtu #(.MW(MWA), .MH(MHA), .P(PA), .S(SA), .LAYER_ID(1)) dut_a (
    .clk, .rst_n, .ld, .in_valid(a_iv), .in_ready(a_ir), .in_data(a_id),
    .out_valid(a_ov), .out_ready(a_or), .out_data(a_od));
  mvtu #(.MW(MWB), .MH(MHB), .P(PB), .S(SB), .IBITS(IBB), .THRESH(0), .OBITS(16),
         .LAYER_ID(2)) dut_b (
    .clk, .rst_n, .ld, .in_valid(b_iv), .in_ready(b_ir), .in_data(b_id),
    .out_valid(b_ov), .out_ready(b_or), .out_data(b_od));

  bit wa [MHA][MWA];  int ta [MHA];
  bit wb [MHB][MWB];
  bit xa [2*NVEC][MWA];
  int xb [NVEC][MWB];
  bit rand_gaps = 1;

  initial begin
    repeat (50000) @(posedge clk);
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

  // drivers
  initial begin : drive_a
    a_iv = 0; a_id = 0;
    wait (rst_n);
    for (int v = 0; v < 2*NVEC; v++)
      for (int sf = 0; sf < MWA/SA; sf++) begin
        @(negedge clk);
        while (rand_gaps && v < NVEC && $urandom % 3 == 0) begin a_iv = 0; @(negedge clk); end
        a_iv = 1;
        for (int s = 0; s < SA; s++) a_id[s] = xa[v][sf*SA+s];
        forever begin logic r; #1 r = a_ir; @(posedge clk); if (r) break; @(negedge clk); end
      end
    @(negedge clk); a_iv = 0;
  end

  initial begin : drive_b
    b_iv = 0; b_id = 0;
    wait (rst_n);
    for (int v = 0; v < NVEC; v++)
      for (int sf = 0; sf < MWB/SB; sf++) begin
        @(negedge clk);
        while ($urandom % 3 == 0) begin b_iv = 0; @(negedge clk); end
        b_iv = 1;
        for (int s = 0; s < SB; s++) b_id[s*IBB +: IBB] = IBB'(xb[v][sf*SB+s]);
        forever begin logic r; #1 r = b_ir; @(posedge clk); if (r) break; @(negedge clk); end
      end
    @(negedge clk); b_iv = 0;
  end

  always @(negedge clk) begin
    a_or <= rand_gaps ? ($urandom % 4 != 0) : 1'b1;
    b_or <= ($urandom % 4 != 0);
  end

  int na = 0, nb = 0, stalls = 0, ones = 0, zeros = 0;
  int t_prev = -1, t_cyc = 0, gaps_ok = 0;
  always @(posedge clk) t_cyc++;
  always @(posedge clk) if (a_ov && !a_or) stalls++;

  always @(posedge clk) if (rst_n && a_ov && a_or) begin
    for (int n = 0; n < MHA; n++) begin
      int d; d = 0;
      for (int y = 0; y < MWA; y++) d += (wa[n][y] == xa[na][y]);
      checks++;
      if (a_od[n] != (d >= ta[n])) begin
        failures++; $display("A vec %0d row %0d got %0b exp %0d>=%0d", na, n, a_od[n], d, ta[n]);
      end
      if (a_od[n]) ones++; else zeros++;
    end
    if (na >= NVEC + 2) begin
      checks++;
      if (t_cyc - t_prev != (MHA/PA)*(MWA/SA)) begin
        failures++; $display("A interval %0d", t_cyc - t_prev);
      end else gaps_ok++;
    end
    t_prev = t_cyc;
    na++;
  end

  always @(posedge clk) if (rst_n && b_ov && b_or) begin
    for (int n = 0; n < MHB; n++) begin
      int d; d = 0;
      for (int y = 0; y < MWB; y++) d += wb[n][y] ? xb[nb][y] : -xb[nb][y];
      checks++;
      if (int'($signed(b_od[n*16 +: 16])) != d) begin
        failures++; $display("B vec %0d row %0d got %0d exp %0d", nb, n, $signed(b_od[n*16 +: 16]), d);
      end
    end
    nb++;
  end

  initial begin
    ld = '0;
    for (int n = 0; n < MHA; n++) begin
      for (int y = 0; y < MWA; y++) wa[n][y] = 1'($urandom);
      ta[n] = int'($urandom % 5);
    end
    for (int n = 0; n < MHB; n++) for (int y = 0; y < MWB; y++) wb[n][y] = 1'($urandom);
    for (int v = 0; v < 2*NVEC; v++) for (int y = 0; y < MWA; y++) xa[v][y] = 1'($urandom);
    for (int v = 0; v < NVEC; v++) for (int y = 0; y < MWB; y++) xb[v][y] = int'($urandom % 256);
    repeat (3) @(negedge clk);
    // weights: PE p holds rows nf*P+p, word nf*Fs+sf, lane s = column sf*S+s
    for (int n = 0; n < MHA; n++)
      for (int sf = 0; sf < MWA/SA; sf++) begin
        longint w = 0;
        for (int s = 0; s < SA; s++) w[s] = wa[n][sf*SA+s];
        load(1, 0, n % PA, (n / PA) * (MWA/SA) + sf, w);
      end
    for (int n = 0; n < MHA; n++) load(1, 1, n % PA, n / PA, ta[n]);
    for (int n = 0; n < MHB; n++)
      for (int sf = 0; sf < MWB/SB; sf++) begin
        longint w = 0;
        for (int s = 0; s < SB; s++) w[s] = wb[n][sf*SB+s];
        load(2, 0, n % PB, (n / PB) * (MWB/SB) + sf, w);
      end
    rst_n = 1;
    wait (na == NVEC && nb == NVEC);
    rand_gaps = 0;
    wait (na == 2*NVEC);
    repeat (5) @(posedge clk);
    checks += 3;
    if (stalls == 0) begin failures++; $display("no output backpressure seen"); end
    if (ones == 0 || zeros == 0) begin failures++; $display("thresholds one-sided"); end
    if (gaps_ok == 0) begin failures++; $display("no full-rate vectors"); end
    $display("backpressure cycles %0d, full-rate intervals %0d", stalls, gaps_ok);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

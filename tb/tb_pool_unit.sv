// tb_pool_unit: self-checking test of the binary max-pooling unit.
//
// Streams three 6 x 6 images of 8 channels (a 2 x 2 pool) and one extra
// configuration, a 7 x 7 image with a 3 x 3 pool where the last row and
// column fall outside any full block. Pixel bits are set with probability
// 1/4 so that both pooled values occur. The expected pooled pixel is the
// maximum over the window of the +-1 values (computed with integer max, not
// with OR), re-encoded as a bit. Random input gaps and output backpressure.
module tb_pool_unit;
  localparam int CH = 8, NIMG = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic iv [2], ir [2], ov [2], orr [2];
  logic [CH-1:0] id [2], od [2];

  pool_unit #(.CH(CH), .DIM(6), .K(2)) dut0 (
    .clk, .rst_n, .in_valid(iv[0]), .in_ready(ir[0]), .in_data(id[0]),
    .out_valid(ov[0]), .out_ready(orr[0]), .out_data(od[0]));
  pool_unit #(.CH(CH), .DIM(7), .K(3)) dut1 (
    .clk, .rst_n, .in_valid(iv[1]), .in_ready(ir[1]), .in_data(id[1]),
    .out_valid(ov[1]), .out_ready(orr[1]), .out_data(od[1]));

  logic [CH-1:0] expq [2][$];
  int nout [2] = '{0, 0};
  int nexp [2] = '{0, 0};
  int ones = 0, zeros = 0, stalls = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    orr[0] <= ($urandom % 3 != 0);
    orr[1] <= ($urandom % 3 != 0);
  end

  for (genvar u = 0; u < 2; u++) begin : g_chk
    always @(posedge clk) if (rst_n) begin
      if (ov[u] && !orr[u]) stalls++;
      if (ov[u] && orr[u]) begin
        logic [CH-1:0] e;
        e = expq[u].pop_front();
        checks++;
        if (od[u] !== e) begin failures++; $display("unit %0d out %0d got %h exp %h", u, nout[u], od[u], e); end
        for (int c = 0; c < CH; c++) if (od[u][c]) ones++; else zeros++;
        nout[u]++;
      end
    end
  end

  task automatic run(input int u, input int dim, input int k);
    logic [CH-1:0] img [][];
    img = new[dim];
    for (int r = 0; r < dim; r++) begin
      img[r] = new[dim];
      for (int c = 0; c < dim; c++)
        for (int b = 0; b < CH; b++) img[r][c][b] = ($urandom % 4 == 0);
    end
    for (int br = 0; br + k <= dim; br += k)
      for (int bc = 0; bc + k <= dim; bc += k) begin
        logic [CH-1:0] e;
        for (int b = 0; b < CH; b++) begin
          int m = -1;
          for (int i = 0; i < k; i++)
            for (int j = 0; j < k; j++) begin
              int v = img[br+i][bc+j][b] ? 1 : -1;
              if (v > m) m = v;
            end
          e[b] = (m == 1);
        end
        expq[u].push_back(e);
        nexp[u]++;
      end
    for (int r = 0; r < dim; r++)
      for (int c = 0; c < dim; c++) begin
        @(negedge clk);
        while ($urandom % 4 == 0) begin iv[u] = 0; @(negedge clk); end
        iv[u] = 1; id[u] = img[r][c];
        forever begin logic rr; #1 rr = ir[u]; @(posedge clk); if (rr) break; @(negedge clk); end
      end
    @(negedge clk); iv[u] = 0;
  endtask

  initial begin
    iv[0] = 0; iv[1] = 0; id[0] = 0; id[1] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      for (int n = 0; n < NIMG; n++) run(0, 6, 2);
      for (int n = 0; n < NIMG; n++) run(1, 7, 3);
    join
    repeat (10) @(posedge clk);
    checks += 3;
    if (nout[0] != nexp[0] || nout[1] != nexp[1]) begin failures++; $display("count mismatch"); end
    if (ones == 0 || zeros == 0) begin failures++; $display("one-sided outputs"); end
    if (stalls == 0) begin failures++; $display("no backpressure"); end
    $display("pooled pixels %0d + %0d, backpressure cycles %0d", nout[0], nout[1], stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

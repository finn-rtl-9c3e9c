// tb_swu: self-checking test of the Sliding Window Unit.
//
// Two configurations run side by side, each streaming three images back to
// back with random input gaps and random output backpressure:
//   0: 5 x 5 image, 4 binary channels, 3 x 3 window, 2-channel output words
//   1: 4 x 4 image, 4 binary channels, 3 x 3 window, 4-channel words, padding
//      of one pixel of +1 (all bits set) around the image
// The expected word sequence -- for each output position, window rows,
// window columns, then channel chunks, with pad pixels outside the image --
// is built here from the same random pixels. The test also checks that output
// started before the whole first image was in, that the input was held off
// (ring buffer full) at least once, and that pad words were produced. After
// the last image, only the leading pad words of a next image may appear.
module tb_swu;
  localparam int NIMG = 3, CH = 4, K = 3;
  localparam int DIMS [2] = '{5, 4};
  localparam int SS   [2] = '{2, 4};
  localparam int PADS [2] = '{0, 1};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int done = 0, pads_seen = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 0; g < 2; g++) begin : g_cfg
    localparam int DIM = DIMS[g], S = SS[g], PAD = PADS[g];
    localparam int OD = DIM + 2*PAD - K + 1;
    localparam int NOUT = NIMG * OD * OD * K * K * (CH / S);

    logic iv, ir, ov, orr;
    logic [CH-1:0] id;
    logic [S-1:0]  od;

    swu #(.CH(CH), .IBITS(1), .DIM(DIM), .K(K), .S(S), .PAD(PAD), .PAD_BIT(1'b1)) dut (
      .clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(id),
      .out_valid(ov), .out_ready(orr), .out_data(od));

    logic [CH-1:0] img [NIMG][DIM][DIM];
    logic [S-1:0]  expq [$];
    bit            padq [$];
    int nin = 0, nout = 0, held = 0, early = 0;

    always @(negedge clk) orr <= ($urandom % 3 != 0);

    always @(posedge clk) begin
      if (rst_n && iv && !ir) held++;
      if (rst_n && iv && ir) nin++;
      if (rst_n && ov && orr) begin
        logic [S-1:0] e;
        // beyond the last image only the next image's leading pad words may
        // appear (they need no input pixel); without padding nothing may
        if (expq.size() == 0) begin
          e = '1;
          if (PAD == 0) begin failures++; $display("cfg %0d extra output", g); end
        end else begin
          e = expq.pop_front();
          if (padq.pop_front()) pads_seen++;
        end
        checks++;
        if (od !== e) begin failures++; $display("cfg %0d word %0d got %b exp %b", g, nout, od, e); end
        if (nout == 0 && nin < DIM * DIM) early = 1;
        nout++;
      end
    end

    initial begin
      iv = 0; id = 0;
      for (int n = 0; n < NIMG; n++)
        for (int r = 0; r < DIM; r++)
          for (int c = 0; c < DIM; c++) img[n][r][c] = CH'($urandom);
      for (int n = 0; n < NIMG; n++)
        for (int orow = 0; orow < OD; orow++)
          for (int ocol = 0; ocol < OD; ocol++)
            for (int ky = 0; ky < K; ky++)
              for (int kx = 0; kx < K; kx++)
                for (int c = 0; c < CH / S; c++) begin
                  int y, x;
                  y = orow + ky - PAD; x = ocol + kx - PAD;
                  if (y < 0 || y >= DIM || x < 0 || x >= DIM) begin
                    expq.push_back('1); padq.push_back(1);
                  end else begin
                    expq.push_back(img[n][y][x][c*S +: S]); padq.push_back(0);
                  end
                end
      wait (rst_n);
      for (int n = 0; n < NIMG; n++)
        for (int r = 0; r < DIM; r++)
          for (int c = 0; c < DIM; c++) begin
            @(negedge clk);
            while ($urandom % 4 == 0) begin iv = 0; @(negedge clk); end
            iv = 1; id = img[n][r][c];
            forever begin logic rr; #1 rr = ir; @(posedge clk); if (rr) break; @(negedge clk); end
          end
      @(negedge clk); iv = 0;
      wait (nout == NOUT);
      repeat (10) @(posedge clk);
      checks += 2;
      if (!early) begin failures++; $display("cfg %0d output did not start early", g); end
      if (held == 0) begin failures++; $display("cfg %0d input never held off", g); end
      $display("cfg %0d: outputs %0d, input hold cycles %0d", g, nout, held);
      done++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (done == 2);
    checks++;
    if (pads_seen == 0) begin failures++; $display("no pad words"); end
    $display("pad words %0d", pads_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

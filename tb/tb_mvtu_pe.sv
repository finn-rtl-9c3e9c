// tb_mvtu_pe: self-checking test of one MVTU processing element.
//
// Two PEs are tested side by side: a binary one (8 lanes, XNOR-popcount,
// thresholded) and a multi-bit-input one (4 lanes of 4-bit unsigned inputs,
// +-x products). Random weights and thresholds are loaded, then random rows
// of two synapse folds are accumulated. The expected dot product and the
// expected threshold decision are computed here from the same random data.
module tb_mvtu_pe;
  localparam int S = 8, WD = 4, TD = 2, TW = 6;
  localparam int S2 = 4, IB2 = 4, TW2 = 8;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // binary PE
  logic w_we, t_we, en, first;
  logic [2:0] w_waddr, widx;
  logic [1:0] t_waddr, tidx;
  logic [S-1:0] w_wdata, in_vec;
  logic signed [TW-1:0] t_wdata, sum;
  logic out_bit;
  // multi-bit PE
  logic [S2-1:0] w_wdata2;
  logic signed [TW2-1:0] t_wdata2, sum2;
  logic [S2*IB2-1:0] in_vec2;
  logic out_bit2;

  mvtu_pe #(.S(S), .IBITS(1), .WDEPTH(WD), .TDEPTH(TD), .TW(TW), .THRESH(1)) dut (
    .clk, .w_we, .w_waddr, .w_wdata, .t_we, .t_waddr, .t_wdata,
    .en, .first, .widx, .tidx, .in_vec, .sum, .out_bit);

  mvtu_pe #(.S(S2), .IBITS(IB2), .WDEPTH(WD), .TDEPTH(TD), .TW(TW2), .THRESH(1)) dut2 (
    .clk, .w_we, .w_waddr, .w_wdata(w_wdata2), .t_we, .t_waddr, .t_wdata(t_wdata2),
    .en, .first, .widx, .tidx, .in_vec(in_vec2), .sum(sum2), .out_bit(out_bit2));

  logic [S-1:0]  wm  [WD];
  logic [S2-1:0] wm2 [WD];
  int thr [TD], thr2 [TD];
  int ones = 0, zeros = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int dot_bin(logic [S-1:0] w, logic [S-1:0] x);
    int c = 0;
    for (int i = 0; i < S; i++) if (w[i] == x[i]) c++;
    return c;
  endfunction

  function automatic int dot_mb(logic [S2-1:0] w, logic [S2*IB2-1:0] x);
    int c = 0;
    for (int i = 0; i < S2; i++) begin
      int v = int'(x[i*IB2 +: IB2]);
      c += w[i] ? v : -v;
    end
    return c;
  endfunction

  initial begin
    w_we = 0; t_we = 0; en = 0; first = 0; widx = 0; tidx = 0;
    in_vec = 0; in_vec2 = 0; w_waddr = 0; t_waddr = 0;
    w_wdata = 0; w_wdata2 = 0; t_wdata = 0; t_wdata2 = 0;
    @(negedge clk);
    for (int a = 0; a < WD; a++) begin
      wm[a] = S'($urandom); wm2[a] = S2'($urandom);
      w_we = 1; w_waddr = 3'(a); w_wdata = wm[a]; w_wdata2 = wm2[a];
      @(negedge clk);
    end
    w_we = 0;
    for (int a = 0; a < TD; a++) begin
      thr[a]  = 5 + int'($urandom % 7);           // around half of 16
      thr2[a] = int'($urandom % 41) - 20;
      t_we = 1; t_waddr = 2'(a); t_wdata = TW'(thr[a]); t_wdata2 = TW2'(thr2[a]);
      @(negedge clk);
    end
    t_we = 0;
    // 200 rows, each two synapse folds, row index picks the threshold
    for (int r = 0; r < 200; r++) begin
      int nf, exp1, exp2;
      nf = int'($urandom % TD);
      exp1 = 0; exp2 = 0;
      for (int sf = 0; sf < 2; sf++) begin
        in_vec  = S'($urandom);
        in_vec2 = (S2*IB2)'($urandom);
        widx = 3'(nf * 2 + sf); tidx = 2'(nf);
        first = (sf == 0); en = 1;
        exp1 += dot_bin(wm[nf*2+sf], in_vec);
        exp2 += dot_mb(wm2[nf*2+sf], in_vec2);
        #1;
        if (sf == 1) begin
          checks += 4;
          if (int'(sum) != exp1) begin failures++; $display("bin sum %0d exp %0d", sum, exp1); end
          if (out_bit != (exp1 >= thr[nf])) begin failures++; $display("bin bit"); end
          if (int'(sum2) != exp2) begin failures++; $display("mb sum %0d exp %0d", sum2, exp2); end
          if (out_bit2 != (exp2 >= thr2[nf])) begin failures++; $display("mb bit"); end
          if (out_bit) ones++; else zeros++;
        end
        @(negedge clk);
        // an idle cycle with en low must not disturb the accumulator
        if (sf == 0 && ($urandom % 2)) begin en = 0; @(negedge clk); end
      end
      en = 0;
    end
    checks++;
    if (ones == 0 || zeros == 0) begin failures++; $display("threshold never decided both ways"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

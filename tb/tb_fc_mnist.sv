// tb_fc_mnist: the fully connected MNIST workloads, built from the MVTU
// library and run end to end (see tb_fc_net for what each run checks).
//   SFC-fix: 784-256-256-256-10, P x S = 1x16, 1x4, 1x4, 1x1
//            -> folds 12544, 16384, 16384, 2560
//   LFC-fix: 784-1024-1024-1024-10, first layer padded to 832 columns,
//            P x S = 1x64, 4x16, 4x16, 1x1 -> folds 13312, 16384, 16384, 10240
//   SFC-max: 784-256-256-256-10, first layer padded to 832 columns,
//            P x S = 256x64, 64x64, 64x64, 10x16 -> folds 13, 16, 16, 16
//   LFC-max: 784-1024-1024-1024-10, first layer padded to 832 columns,
//            P x S = 128x64, 128x64, 128x64, 10x8 -> folds 104, 128, 128, 128
//   MFC:     784-512-512-512-10, P x S = 2x16, 2x16, 2x16, 1x1
//            -> folds 12544, 8192, 8192, 5120 (no folding is published for
//            this network; these are chosen to stay under the SFC/LFC rate)
// The SFC and LFC folds are the published ones. The networks run side by
// side on the same clock.
module tb_fc_mnist;
  logic clk = 0;
  always #5 clk = ~clk;
  logic done_s, done_l, done_m, done_x, done_y;
  int   chk_s, chk_l, chk_m, chk_x, chk_y, fail_s, fail_l, fail_m, fail_x, fail_y;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  tb_fc_net #(.HID(256), .P0(1), .S0(16), .P1(1), .S1(4), .P2(1), .S2(4), .P3(1), .S3(1))
    u_sfc (.clk, .done(done_s), .checks(chk_s), .failures(fail_s));
  tb_fc_net #(.HID(1024), .MW0(832), .IN_S(64), .P0(1), .S0(64), .P1(4), .S1(16), .P2(4), .S2(16), .P3(1), .S3(1))
    u_lfc (.clk, .done(done_l), .checks(chk_l), .failures(fail_l));
  tb_fc_net #(.HID(512), .P0(2), .S0(16), .P1(2), .S1(16), .P2(2), .S2(16), .P3(1), .S3(1))
    u_mfc (.clk, .done(done_m), .checks(chk_m), .failures(fail_m));
  tb_fc_net #(.HID(256), .MW0(832), .IN_S(64), .P0(256), .S0(64), .P1(64), .S1(64),
              .P2(64), .S2(64), .P3(10), .S3(16))
    u_sfc_max (.clk, .done(done_x), .checks(chk_x), .failures(fail_x));
  tb_fc_net #(.HID(1024), .MW0(832), .IN_S(64), .P0(128), .S0(64), .P1(128), .S1(64),
              .P2(128), .S2(64), .P3(10), .S3(8))
    u_lfc_max (.clk, .done(done_y), .checks(chk_y), .failures(fail_y));

  initial begin
    fork
      wait (done_s && done_l && done_m && done_x && done_y);
      begin
        repeat (600000) @(posedge clk);
        $display("watchdog at cycle %0d", cyc);
      end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", chk_s + chk_l + chk_m + chk_x + chk_y,
             fail_s + fail_l + fail_m + fail_x + fail_y + ((done_s && done_l && done_m && done_x && done_y) ? 0 : 1));
    $finish;
  end
endmodule

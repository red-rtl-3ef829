// tb_red_workloads: the benchmark layers of the RED evaluation that the
// default (FCN_Deconv1-sized) build does not hold, run with their own
// kernel size, stride and input size but with the channel counts cut down
// so that they simulate quickly:
//   * GAN_Deconv3 / GAN_Deconv4: 4x4 kernel, stride 2, padding 1, inputs
//     4x4 and 6x6 (8 and 12 wide outputs); C=8, M=4 instead of 512/256.
//   * GAN_Deconv1 / GAN_Deconv2: 5x5 kernel, stride 2, padding 1, inputs
//     8x8 and 4x4 (17 and 9 wide outputs with symmetric padding);
//     C=8, M=4 instead of 512/256.
//   * FCN_Deconv2: 16x16 kernel, stride 8, no padding, full 70x70 input
//     (568x568 output), in the area-efficient form with 128 crossbars of
//     2C rows (two phases per tile); C=M=2 instead of 21; then a small
//     3x2 input on the same build.
// Every output pixel and every layer's clock count are checked against
// the direct zero-insertion deconvolution of the harness.
module tb_red_workloads;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int ck [3], fl [3], nt [3], ncr [3], nbo [3], nfo [3], nla [3];
  logic fin [3];

  red_top_harness #(.KH(4), .KW(4), .S(2), .PAD(1), .C(8), .M(4), .FOLD(1),
                    .MAX_IH(6), .MAX_IW(6), .NLAYER(2), .LAYER_IH('{4, 6}), .LAYER_IW('{4, 6}), .SEED(3)) gan34 (
    .clk, .checks(ck[0]), .failures(fl[0]), .n_tiles(nt[0]), .n_crop(ncr[0]), .n_border(nbo[0]),
    .n_fold(nfo[0]), .n_layers(nla[0]), .finished(fin[0]));

  red_top_harness #(.KH(5), .KW(5), .S(2), .PAD(1), .C(8), .M(4), .FOLD(1),
                    .MAX_IH(8), .MAX_IW(8), .NLAYER(2), .LAYER_IH('{8, 4}), .LAYER_IW('{8, 4}), .SEED(5)) gan12 (
    .clk, .checks(ck[1]), .failures(fl[1]), .n_tiles(nt[1]), .n_crop(ncr[1]), .n_border(nbo[1]),
    .n_fold(nfo[1]), .n_layers(nla[1]), .finished(fin[1]));

  red_top_harness #(.KH(16), .KW(16), .S(8), .PAD(0), .C(2), .M(2), .FOLD(2),
                    .MAX_IH(70), .MAX_IW(70), .NLAYER(2), .LAYER_IH('{70, 3}), .LAYER_IW('{70, 2}), .SEED(9)) fcn2 (
    .clk, .checks(ck[2]), .failures(fl[2]), .n_tiles(nt[2]), .n_crop(ncr[2]), .n_border(nbo[2]),
    .n_fold(nfo[2]), .n_layers(nla[2]), .finished(fin[2]));

  int checks = 0, failures = 0;

  initial begin
    @(posedge clk);
    wait (fin[0] && fin[1] && fin[2]);
    for (int i = 0; i < 3; i++) begin checks += ck[i]; failures += fl[i]; end
    // FCN_Deconv2: 71 x 71 tiles of 8x8 pixels, then 4 x 3 for the small layer,
    // each tile in two fold phases.
    checks++;
    if (nt[2] != 71 * 71 + 4 * 3 || nfo[2] != 71 * 71 + 4 * 3) begin
      failures++; $display("FCN_Deconv2: %0d tiles, %0d second phases", nt[2], nfo[2]);
    end
    $display("GAN_Deconv3/4 tiles %0d, GAN_Deconv1/2 tiles %0d (cropped %0d), FCN_Deconv2 tiles %0d",
             nt[0], nt[1], ncr[1], nt[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

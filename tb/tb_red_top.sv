// tb_red_top: end-to-end test of red_top at reduced sizes.
//
// Three instances cover the mechanisms of the design: the paper's 3x3,
// stride-2 example (padding 1, 4 computation modes), a 4x4 stride-2 kernel
// in the area-efficient folded mode (two sub-crossbars per crossbar, two
// phases per tile), and a 5x5 stride-3 kernel (9 modes, cropping of the
// output edge). Each runs two back-to-back layers of different input sizes;
// every output pixel and the clock count of every layer are checked, and
// each event (tile write-back, cropped pixels, border-zeroed fetch, fold
// phase, second layer) must occur at least once.
module tb_red_top;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int ck [3], fl [3], nt [3], ncr [3], nbo [3], nfo [3], nla [3];
  logic fin [3];

  red_top_harness #(.KH(3), .KW(3), .S(2), .PAD(1), .C(4), .M(3), .FOLD(1),
                    .MAX_IH(5), .MAX_IW(5), .NLAYER(2), .LAYER_IH('{3, 5}), .LAYER_IW('{3, 4}), .SEED(11)) h0 (
    .clk, .checks(ck[0]), .failures(fl[0]), .n_tiles(nt[0]), .n_crop(ncr[0]), .n_border(nbo[0]),
    .n_fold(nfo[0]), .n_layers(nla[0]), .finished(fin[0]));

  red_top_harness #(.KH(4), .KW(4), .S(2), .PAD(1), .C(5), .M(4), .FOLD(2),
                    .MAX_IH(4), .MAX_IW(4), .NLAYER(2), .LAYER_IH('{4, 2}), .LAYER_IW('{3, 4}), .SEED(22)) h1 (
    .clk, .checks(ck[1]), .failures(fl[1]), .n_tiles(nt[1]), .n_crop(ncr[1]), .n_border(nbo[1]),
    .n_fold(nfo[1]), .n_layers(nla[1]), .finished(fin[1]));

  red_top_harness #(.KH(5), .KW(5), .S(3), .PAD(0), .C(3), .M(2), .FOLD(1), .IN_BITS(6), .W_BITS(5),
                    .MAX_IH(4), .MAX_IW(4), .NLAYER(2), .LAYER_IH('{4, 3}), .LAYER_IW('{2, 4}), .SEED(33)) h2 (
    .clk, .checks(ck[2]), .failures(fl[2]), .n_tiles(nt[2]), .n_crop(ncr[2]), .n_border(nbo[2]),
    .n_fold(nfo[2]), .n_layers(nla[2]), .finished(fin[2]));

  int checks = 0, failures = 0;

  task automatic need(input string what, input int n);
    checks++;
    if (n == 0) begin failures++; $display("event never seen: %s", what); end
    else $display("event %-24s %0d", what, n);
  endtask

  initial begin
    @(posedge clk);
    wait (fin[0] && fin[1] && fin[2]);
    for (int i = 0; i < 3; i++) begin checks += ck[i]; failures += fl[i]; end
    need("tile write-back", nt[0] + nt[1] + nt[2]);
    need("cropped output pixels", ncr[0] + ncr[1] + ncr[2]);
    need("border-zeroed fetch", nbo[0] + nbo[1] + nbo[2]);
    need("second fold phase", nfo[1]);
    need("second layer", (nla[0] >= 2 && nla[1] >= 2 && nla[2] >= 2) ? 1 : 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

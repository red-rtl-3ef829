// tb_red_zero_skip_router: the paper's 3x3, stride-2 example (padding 1) in
// the area-efficient folded form (9 SCs on 5 crossbar units of 2C rows).
// A stand-in buffer returns, for address (h,w), channel values that encode
// h, w and the channel. For every tile of a 4x3 input and both phases, each
// unit's two row halves are compared with the vector that the SC active in
// that half needs, found here by searching the zero-inserted image directly:
// SC (i,j) must read the real pixel that lands under kernel position (i,j)
// for some output pixel of the tile, or zeros outside the image; the idle
// half must be zero. Also checks that a tile needs only 4 distinct vectors.
module tb_red_zero_skip_router;
  localparam int KH = 3, KW = 3, S = 2, PAD = 1, C = 2, IN_BITS = 8, FOLD = 2;
  localparam int MAX_IH = 4, MAX_IW = 4;
  localparam int NSC = KH * KW, NU = (NSC + FOLD - 1) / FOLD;
  localparam int OFF = KH - 1 - PAD;
  localparam int NP = 4;

  logic [2:0] tile_t, tile_u;
  logic [0:0] phase;
  logic [2:0] cfg_ih, cfg_iw;
  logic [NP-1:0][2:0] rd_h, rd_w;
  logic [NP-1:0][C-1:0][IN_BITS-1:0] rd_vec;
  logic [NU-1:0][FOLD*C-1:0][IN_BITS-1:0] sc_vec;
  logic [NP-1:0] port_inside;
  int checks = 0, failures = 0;
  int ih, iw, th, tw, n, i, j, y, x;
  logic [IN_BITS-1:0] want;

  red_zero_skip_router #(.KH(KH), .KW(KW), .S(S), .PAD(PAD), .C(C), .IN_BITS(IN_BITS), .FOLD(FOLD),
                         .MAX_IH(MAX_IH), .MAX_IW(MAX_IW)) dut (.*);

  function automatic logic [IN_BITS-1:0] code(input int h, input int w, input int c);
    return IN_BITS'(8'h80 | (h << 4) | (w << 1) | c);
  endfunction

  always_comb
    for (int p = 0; p < NP; p++)
      for (int c = 0; c < C; c++) rd_vec[p][c] = code(int'(rd_h[p]), int'(rd_w[p]), c);

  // Input index read by kernel offset k for tile index t: the one real pixel
  // among padded positions S*t + a + k, a = 0..S-1.
  function automatic int src(input int t, input int k);
    for (int a = 0; a < S; a++)
      if ((S * t + a + k - OFF) % S == 0 && S * t + a + k - OFF >= 0) return (S * t + a + k - OFF) / S;
    for (int a = 0; a < S; a++)
      if ((S * t + a + k - OFF) % S == 0) return -1;
    return -99;
  endfunction

  initial begin
    checks++;
    if (dut.NP != 4) begin failures++; $display("tile needs %0d vectors, expected 4", dut.NP); end
    ih = 4; iw = 3;
    th = (S * (ih - 1) + KH - 2 * PAD + S - 1) / S;
    tw = (S * (iw - 1) + KW - 2 * PAD + S - 1) / S;
    cfg_ih = 3'(ih); cfg_iw = 3'(iw);
    for (int t = 0; t < th; t++)
      for (int u = 0; u < tw; u++)
        for (int ph = 0; ph < FOLD; ph++) begin
          tile_t = 3'(t); tile_u = 3'(u); phase = 1'(ph);
          #1;
          for (int q = 0; q < NU; q++)
            for (int f = 0; f < FOLD; f++) begin
              n = q * FOLD + f; i = n / KW; j = n % KW;
              y = src(t, i); x = src(u, j);
              for (int c = 0; c < C; c++) begin
                if (f != ph || n >= NSC) want = '0;
                else if (y < 0 || x < 0 || y >= ih || x >= iw) want = '0;
                else want = code(y, x, c);
                checks++;
                if (sc_vec[q][f*C + c] !== want) begin
                  failures++;
                  $display("tile (%0d,%0d) ph %0d unit %0d half %0d ch %0d: %h expected %h",
                           t, u, ph, q, f, c, sc_vec[q][f*C + c], want);
                end
              end
            end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

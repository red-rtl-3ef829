// tb_red_mode_adder: 3x3 kernel, stride 2, padding 1, folded (FOLD = 2,
// 5 crossbar units). Random results are fed for both phases of a tile; each
// of the 4 mode pixels must equal the sum of the results of the SCs whose
// kernel position lands on a real input pixel for that output position,
// found here from the zero-inserted geometry (for this example: mode (1,1)
// gets kernel weights 1,3,7,9, modes (1,0)/(0,1) two each, mode (0,0)
// weight 5). Also checks out_valid one clock after the second phase, the
// tile index and last flag passing through, and no output after phase 0.
module tb_red_mode_adder;
  localparam int KH = 3, KW = 3, S = 2, PAD = 1, M = 2, FOLD = 2, ACC_W = 32;
  localparam int NSC = KH * KW, NU = (NSC + FOLD - 1) / FOLD, NMODE = S * S;
  localparam int OFF = KH - 1 - PAD;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0, in_valid = 1'b0, in_last = 1'b0;
  logic [0:0] in_phase = '0;
  logic [4:0] in_t = '0, in_u = '0;
  logic signed [NU-1:0][M-1:0][ACC_W-1:0] sc_sum = '0;
  logic out_valid, out_last;
  logic [4:0] out_t, out_u;
  logic signed [NMODE-1:0][M-1:0][ACC_W-1:0] out_pix;
  int res [NSC][M];
  longint e [NMODE][M];
  int a, b, checks = 0, failures = 0, nsc_mode [NMODE];

  red_mode_adder #(.KH(KH), .KW(KW), .S(S), .PAD(PAD), .M(M), .FOLD(FOLD), .ACC_W(ACC_W),
                   .THW(5), .TWW(5)) dut (.*);

  // Output offset inside the tile that kernel offset k serves.
  function automatic int mode_ref(input int k);
    for (int q = 0; q < S; q++) if (((q + k - OFF) % S + S) % S == 0) return q;
    return -1;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int md = 0; md < NMODE; md++) nsc_mode[md] = 0;
    for (int n = 0; n < NSC; n++) nsc_mode[mode_ref(n / KW) * S + mode_ref(n % KW)]++;
    checks++;
    if (nsc_mode[0] != 1 || nsc_mode[1] != 2 || nsc_mode[2] != 2 || nsc_mode[3] != 4) begin
      failures++; $display("unexpected mode split %0d %0d %0d %0d", nsc_mode[0], nsc_mode[1], nsc_mode[2], nsc_mode[3]);
    end
    for (int k = 0; k < 20; k++) begin
      for (int n = 0; n < NSC; n++) for (int m = 0; m < M; m++) res[n][m] = int'($urandom_range(200000, 0)) - 100000;
      for (int md = 0; md < NMODE; md++) for (int m = 0; m < M; m++) e[md][m] = 0;
      for (int n = 0; n < NSC; n++) begin
        a = mode_ref(n / KW); b = mode_ref(n % KW);
        for (int m = 0; m < M; m++) e[a * S + b][m] += res[n][m];
      end
      for (int ph = 0; ph < FOLD; ph++) begin
        for (int q = 0; q < NU; q++)
          for (int m = 0; m < M; m++)
            sc_sum[q][m] <= (q * FOLD + ph < NSC) ? ACC_W'(res[q * FOLD + ph][m]) : ACC_W'($urandom);
        in_valid <= 1'b1; in_phase <= 1'(ph); in_t <= 5'(k); in_u <= 5'(k + 3); in_last <= (k == 19);
        @(posedge clk);
        in_valid <= 1'b0;
        #1;
        checks++;
        if (out_valid !== (ph == FOLD - 1)) begin failures++; $display("tile %0d phase %0d: out_valid=%b", k, ph, out_valid); end
      end
      checks++;
      if (out_t != 5'(k) || out_u != 5'(k + 3) || out_last != (k == 19)) begin failures++; $display("tile tag wrong"); end
      for (int md = 0; md < NMODE; md++)
        for (int m = 0; m < M; m++) begin
          checks++;
          if (longint'(signed'(out_pix[md][m])) != e[md][m]) begin
            failures++; $display("tile %0d mode %0d lane %0d: %0d expected %0d", k, md, m, signed'(out_pix[md][m]), e[md][m]);
          end
        end
      repeat (k % 2) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

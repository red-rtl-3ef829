// tb_red_top_full: red_top at its default size, the FCN_Deconv1 layer of
// the paper's benchmark table (16x16x21 input, 4x4x21x21 kernel, stride 2,
// no padding, 34x34x21 output), run as one complete layer.
//
// The design is instantiated without parameter overrides. All 7056 weights
// are programmed, a random 16x16x21 input is loaded, and after done every
// one of the 34*34*21 outputs is compared with a direct zero-insertion
// deconvolution computed in the testbench; the clock count must equal
// 17*17 tiles * 8 bit-planes + 3. The local constants below mirror the
// design's defaults.
module tb_red_top_full;
  localparam int KH = 4, KW = 4, S = 2, PAD = 0, C = 21, M = 21, FOLD = 1;
  localparam int IN_BITS = 8, W_BITS = 8, ACC_W = 32, MAX_IH = 16, MAX_IW = 16;
  localparam int NLAYER = 1;
  localparam int LAYER_IH [NLAYER] = '{16};
  localparam int LAYER_IW [NLAYER] = '{16};
  localparam int SEED = 7;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks, failures, n_tiles, n_crop, n_border, n_fold, n_layers;
  logic finished;

  localparam int NMODE = S * S;
  localparam int OHMAX = S * (MAX_IH - 1) + KH - 2 * PAD;
  localparam int OWMAX = S * (MAX_IW - 1) + KW - 2 * PAD;

  logic rst_n = 1'b0;
  logic prog_en = 1'b0, in_we = 1'b0, start = 1'b0;
  logic [31:0] prog_i = 0, prog_j = 0, prog_c = 0, prog_m = 0;
  logic signed [W_BITS-1:0] prog_data = '0;
  logic [31:0] in_h = 0, in_w = 0, cfg_ih = 0, cfg_iw = 0, rd_oh = 0, rd_ow = 0;
  logic [C-1:0][IN_BITS-1:0] in_vec = '0;
  logic busy, done;
  logic [31:0] cycles;
  logic signed [M-1:0][ACC_W-1:0] rd_pix;
  logic dbg_tile_wr, dbg_border, dbg_fold_phase;
  logic [NMODE-1:0] dbg_wr_mask;

  red_top dut (
    .clk, .rst_n,
    .prog_en, .prog_i(prog_i[$bits(dut.prog_i)-1:0]), .prog_j(prog_j[$bits(dut.prog_j)-1:0]),
    .prog_c(prog_c[$bits(dut.prog_c)-1:0]), .prog_m(prog_m[$bits(dut.prog_m)-1:0]), .prog_data,
    .in_we, .in_h(in_h[$bits(dut.in_h)-1:0]), .in_w(in_w[$bits(dut.in_w)-1:0]), .in_vec,
    .start, .cfg_ih(cfg_ih[$bits(dut.cfg_ih)-1:0]), .cfg_iw(cfg_iw[$bits(dut.cfg_iw)-1:0]),
    .busy, .done, .cycles,
    .rd_oh(rd_oh[$bits(dut.rd_oh)-1:0]), .rd_ow(rd_ow[$bits(dut.rd_ow)-1:0]), .rd_pix,
    .dbg_tile_wr, .dbg_wr_mask, .dbg_border, .dbg_fold_phase);

  int wt [KH][KW][C][M];
  int img [MAX_IH][MAX_IW][C];
  longint gold [OHMAX][OWMAX][M];

  // Clock count of a layer, sampled race-free: from the edge that takes
  // start to the edge after done.
  int cyc = 0, t_start = 0, t_done = 0;
  always @(posedge clk) begin
    cyc++;
    if (start && !busy) t_start = cyc;
    if (done) t_done = cyc;
  end

  // Event counters.
  always @(posedge clk) if (rst_n) begin
    if (dbg_tile_wr) begin
      n_tiles++;
      if (dbg_wr_mask != '1) n_crop++;
    end
    if (dbg_border) n_border++;
    if (dbg_fold_phase) n_fold++;
  end

  function automatic int rnd_s(input int bits);
    int v;
    v = int'($urandom_range((1 << bits) - 1, 0));
    return v - (1 << (bits - 1));
  endfunction

  task automatic golden(input int ih, input int iw);
    int oh, ow, off;
    off = KH - 1 - PAD;
    oh = S * (ih - 1) + KH - 2 * PAD;
    ow = S * (iw - 1) + KW - 2 * PAD;
    for (int y = 0; y < oh; y++)
      for (int x = 0; x < ow; x++)
        for (int m = 0; m < M; m++) begin
          longint acc;
          acc = 0;
          for (int kh = 0; kh < KH; kh++)
            for (int kw = 0; kw < KW; kw++) begin
              int py, px;
              py = y + kh - off;          // position in the zero-inserted map, minus border
              px = x + kw - (KW - 1 - PAD);
              if (py >= 0 && px >= 0 && py % S == 0 && px % S == 0 && py / S < ih && px / S < iw)
                for (int c = 0; c < C; c++)
                  acc += longint'(img[py / S][px / S][c]) * longint'(wt[kh][kw][c][m]);
            end
          gold[y][x][m] = acc;
        end
  endtask

  initial begin
    int seed;
    checks = 0; failures = 0; n_tiles = 0; n_crop = 0; n_border = 0; n_fold = 0; n_layers = 0;
    finished = 1'b0;
    seed = $urandom(SEED);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    // Program all weights once; layers then differ only in their input.
    for (int kh = 0; kh < KH; kh++)
      for (int kw = 0; kw < KW; kw++)
        for (int c = 0; c < C; c++)
          for (int m = 0; m < M; m++) begin
            wt[kh][kw][c][m] = rnd_s(W_BITS);
            prog_en <= 1'b1; prog_i <= kh; prog_j <= kw; prog_c <= c; prog_m <= m;
            prog_data <= W_BITS'(wt[kh][kw][c][m]);
            @(posedge clk);
          end
    prog_en <= 1'b0;
    for (int L = 0; L < NLAYER; L++) begin
      int ih, iw, oh, ow, th, tw, t0, expect_cycles;
      ih = LAYER_IH[L]; iw = LAYER_IW[L];
      for (int h = 0; h < ih; h++)
        for (int w = 0; w < iw; w++) begin
          logic [C-1:0][IN_BITS-1:0] v;
          for (int c = 0; c < C; c++) begin
            img[h][w][c] = rnd_s(IN_BITS);
            v[c] = IN_BITS'(img[h][w][c]);
          end
          in_we <= 1'b1; in_h <= h; in_w <= w; in_vec <= v;
          @(posedge clk);
        end
      in_we <= 1'b0;
      golden(ih, iw);
      oh = S * (ih - 1) + KH - 2 * PAD;
      ow = S * (iw - 1) + KW - 2 * PAD;
      th = (oh + S - 1) / S;
      tw = (ow + S - 1) / S;
      expect_cycles = th * tw * FOLD * IN_BITS + 3;  // + start, shift-adder and mode-adder registers
      cfg_ih <= ih; cfg_iw <= iw; start <= 1'b1;
      @(posedge clk);
      start <= 1'b0;
      while (!done) @(posedge clk);
      @(posedge clk);
      t0 = t_done - t_start;
      n_layers++;
      checks++;
      if (t0 != expect_cycles || cycles != 32'(expect_cycles)) begin
        failures++;
        $display("L%0d K%0dx%0d S%0d FOLD%0d: %0d clocks (counter %0d), expected %0d",
                 L, KH, KW, S, FOLD, t0, cycles, expect_cycles);
      end
      for (int y = 0; y < oh; y++)
        for (int x = 0; x < ow; x++) begin
          rd_oh <= y; rd_ow <= x;
          #1;
          for (int m = 0; m < M; m++) begin
            checks++;
            if (longint'(signed'(rd_pix[m])) != gold[y][x][m]) begin
              failures++;
              if (failures < 10)
                $display("L%0d K%0d S%0d FOLD%0d O[%0d][%0d][%0d] = %0d, expected %0d",
                         L, KH, S, FOLD, y, x, m, signed'(rd_pix[m]), gold[y][x][m]);
            end
          end
        end
      @(posedge clk);
    end
    finished = 1'b1;
  end

  initial begin
    @(posedge clk);
    wait (finished);
    checks++;
    if (n_tiles != 17 * 17 || n_border == 0) begin
      failures++;
      $display("tiles %0d, border fetches %0d", n_tiles, n_border);
    end
    $display("tiles written %0d, border-zeroed fetches %0d", n_tiles, n_border);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_red_output_buffer: stride 2, 3x3 tiles, output 5x6 (so the last tile
// row is cut). Writes every tile with random pixels, checks the write mask
// (cropping) of each tile, then reads every output coordinate back and
// compares with the expected pixel; positions never written keep their old
// contents and are not read.
module tb_red_output_buffer;
  localparam int S = 2, M = 2, ACC_W = 32, TH = 3, TWD = 3, NMODE = S * S;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic [2:0] cfg_oh = 3'd5, cfg_ow = 3'd6, rd_oh = '0, rd_ow = '0;
  logic wr_en = 1'b0;
  logic [1:0] wr_t = '0, wr_u = '0;
  logic signed [NMODE-1:0][M-1:0][ACC_W-1:0] wr_pix = '0, pix;
  logic [NMODE-1:0] wr_mask, want_mask;
  logic signed [M-1:0][ACC_W-1:0] rd_pix;
  logic signed [M-1:0][ACC_W-1:0] img [6][6];
  int checks = 0, failures = 0, ncrop = 0;

  red_output_buffer #(.S(S), .M(M), .ACC_W(ACC_W), .TH(TH), .TWD(TWD)) dut (.*);

  initial begin
    @(posedge clk);
    for (int t = 0; t < TH; t++)
      for (int u = 0; u < TWD; u++) begin
        for (int md = 0; md < NMODE; md++)
          for (int m = 0; m < M; m++) pix[md][m] = ACC_W'($urandom);
        for (int a = 0; a < S; a++)
          for (int b = 0; b < S; b++) begin
            want_mask[a*S + b] = (S*t + a < 5) && (S*u + b < 6);
            img[S*t + a][S*u + b] = pix[a*S + b];
          end
        wr_en <= 1'b1; wr_t <= 2'(t); wr_u <= 2'(u); wr_pix <= pix;
        #1;
        checks++;
        if (wr_mask !== want_mask) begin failures++; $display("tile (%0d,%0d) mask %b expected %b", t, u, wr_mask, want_mask); end
        if (want_mask != '1) ncrop++;
        @(posedge clk);
      end
    wr_en <= 1'b0;
    checks++;
    if (ncrop != 3) begin failures++; $display("cropped tiles %0d, expected 3", ncrop); end
    for (int y = 0; y < 5; y++)
      for (int x = 0; x < 6; x++) begin
        rd_oh = 3'(y); rd_ow = 3'(x);
        #1;
        checks++;
        if (rd_pix !== img[y][x]) begin failures++; $display("O[%0d][%0d] = %h expected %h", y, x, rd_pix, img[y][x]); end
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

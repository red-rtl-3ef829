// tb_red_crossbar: programs every cell of a 6x4 crossbar with random signed
// weights through the one-hot row select, then applies random wordline
// bit-planes and checks each bitline sum against a sum computed here.
module tb_red_crossbar;
  localparam int ROWS = 6, COLS = 4, W_BITS = 8;
  localparam int CW = W_BITS + $clog2(ROWS + 1);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic prog_en = 1'b0;
  logic [ROWS-1:0] prog_row_sel = '0, wl = '0;
  logic [1:0] prog_col = '0;
  logic signed [W_BITS-1:0] prog_data = '0;
  logic signed [COLS-1:0][CW-1:0] bl_out;
  int w [ROWS][COLS];
  int checks = 0, failures = 0;

  red_crossbar #(.ROWS(ROWS), .COLS(COLS), .W_BITS(W_BITS)) dut (.*);

  initial begin
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        w[r][c] = int'($urandom_range(255, 0)) - 128;
        prog_en <= 1'b1; prog_row_sel <= ROWS'(1) << r; prog_col <= 2'(c); prog_data <= W_BITS'(w[r][c]);
        @(posedge clk);
      end
    prog_en <= 1'b0;
    // A write with prog_en low must not change anything.
    prog_row_sel <= '1; prog_data <= 8'sd55;
    @(posedge clk);
    for (int k = 0; k < 200; k++) begin
      logic [ROWS-1:0] v;
      v = (k == 0) ? '1 : (k == 1) ? '0 : ROWS'($urandom);
      wl <= v;
      @(posedge clk); #1;
      for (int c = 0; c < COLS; c++) begin
        int e;
        e = 0;
        for (int r = 0; r < ROWS; r++) if (v[r]) e += w[r][c];
        checks++;
        if (int'(signed'(bl_out[c])) != e) begin
          failures++;
          $display("wl=%b col %0d: %0d, expected %0d", v, c, signed'(bl_out[c]), e);
        end
      end
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

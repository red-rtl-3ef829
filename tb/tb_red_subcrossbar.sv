// tb_red_subcrossbar: programs a 6x3 sub-crossbar through its row decoder,
// streams random signed input vectors back to back through the wordline
// driver and shift adders, and checks each column's dot product with the
// programmed weights, plus the latency: result valid IN_BITS+1 clocks after
// the load.
module tb_red_subcrossbar;
  localparam int ROWS = 6, COLS = 3, W_BITS = 8, IN_BITS = 8, ACC_W = 32;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0, prog_en = 1'b0, load = 1'b0, sa_en = 1'b0, first = 1'b0, last = 1'b0;
  logic [2:0] prog_row = '0, bit_idx = '0;
  logic [1:0] prog_col = '0;
  logic signed [W_BITS-1:0] prog_data = '0;
  logic [ROWS-1:0][IN_BITS-1:0] vec = '0;
  logic signed [COLS-1:0][ACC_W-1:0] sum;
  logic sum_valid;
  int w [ROWS][COLS];
  int x [ROWS];
  longint e [COLS];
  logic [ROWS-1:0][IN_BITS-1:0] nv;
  int checks = 0, failures = 0;

  red_subcrossbar #(.ROWS(ROWS), .COLS(COLS), .W_BITS(W_BITS), .IN_BITS(IN_BITS), .ACC_W(ACC_W)) dut (.*);

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        w[r][c] = int'($urandom_range(255, 0)) - 128;
        prog_en <= 1'b1; prog_row <= 3'(r); prog_col <= 2'(c); prog_data <= W_BITS'(w[r][c]);
        @(posedge clk);
      end
    prog_en <= 1'b0;
    for (int r = 0; r < ROWS; r++) begin x[r] = int'($urandom_range(255, 0)) - 128; nv[r] = IN_BITS'(x[r]); end
    load <= 1'b1; vec <= nv;
    @(posedge clk);
    for (int k = 0; k < 25; k++) begin
      for (int c = 0; c < COLS; c++) begin
        e[c] = 0;
        for (int r = 0; r < ROWS; r++) e[c] += longint'(x[r]) * longint'(w[r][c]);
      end
      for (int r = 0; r < ROWS; r++) begin x[r] = int'($urandom_range(255, 0)) - 128; nv[r] = IN_BITS'(x[r]); end
      for (int b = 0; b < IN_BITS; b++) begin
        sa_en <= 1'b1; bit_idx <= 3'(b); first <= (b == 0); last <= (b == IN_BITS - 1);
        load <= (b == IN_BITS - 1) && (k < 24); vec <= nv;
        @(posedge clk);
      end
      sa_en <= (k < 24); load <= 1'b0;
      #1;
      checks++;
      if (!sum_valid) begin failures++; $display("vector %0d: sum_valid late", k); end
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (longint'(signed'(sum[c])) != e[c]) begin
          failures++; $display("vector %0d col %0d: %0d expected %0d", k, c, signed'(sum[c]), e[c]);
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

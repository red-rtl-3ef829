// tb_red_wl_driver: loads random vectors back to back (a load in the clock
// of the last bit) and checks that bit b of every row is on the wordlines in
// the b-th clock after the load, LSB first.
module tb_red_wl_driver;
  localparam int ROWS = 5, IN_BITS = 8;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0, load = 1'b0;
  logic [ROWS-1:0][IN_BITS-1:0] vec = '0;
  logic [ROWS-1:0] wl;
  int checks = 0, failures = 0;
  red_wl_driver #(.ROWS(ROWS), .IN_BITS(IN_BITS)) dut (.*);
  initial begin
    logic [ROWS-1:0][IN_BITS-1:0] cur;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    cur = {ROWS*IN_BITS{1'b0}};
    for (int r = 0; r < ROWS; r++) cur[r] = IN_BITS'($urandom);
    load <= 1'b1; vec <= cur;
    @(posedge clk);
    for (int k = 0; k < 20; k++) begin
      logic [ROWS-1:0][IN_BITS-1:0] nxt;
      for (int r = 0; r < ROWS; r++) nxt[r] = IN_BITS'($urandom);
      for (int b = 0; b < IN_BITS; b++) begin
        load <= (b == IN_BITS - 1); vec <= nxt;
        #1;
        for (int r = 0; r < ROWS; r++) begin
          checks++;
          if (wl[r] !== cur[r][b]) begin failures++; $display("vec %0d bit %0d row %0d: %b", k, b, r, wl[r]); end
        end
        @(posedge clk);
      end
      cur = nxt;
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

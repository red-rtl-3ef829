// tb_red_shift_adder: feeds random signed per-bit-plane partial sums and
// checks the two's-complement weighted total
// sum_{b<B-1} P_b*2^b - P_{B-1}*2^(B-1), that sum_valid pulses exactly one
// clock after the last plane, and that sum holds between results.
module tb_red_shift_adder;
  localparam int LANES = 3, IN_W = 10, IN_BITS = 8, ACC_W = 32;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0, en = 1'b0, first = 1'b0, last = 1'b0;
  logic [2:0] bit_idx = '0;
  logic signed [LANES-1:0][IN_W-1:0] psum = '0;
  logic signed [LANES-1:0][ACC_W-1:0] sum;
  logic sum_valid;
  int checks = 0, failures = 0;
  red_shift_adder #(.LANES(LANES), .IN_W(IN_W), .IN_BITS(IN_BITS), .ACC_W(ACC_W)) dut (.*);
  longint e [LANES];
  logic signed [LANES-1:0][IN_W-1:0] p;
  int v;

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int k = 0; k < 30; k++) begin
      for (int l = 0; l < LANES; l++) e[l] = 0;
      for (int b = 0; b < IN_BITS; b++) begin
        for (int l = 0; l < LANES; l++) begin
          v = int'($urandom_range(1023, 0)) - 512;
          p[l] = IN_W'(v);
          e[l] += (b == IN_BITS - 1) ? -(longint'(v) <<< b) : (longint'(v) <<< b);
        end
        en <= 1'b1; first <= (b == 0); last <= (b == IN_BITS - 1); bit_idx <= 3'(b); psum <= p;
        @(posedge clk);
        #1;
        checks++;
        if (sum_valid !== (b == IN_BITS - 1)) begin failures++; $display("sum_valid=%b at bit %0d", sum_valid, b); end
      end
      // Result after the last plane; then an idle gap of k%3 clocks, en low.
      if (k % 3 != 0) begin en <= 1'b0; first <= 1'b0; last <= 1'b0; end
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (longint'(signed'(sum[l])) != e[l]) begin
          failures++; $display("vec %0d lane %0d: %0d expected %0d", k, l, signed'(sum[l]), e[l]);
        end
      end
      repeat (k % 3) begin
        @(posedge clk); #1;
        checks++;
        if (sum_valid) begin failures++; $display("sum_valid while idle"); end
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

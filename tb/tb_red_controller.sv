// tb_red_controller: 3x3 kernel, stride 2, padding 1, FOLD = 2, 4-bit
// inputs, a 2x3 input (3x5 output, 2x3 tiles). Checks, clock by clock, that
// the controller walks (tile row, tile column, phase) in raster order with
// one wordline load per item and no idle clock between items, that the
// shift-adder controls mark bit 0 and bit 3 of every item, that the result
// tag that accompanies each sum_valid names the item just finished, that a
// second start while busy is ignored, and that done comes when the
// write-back of the last tile is reported, after
// 6 tiles * 2 phases * 4 bits + 3 clocks. Runs two layers.
module tb_red_controller;
  localparam int KH = 3, KW = 3, S = 2, PAD = 1, FOLD = 2, IN_BITS = 4, MAX_IH = 4, MAX_IW = 4;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0, start = 1'b0, wb_valid = 1'b0, wb_last = 1'b0;
  logic [2:0] cfg_ih = '0, cfg_iw = '0;
  logic busy, done, load, sa_en, sa_first, sa_last, res_last;
  logic [31:0] cycles;
  logic [2:0] cur_ih, cur_iw;
  logic [3:0] cur_oh, cur_ow;
  logic [2:0] fetch_t, fetch_u, res_t, res_u;
  logic [0:0] fetch_ph, res_ph;
  logic [1:0] sa_bit;

  red_controller #(.KH(KH), .KW(KW), .S(S), .PAD(PAD), .FOLD(FOLD), .IN_BITS(IN_BITS),
                   .MAX_IH(MAX_IH), .MAX_IW(MAX_IW)) dut (.*);

  // Model of the datapath latency: sum_valid one clock after the last bit,
  // write-back one clock after the sum of the last phase.
  logic sv = 1'b0;
  int cyc = 0, t_start = 0, t_done = 0, nload = 0, nsum = 0, exp_bit = 0, exp_item = 0, cur_item = -1;
  int checks = 0, failures = 0;
  always @(posedge clk) begin
    cyc++;
    if (start && !busy) t_start = cyc;
    if (done) t_done = cyc;
    sv <= sa_en && sa_last;
    wb_valid <= sv && (int'(res_ph) == FOLD - 1);
    wb_last  <= sv && (int'(res_ph) == FOLD - 1) && res_last;
    if (load) begin
      // item k = (t*tw + u)*FOLD + ph, tw = 3
      checks++;
      if ((int'(fetch_t) * 3 + int'(fetch_u)) * FOLD + int'(fetch_ph) != exp_item) begin
        failures++; $display("load of (%0d,%0d,%0d), expected item %0d", fetch_t, fetch_u, fetch_ph, exp_item);
      end
      exp_item++;
      nload++;
    end
    if (sa_en) begin
      checks++;
      if (int'(sa_bit) != exp_bit || sa_first != (exp_bit == 0) || sa_last != (exp_bit == IN_BITS - 1)) begin
        failures++; $display("bit %0d first %b last %b, expected bit %0d", sa_bit, sa_first, sa_last, exp_bit);
      end
      if (exp_bit == IN_BITS - 1) cur_item++;
      exp_bit = (exp_bit + 1) % IN_BITS;
    end
    if (sv) begin
      nsum++;
      checks++;
      if ((int'(res_t) * 3 + int'(res_u)) * FOLD + int'(res_ph) != cur_item || res_last != (cur_item == 11)) begin
        failures++; $display("result tag (%0d,%0d,%0d,%b) for item %0d", res_t, res_u, res_ph, res_last, cur_item);
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int L = 0; L < 2; L++) begin
      exp_item = 0; cur_item = -1; nload = 0; nsum = 0;
      cfg_ih <= 3'd2; cfg_iw <= 3'd3; start <= 1'b1;
      @(posedge clk);
      start <= 1'b0;
      repeat (10) @(posedge clk);
      start <= 1'b1; cfg_ih <= 3'd4;    // must be ignored while busy
      @(posedge clk);
      start <= 1'b0;
      while (!done) @(posedge clk);
      @(posedge clk);
      checks++;
      if (t_done - t_start != 12 * IN_BITS + 3 || cycles != 32'(12 * IN_BITS + 3)) begin
        failures++; $display("layer took %0d clocks (counter %0d), expected %0d", t_done - t_start, cycles, 12 * IN_BITS + 3);
      end
      checks++;
      if (nload != 12 || nsum != 12 || cur_oh != 4'd3 || cur_ow != 4'd5 || busy) begin
        failures++; $display("loads %0d sums %0d oh %0d ow %0d busy %b", nload, nsum, cur_oh, cur_ow, busy);
      end
      repeat (3) @(posedge clk);
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

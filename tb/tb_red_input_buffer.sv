// tb_red_input_buffer: fills a 5x4 map of 3-channel vectors, then reads it
// back through all four ports at random addresses (some out of range, which
// must read as zero), comparing with a copy kept here.
module tb_red_input_buffer;
  localparam int C = 3, IN_BITS = 8, MAX_IH = 5, MAX_IW = 4, NPORT = 4;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we = 1'b0;
  logic [2:0] wr_h = '0, wr_w = '0;
  logic [C-1:0][IN_BITS-1:0] wr_vec = '0;
  logic [NPORT-1:0][2:0] rd_h = '0, rd_w = '0;
  logic [NPORT-1:0][C-1:0][IN_BITS-1:0] rd_vec;
  logic [C-1:0][IN_BITS-1:0] ref_mem [MAX_IH][MAX_IW];
  logic [C-1:0][IN_BITS-1:0] v;
  int hh [NPORT], ww [NPORT];
  int checks = 0, failures = 0;
  red_input_buffer #(.C(C), .IN_BITS(IN_BITS), .MAX_IH(MAX_IH), .MAX_IW(MAX_IW), .NPORT(NPORT)) dut (.*);
  initial begin
    for (int h = 0; h < MAX_IH; h++)
      for (int w = 0; w < MAX_IW; w++) begin
        v = (C*IN_BITS)'({$urandom, $urandom});
        ref_mem[h][w] = v;
        we <= 1'b1; wr_h <= 3'(h); wr_w <= 3'(w); wr_vec <= v;
        @(posedge clk);
      end
    we <= 1'b0;
    @(posedge clk);
    for (int k = 0; k < 100; k++) begin
      for (int p = 0; p < NPORT; p++) begin
        hh[p] = $urandom_range(MAX_IH, 0);   // MAX_IH itself is out of range
        ww[p] = $urandom_range(MAX_IW, 0);
        rd_h[p] = 3'(hh[p]); rd_w[p] = 3'(ww[p]);
      end
      #1;
      for (int p = 0; p < NPORT; p++) begin
        checks++;
        if (rd_vec[p] !== ((hh[p] < MAX_IH && ww[p] < MAX_IW) ? ref_mem[hh[p] % MAX_IH][ww[p] % MAX_IW] : '0)) begin
          failures++; $display("port %0d (%0d,%0d): %h", p, hh[p], ww[p], rd_vec[p]);
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

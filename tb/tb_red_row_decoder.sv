// tb_red_row_decoder: every address 0..31 with enable low and high; the
// select must be one-hot at the address when enabled and in range, else 0.
module tb_red_row_decoder;
  localparam int ROWS = 21;
  logic en;
  logic [4:0] addr;
  logic [ROWS-1:0] sel;
  int checks = 0, failures = 0;
  red_row_decoder #(.ROWS(ROWS)) dut (.*);
  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < 32; a++) begin
        logic [ROWS-1:0] exp_sel;
        en = e[0]; addr = 5'(a);
        #1;
        exp_sel = '0;
        if (e == 1 && a < ROWS) exp_sel[a] = 1'b1;
        checks++;
        if (sel !== exp_sel) begin failures++; $display("en=%0d addr=%0d sel=%b", e, a, sel); end
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

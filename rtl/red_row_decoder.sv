// red_row_decoder: row decoder that selects the wordline to be programmed.
//
// Turns a binary row address into a one-hot row select, gated by an enable;
// an address at or beyond ROWS selects nothing. Purely combinational. The
// paper names a global row decoder in each bank but does not describe it;
// this is the plain binary-to-one-hot decoder such a block implies.
module red_row_decoder #(
  parameter int ROWS = 21,
  localparam int AW  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic          en,
  input  logic [AW-1:0] addr,
  output logic [ROWS-1:0] sel
);

  always_comb begin
    sel = '0;
    for (int r = 0; r < ROWS; r++)
      if (en && (int'(addr) == r)) sel[r] = 1'b1;
  end

endmodule

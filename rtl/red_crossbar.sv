// red_crossbar: behavioural model of one ReRAM crossbar array with its
// integrate-and-fire read-out, not synthesizable as the real part (the cells
// are analog resistive devices).
//
// Each cell at (row, column) holds one signed weight as its conductance. In a
// compute clock the wordlines carry one bit-plane of the input vector (a
// pulse on row r when that input bit is 1); every bitline then collects the
// sum of the conductances of the rows that were pulsed, which the read
// circuit digitises. The model returns that sum exactly as a signed integer,
// i.e. it assumes an ideal read circuit with enough resolution for ROWS
// cells of W_BITS each. The multi-bit weight in one cell and the lossless
// read-out are choices of this model; the paper only states that weights are
// cell conductances and that an integrate-and-fire circuit digitises the
// bitline current.
//
// Interface: cells are written one at a time, on the rising clock edge with
// prog_en high, at the row selected by the one-hot prog_row_sel and column
// prog_col. The bitline outputs are combinational in wl (same-cycle read).
module red_crossbar #(
  parameter int ROWS   = 21,
  parameter int COLS   = 21,
  parameter int W_BITS = 8,
  localparam int CW    = W_BITS + $clog2(ROWS + 1),
  localparam int COLW  = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic                            clk,
  input  logic                            prog_en,
  input  logic [ROWS-1:0]                 prog_row_sel,
  input  logic [COLW-1:0]                 prog_col,
  input  logic signed [W_BITS-1:0]        prog_data,
  input  logic [ROWS-1:0]                 wl,
  output logic signed [COLS-1:0][CW-1:0]  bl_out
);

  logic signed [W_BITS-1:0] gmem [ROWS][COLS];

  always_ff @(posedge clk) begin
    if (prog_en) begin
      for (int r = 0; r < ROWS; r++)
        if (prog_row_sel[r]) gmem[r][prog_col] <= prog_data;
    end
  end

  always_comb begin
    for (int m = 0; m < COLS; m++) begin
      logic signed [CW-1:0] acc;
      acc = '0;
      for (int r = 0; r < ROWS; r++)
        if (wl[r]) acc = acc + CW'(gmem[r][m]);
      bl_out[m] = acc;
    end
  end

endmodule

// red_subcrossbar: one sub-crossbar (SC) of RED with its periphery.
//
// In RED the K_H x K_W x C x M deconvolution kernel is split by kernel
// position: SC n = i*K_W + j holds the C x M matrix W[i][j][:][:] (the
// pixel-wise mapping). This module is one such SC: a ROWS x COLS crossbar,
// the row decoder used to program it, the wordline driver that streams the
// input vector in bit-planes, and one shift-adder lane per bitline. In the
// area-efficient mode two SCs share one crossbar of 2C rows (ROWS = 2*C) and
// take turns; the caller then zeroes the idle half of the input vector.
//
// Timing: `load` captures `vec`; bit-plane b is evaluated in the b-th clock
// after the load, when the caller drives sa_en=1, bit_idx=b, first=(b==0),
// last=(b==IN_BITS-1). One clock after the last plane `sum_valid` pulses and
// `sum` holds the signed dot products of the vector with each column.
// Programming writes one cell per clock (prog_en, prog_row, prog_col).
module red_subcrossbar #(
  parameter int ROWS    = 21,
  parameter int COLS    = 21,
  parameter int W_BITS  = 8,
  parameter int IN_BITS = 8,
  parameter int ACC_W   = 32,
  localparam int CW     = W_BITS + $clog2(ROWS + 1),
  localparam int RAW    = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int COLW   = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int BW     = (IN_BITS > 1) ? $clog2(IN_BITS) : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // cell programming
  input  logic                              prog_en,
  input  logic [RAW-1:0]                    prog_row,
  input  logic [COLW-1:0]                   prog_col,
  input  logic signed [W_BITS-1:0]          prog_data,
  // input vector and bit-plane sequencing
  input  logic                              load,
  input  logic [ROWS-1:0][IN_BITS-1:0]      vec,
  input  logic                              sa_en,
  input  logic                              first,
  input  logic                              last,
  input  logic [BW-1:0]                     bit_idx,
  // result
  output logic signed [COLS-1:0][ACC_W-1:0] sum,
  output logic                              sum_valid
);

  logic [ROWS-1:0]                 row_sel;
  logic [ROWS-1:0]                 wl;
  logic signed [COLS-1:0][CW-1:0]  bl;

  red_row_decoder #(.ROWS(ROWS)) u_dec (
    .en(prog_en), .addr(prog_row), .sel(row_sel));

  red_wl_driver #(.ROWS(ROWS), .IN_BITS(IN_BITS)) u_wld (
    .clk, .rst_n, .load, .vec, .wl);

  red_crossbar #(.ROWS(ROWS), .COLS(COLS), .W_BITS(W_BITS)) u_xbar (
    .clk, .prog_en, .prog_row_sel(row_sel), .prog_col, .prog_data,
    .wl, .bl_out(bl));

  red_shift_adder #(.LANES(COLS), .IN_W(CW), .IN_BITS(IN_BITS), .ACC_W(ACC_W)) u_sa (
    .clk, .rst_n, .en(sa_en), .first, .last, .bit_idx, .psum(bl),
    .sum, .sum_valid);

endmodule

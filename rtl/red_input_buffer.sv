// red_input_buffer: on-chip store of the un-padded input feature map.
//
// Holds up to MAX_IH x MAX_IW input pixel vectors, each C signed IN_BITS-bit
// channel values (one vector is what a sub-crossbar takes as its wordline
// input). The host writes one vector per clock. NPORT combinational read
// ports let the zero-skipping data flow fetch every distinct input vector a
// tile needs in the same clock (4 for a 3x3 or 4x4 kernel at stride 2).
// Only real pixels are stored: the zeros of the zero-inserted image are
// never written or read. The paper names buffer sub-arrays in each bank but
// gives no organisation; the register-array form and the port count are
// this design's choices.
module red_input_buffer #(
  parameter int C       = 21,
  parameter int IN_BITS = 8,
  parameter int MAX_IH  = 16,
  parameter int MAX_IW  = 16,
  parameter int NPORT   = 4,
  localparam int HW     = $clog2(MAX_IH + 1),
  localparam int WW     = $clog2(MAX_IW + 1)
) (
  input  logic                                  clk,
  input  logic                                  we,
  input  logic [HW-1:0]                         wr_h,
  input  logic [WW-1:0]                         wr_w,
  input  logic [C-1:0][IN_BITS-1:0]             wr_vec,
  input  logic [NPORT-1:0][HW-1:0]              rd_h,
  input  logic [NPORT-1:0][WW-1:0]              rd_w,
  output logic [NPORT-1:0][C-1:0][IN_BITS-1:0]  rd_vec
);

  localparam int DEPTH = MAX_IH * MAX_IW;

  logic [C-1:0][IN_BITS-1:0] mem [DEPTH];

  always_ff @(posedge clk)
    if (we && int'(wr_h) < MAX_IH && int'(wr_w) < MAX_IW)
      mem[int'(wr_h) * MAX_IW + int'(wr_w)] <= wr_vec;

  always_comb
    for (int p = 0; p < NPORT; p++)
      if (int'(rd_h[p]) < MAX_IH && int'(rd_w[p]) < MAX_IW)
        rd_vec[p] = mem[int'(rd_h[p]) * MAX_IW + int'(rd_w[p])];
      else
        rd_vec[p] = '0;

endmodule

// red_zero_skip_router: the zero-skipping data flow of RED.
//
// An output tile (t,u) covers the S x S output pixels oh = S*t+a,
// ow = S*u+b. Under the pixel-wise mapping, sub-crossbar n = i*K_W + j
// (kernel position (i,j)) contributes to exactly one pixel of every tile,
// the one of mode (mode_of(i), mode_of(j)), and for it reads the real input
// pixel I[t + shift_of(i)][u + shift_of(j)] (see red_pkg). So per tile only
// NPH x NPW distinct input vectors are needed, and none of them is an
// inserted zero. This module computes those NPH*NPW buffer addresses,
// replaces vectors that fall outside the input image by zeros (the border of
// the zero-inserted image), and fans each vector out to every SC that needs
// it: SCs in the same kernel row/column group share a vector.
//
// Area-efficient mode (FOLD = 2): crossbar unit q then holds SCs 2q and
// 2q+1 stacked in 2C rows. In phase p the unit's rows p*C .. p*C+C-1 get
// SC (2q+p)'s vector and the other C rows get zeros (Eq. 2 of the paper),
// so a tile takes FOLD compute cycles on half as many crossbars.
//
// Purely combinational: tile/phase in, addresses out, buffer data in, SC
// vectors out.
module red_zero_skip_router
  import red_pkg::*;
#(
  parameter int KH      = 4,
  parameter int KW      = 4,
  parameter int S       = 2,
  parameter int PAD     = 0,
  parameter int C       = 21,
  parameter int IN_BITS = 8,
  parameter int FOLD    = 1,
  parameter int MAX_IH  = 16,
  parameter int MAX_IW  = 16,
  localparam int NPH    = shift_span(KH, S, PAD),
  localparam int NPW    = shift_span(KW, S, PAD),
  localparam int NP     = NPH * NPW,
  localparam int NSC    = KH * KW,
  localparam int NU     = (NSC + FOLD - 1) / FOLD,
  localparam int HW     = $clog2(MAX_IH + 1),
  localparam int WW     = $clog2(MAX_IW + 1),
  localparam int TH     = tiles_of(MAX_IH, KH, S, PAD),
  localparam int TWD    = tiles_of(MAX_IW, KW, S, PAD),
  localparam int THW    = $clog2(TH + 1),
  localparam int TWW    = $clog2(TWD + 1),
  localparam int PHW    = (FOLD > 1) ? $clog2(FOLD) : 1
) (
  input  logic [THW-1:0]                             tile_t,
  input  logic [TWW-1:0]                             tile_u,
  input  logic [PHW-1:0]                             phase,
  input  logic [HW-1:0]                              cfg_ih,
  input  logic [WW-1:0]                              cfg_iw,
  output logic [NP-1:0][HW-1:0]                      rd_h,
  output logic [NP-1:0][WW-1:0]                      rd_w,
  input  logic [NP-1:0][C-1:0][IN_BITS-1:0]          rd_vec,
  output logic [NU-1:0][FOLD*C-1:0][IN_BITS-1:0]     sc_vec,
  output logic [NP-1:0]                              port_inside
);

  localparam int DMH = shift_min(KH, S, PAD);
  localparam int DMW = shift_min(KW, S, PAD);

  logic [NP-1:0][C-1:0][IN_BITS-1:0] port_vec;

  // Address generation and border zeroing, one read port per distinct vector.
  always_comb begin
    for (int ph = 0; ph < NPH; ph++) begin
      for (int pw = 0; pw < NPW; pw++) begin
        int r, c, p;
        p = ph * NPW + pw;
        r = int'(tile_t) + DMH + ph;
        c = int'(tile_u) + DMW + pw;
        port_inside[p] = (r >= 0) && (r < int'(cfg_ih)) && (c >= 0) && (c < int'(cfg_iw));
        rd_h[p] = port_inside[p] ? HW'(r) : '0;
        rd_w[p] = port_inside[p] ? WW'(c) : '0;
      end
    end
  end

  always_comb
    for (int p = 0; p < NP; p++)
      port_vec[p] = port_inside[p] ? rd_vec[p] : '0;

  // Fan-out: each crossbar unit gets the vector of the SC active in this phase.
  always_comb begin
    sc_vec = '0;
    for (int q = 0; q < NU; q++) begin
      for (int f = 0; f < FOLD; f++) begin
        int n, i, j, p;
        n = q * FOLD + f;
        i = n / KW;
        j = n % KW;
        p = (shift_of(i, KH, S, PAD) - DMH) * NPW + (shift_of(j, KW, S, PAD) - DMW);
        if (n < NSC && int'(phase) == f) begin
          for (int ch = 0; ch < C; ch++)
            sc_vec[q][f*C + ch] = port_vec[p][ch];
        end
      end
    end
  end

endmodule

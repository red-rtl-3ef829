// red_output_buffer: store of the output feature maps, banked by mode.
//
// Every output tile delivers S*S pixel vectors at once, one per computation
// mode, so the buffer is split into S*S banks: bank (a,b) holds the pixels
// with oh mod S = a and ow mod S = b, at word (oh div S, ow div S). A tile is
// written in one clock. Pixels of the last tile row/column that lie past the
// output size (cfg_oh x cfg_ow) are dropped instead of written, which is the
// cropping of the output edge; wr_mask tells which banks took a pixel.
// Reading is combinational by output coordinate. The paper names buffer
// sub-arrays without describing them; the banking is this design's choice,
// made so that the S*S pixels of a tile never compete for a port.
module red_output_buffer #(
  parameter int S      = 2,
  parameter int M      = 21,
  parameter int ACC_W  = 32,
  parameter int TH     = 17,
  parameter int TWD    = 17,
  localparam int NMODE = S * S,
  localparam int THW   = $clog2(TH + 1),
  localparam int TWW   = $clog2(TWD + 1),
  localparam int OHW   = $clog2(S * TH + 1),
  localparam int OWW   = $clog2(S * TWD + 1)
) (
  input  logic                                       clk,
  input  logic [OHW-1:0]                             cfg_oh,
  input  logic [OWW-1:0]                             cfg_ow,
  input  logic                                       wr_en,
  input  logic [THW-1:0]                             wr_t,
  input  logic [TWW-1:0]                             wr_u,
  input  logic signed [NMODE-1:0][M-1:0][ACC_W-1:0]  wr_pix,
  output logic [NMODE-1:0]                           wr_mask,
  input  logic [OHW-1:0]                             rd_oh,
  input  logic [OWW-1:0]                             rd_ow,
  output logic signed [M-1:0][ACC_W-1:0]             rd_pix
);

  localparam int DEPTH = TH * TWD;
  localparam int MDW   = (NMODE > 1) ? $clog2(NMODE) : 1;

  logic signed [M-1:0][ACC_W-1:0] bank [NMODE][DEPTH];

  always_comb begin
    for (int a = 0; a < S; a++)
      for (int b = 0; b < S; b++)
        wr_mask[a*S + b] = wr_en && (int'(wr_t) < TH) && (int'(wr_u) < TWD)
                           && (S * int'(wr_t) + a < int'(cfg_oh))
                           && (S * int'(wr_u) + b < int'(cfg_ow));
  end

  always_ff @(posedge clk)
    for (int md = 0; md < NMODE; md++)
      if (wr_mask[md]) bank[md][int'(wr_t) * TWD + int'(wr_u)] <= wr_pix[md];

  always_comb begin
    int t, u;
    logic [MDW-1:0] md;
    t  = int'(rd_oh) / S;
    u  = int'(rd_ow) / S;
    md = $bits(md)'((int'(rd_oh) % S) * S + (int'(rd_ow) % S));
    if (t < TH && u < TWD) rd_pix = bank[md][t * TWD + u];
    else                   rd_pix = '0;
  end

endmodule

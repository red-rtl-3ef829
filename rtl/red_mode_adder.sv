// red_mode_adder: the vertical sum-up that turns sub-crossbar results into
// output pixels.
//
// A stride-S deconvolution splits into S*S computation modes, one per output
// pixel position (a,b) inside an S x S tile; the kernel positions of
// different modes are disjoint. The pixel of mode (a,b) is the sum of the
// results of every SC (i,j) with mode_of(i) = a and mode_of(j) = b (4, 2, 2
// and 1 SCs for a 3x3 kernel at stride 2). This module holds one adder per
// mode and lane. With FOLD = 2 (area-efficient mode) a tile arrives as two
// phases, each carrying the results of a different half of the SCs; the
// first phase is kept in a register and the pixel is written with the
// second.
//
// Timing: in_valid/in_phase/in_t/in_u/in_last arrive with the shift-adder
// results. One clock after the last phase of a tile, out_valid pulses with
// the S*S pixels and the tile index; out_last marks the final tile of a
// layer.
module red_mode_adder
  import red_pkg::*;
#(
  parameter int KH     = 4,
  parameter int KW     = 4,
  parameter int S      = 2,
  parameter int PAD    = 0,
  parameter int M      = 21,
  parameter int FOLD   = 1,
  parameter int ACC_W  = 32,
  parameter int THW    = 5,
  parameter int TWW    = 5,
  localparam int NSC   = KH * KW,
  localparam int NU    = (NSC + FOLD - 1) / FOLD,
  localparam int NMODE = S * S,
  localparam int PHW   = (FOLD > 1) ? $clog2(FOLD) : 1
) (
  input  logic                                          clk,
  input  logic                                          rst_n,
  input  logic                                          in_valid,
  input  logic [PHW-1:0]                                in_phase,
  input  logic [THW-1:0]                                in_t,
  input  logic [TWW-1:0]                                in_u,
  input  logic                                          in_last,
  input  logic signed [NU-1:0][M-1:0][ACC_W-1:0]        sc_sum,
  output logic                                          out_valid,
  output logic [THW-1:0]                                out_t,
  output logic [TWW-1:0]                                out_u,
  output logic                                          out_last,
  output logic signed [NMODE-1:0][M-1:0][ACC_W-1:0]     out_pix
);

  logic signed [NMODE-1:0][M-1:0][ACC_W-1:0] part, held;

  // Computation mode (a*S + b) served by sub-crossbar n.
  function automatic int sc_mode(input int n);
    return mode_of(n / KW, KH, S, PAD) * S + mode_of(n % KW, KW, S, PAD);
  endfunction

  always_comb begin
    part = '0;
    for (int q = 0; q < NU; q++) begin
      for (int f = 0; f < FOLD; f++) begin
        if (q * FOLD + f < NSC && int'(in_phase) == f) begin
          for (int m = 0; m < M; m++)
            part[sc_mode(q * FOLD + f)][m] = part[sc_mode(q * FOLD + f)][m] + sc_sum[q][m];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held      <= '0;
      out_valid <= 1'b0;
      out_t     <= '0;
      out_u     <= '0;
      out_last  <= 1'b0;
      out_pix   <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (int'(in_phase) == FOLD - 1) begin
          for (int md = 0; md < NMODE; md++)
            for (int m = 0; m < M; m++)
              out_pix[md][m] <= (in_phase == '0) ? part[md][m] : held[md][m] + part[md][m];
          out_valid <= 1'b1;
          out_t     <= in_t;
          out_u     <= in_u;
          out_last  <= in_last;
        end else if (in_phase == '0) begin
          held <= part;
        end else begin
          for (int md = 0; md < NMODE; md++)
            for (int m = 0; m < M; m++)
              held[md][m] <= held[md][m] + part[md][m];
        end
      end
    end
  end

endmodule

// red_top: RED, a ReRAM deconvolution engine with pixel-wise mapping and a
// zero-skipping data flow, for one layer of K_H x K_W x C x M weights at
// stride S and padding PAD.
//
// The kernel is split over K_H*K_W sub-crossbars (SCs) of C x M cells, SC
// n = i*K_W + j holding W[i][j][:][:] (Eq. 1 of the paper). For each output
// tile of S x S pixels the zero-skipping router fetches, from the input
// buffer, only real (non-inserted-zero) input vectors and gives every SC the
// one it needs; all SCs compute at once, bit-serially over IN_BITS clocks;
// the mode adder sums the SC results of each of the S*S computation modes
// into one output pixel each; the output buffer stores them, dropping the
// pixels past the output edge. A tile therefore costs IN_BITS clocks and
// yields S*S output pixels per feature map, where a zero-padding mapping on
// one crossbar would yield one. With FOLD = 2 the area-efficient variant is
// built: ceil(K_H*K_W/2) crossbars of 2C rows, each tile in two phases.
//
// Interface (all synchronous to clk, active-low asynchronous reset):
//  * prog_*: write weight W[prog_i][prog_j][prog_c][prog_m] = prog_data, one
//    per clock, while idle.
//  * in_*:   write input pixel vector I[in_h][in_w][0..C-1], one per clock.
//  * start with cfg_ih/cfg_iw (input size, 1..MAX): run the layer; busy is
//    high until done pulses. cycles holds the clock count of the last layer.
//  * rd_oh/rd_ow: combinational read of output pixel vector O[rd_oh][rd_ow].
//  * dbg_*: one-clock event strobes (tile written, pixels cropped, input
//    vectors replaced by border zeros, fold phase) for observation.
// Defaults are the paper's FCN_Deconv1 layer (Table I: 16x16x21 input,
// 4x4x21x21 kernel, stride 2, 34x34x21 output). Word widths, the bit-serial
// input, the buffers and the host interface are this design's choices.
//
// The assertions at the end are disabled while rst_n is low, so rst_n is
// sampled by them synchronously as well as used as the asynchronous reset
// of the flops; a linter may report this. It concerns the checks only; the
// circuit uses rst_n solely as an asynchronous reset.
module red_top
  import red_pkg::*;
#(
  parameter int KH      = 4,
  parameter int KW      = 4,
  parameter int S       = 2,
  parameter int PAD     = 0,
  parameter int C       = 21,
  parameter int M       = 21,
  parameter int FOLD    = 1,
  parameter int IN_BITS = 8,
  parameter int W_BITS  = 8,
  parameter int ACC_W   = 32,
  parameter int MAX_IH  = 16,
  parameter int MAX_IW  = 16,
  localparam int NSC    = KH * KW,
  localparam int NU     = (NSC + FOLD - 1) / FOLD,
  localparam int ROWS   = FOLD * C,
  localparam int NPH    = shift_span(KH, S, PAD),
  localparam int NPW    = shift_span(KW, S, PAD),
  localparam int NP     = NPH * NPW,
  localparam int NMODE  = S * S,
  localparam int HW     = $clog2(MAX_IH + 1),
  localparam int WW     = $clog2(MAX_IW + 1),
  localparam int TH     = tiles_of(MAX_IH, KH, S, PAD),
  localparam int TWD    = tiles_of(MAX_IW, KW, S, PAD),
  localparam int THW    = $clog2(TH + 1),
  localparam int TWW    = $clog2(TWD + 1),
  localparam int OHW    = $clog2(S * TH + 1),
  localparam int OWW    = $clog2(S * TWD + 1),
  localparam int KIW    = (KH > 1) ? $clog2(KH) : 1,
  localparam int KJW    = (KW > 1) ? $clog2(KW) : 1,
  localparam int CWD    = (C > 1) ? $clog2(C) : 1,
  localparam int MWD    = (M > 1) ? $clog2(M) : 1,
  localparam int RAW    = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int PHW    = (FOLD > 1) ? $clog2(FOLD) : 1,
  localparam int BW     = (IN_BITS > 1) ? $clog2(IN_BITS) : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // weight programming
  input  logic                              prog_en,
  input  logic [KIW-1:0]                    prog_i,
  input  logic [KJW-1:0]                    prog_j,
  input  logic [CWD-1:0]                    prog_c,
  input  logic [MWD-1:0]                    prog_m,
  input  logic signed [W_BITS-1:0]          prog_data,
  // input feature map load
  input  logic                              in_we,
  input  logic [HW-1:0]                     in_h,
  input  logic [WW-1:0]                     in_w,
  input  logic [C-1:0][IN_BITS-1:0]         in_vec,
  // layer control
  input  logic                              start,
  input  logic [HW-1:0]                     cfg_ih,
  input  logic [WW-1:0]                     cfg_iw,
  output logic                              busy,
  output logic                              done,
  output logic [31:0]                       cycles,
  // output feature map read
  input  logic [OHW-1:0]                    rd_oh,
  input  logic [OWW-1:0]                    rd_ow,
  output logic signed [M-1:0][ACC_W-1:0]    rd_pix,
  // event strobes
  output logic                              dbg_tile_wr,
  output logic [NMODE-1:0]                  dbg_wr_mask,
  output logic                              dbg_border,
  output logic                              dbg_fold_phase
);

  // ---- controller ---------------------------------------------------------
  logic [HW-1:0]  cur_ih;
  logic [WW-1:0]  cur_iw;
  logic [OHW-1:0] cur_oh;
  logic [OWW-1:0] cur_ow;
  logic [THW-1:0] fetch_t, res_t, wb_t;
  logic [TWW-1:0] fetch_u, res_u, wb_u;
  logic [PHW-1:0] fetch_ph, res_ph;
  logic           load, sa_en, sa_first, sa_last, res_last;
  logic [BW-1:0]  sa_bit;
  logic           wb_valid, wb_last;

  red_controller #(.KH(KH), .KW(KW), .S(S), .PAD(PAD), .FOLD(FOLD), .IN_BITS(IN_BITS),
                   .MAX_IH(MAX_IH), .MAX_IW(MAX_IW)) u_ctrl (
    .clk, .rst_n, .start, .cfg_ih, .cfg_iw, .busy, .done, .cycles,
    .cur_ih, .cur_iw, .cur_oh, .cur_ow,
    .fetch_t, .fetch_u, .fetch_ph, .load,
    .sa_en, .sa_first, .sa_last, .sa_bit,
    .res_t, .res_u, .res_ph, .res_last,
    .wb_valid, .wb_last);

  // ---- input buffer and zero-skipping router ------------------------------
  logic [NP-1:0][HW-1:0]                   rd_h;
  logic [NP-1:0][WW-1:0]                   rd_w;
  logic [NP-1:0][C-1:0][IN_BITS-1:0]       rd_vec;
  logic [NU-1:0][ROWS-1:0][IN_BITS-1:0]    sc_vec;
  logic [NP-1:0]                           port_inside;

  red_input_buffer #(.C(C), .IN_BITS(IN_BITS), .MAX_IH(MAX_IH), .MAX_IW(MAX_IW), .NPORT(NP)) u_ibuf (
    .clk, .we(in_we), .wr_h(in_h), .wr_w(in_w), .wr_vec(in_vec),
    .rd_h, .rd_w, .rd_vec);

  red_zero_skip_router #(.KH(KH), .KW(KW), .S(S), .PAD(PAD), .C(C), .IN_BITS(IN_BITS),
                         .FOLD(FOLD), .MAX_IH(MAX_IH), .MAX_IW(MAX_IW)) u_route (
    .tile_t(fetch_t), .tile_u(fetch_u), .phase(fetch_ph),
    .cfg_ih(cur_ih), .cfg_iw(cur_iw),
    .rd_h, .rd_w, .rd_vec, .sc_vec, .port_inside);

  // ---- sub-crossbar tensor ------------------------------------------------
  // Pixel-wise mapping: W[i][j][c][m] -> SC n = i*KW + j, crossbar unit n / FOLD,
  // row (n % FOLD)*C + c, column m.
  int prog_n;
  assign prog_n = int'(prog_i) * KW + int'(prog_j);

  logic signed [NU-1:0][M-1:0][ACC_W-1:0] sc_sum;
  logic [NU-1:0]                          sc_valid;

  for (genvar q = 0; q < NU; q++) begin : g_sc
    logic           unit_prog;
    logic [RAW-1:0] unit_row;
    assign unit_prog = prog_en && !busy && (prog_n / FOLD == q);
    assign unit_row  = RAW'((prog_n % FOLD) * C + int'(prog_c));

    red_subcrossbar #(.ROWS(ROWS), .COLS(M), .W_BITS(W_BITS), .IN_BITS(IN_BITS), .ACC_W(ACC_W)) u_sc (
      .clk, .rst_n,
      .prog_en(unit_prog), .prog_row(unit_row), .prog_col(prog_m), .prog_data,
      .load, .vec(sc_vec[q]),
      .sa_en, .first(sa_first), .last(sa_last), .bit_idx(sa_bit),
      .sum(sc_sum[q]), .sum_valid(sc_valid[q]));
  end

  // ---- mode adder and output buffer ---------------------------------------
  logic signed [NMODE-1:0][M-1:0][ACC_W-1:0] wb_pix;

  red_mode_adder #(.KH(KH), .KW(KW), .S(S), .PAD(PAD), .M(M), .FOLD(FOLD), .ACC_W(ACC_W),
                   .THW(THW), .TWW(TWW)) u_madd (
    .clk, .rst_n,
    .in_valid(sc_valid[0]), .in_phase(res_ph), .in_t(res_t), .in_u(res_u), .in_last(res_last),
    .sc_sum,
    .out_valid(wb_valid), .out_t(wb_t), .out_u(wb_u), .out_last(wb_last), .out_pix(wb_pix));

  red_output_buffer #(.S(S), .M(M), .ACC_W(ACC_W), .TH(TH), .TWD(TWD)) u_obuf (
    .clk, .cfg_oh(cur_oh), .cfg_ow(cur_ow),
    .wr_en(wb_valid), .wr_t(wb_t), .wr_u(wb_u), .wr_pix(wb_pix), .wr_mask(dbg_wr_mask),
    .rd_oh, .rd_ow, .rd_pix);

  assign dbg_tile_wr    = wb_valid;
  assign dbg_border     = load && !(&port_inside);
  assign dbg_fold_phase = load && (fetch_ph != '0);

  // Weights and inputs must not change under a running layer.
  a_prog_idle: assert property (@(posedge clk) disable iff (!rst_n) prog_en |-> !busy);
  a_in_idle:   assert property (@(posedge clk) disable iff (!rst_n) in_we |-> !busy);
  // All crossbar units run in lock-step.
  a_lockstep:  assert property (@(posedge clk) disable iff (!rst_n) (sc_valid == '0) || (&sc_valid));

endmodule

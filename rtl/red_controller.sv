// red_controller: sequencer of one deconvolution layer on RED.
//
// After `start` it walks the output tiles (t,u) in raster order, t over
// ceil(O_H/S) tile rows and u over ceil(O_W/S) tile columns, and for each
// tile the FOLD phases of the area-efficient mode. Each (tile, phase) item
// takes IN_BITS clocks, one per input bit-plane. The wordline drivers are
// loaded at the clock edge that ends the previous item, so items follow
// each other without idle clocks: a layer takes
// ceil(O_H/S) * ceil(O_W/S) * FOLD * IN_BITS clocks of compute, plus two
// clocks for the last result to reach the output buffer.
//
// Outputs: fetch_* name the item whose input vectors the router must present
// now (they are loaded with `load`); sa_* sequence the shift adders; res_*
// name the item whose result appears with the shift adders' sum_valid. The
// layer's input size comes from cfg_ih/cfg_iw at `start` and is held in
// cur_ih/cur_iw; cur_oh/cur_ow = S*(I-1) + K - 2*PAD. `done` pulses when the
// last tile is written (wb_valid && wb_last). `cycles` counts the clocks of
// the last layer from start to done.
//
// The paper shows a controller per bank but not its workings; the tile
// order, the gap-free loading and the start/done handshake are this
// design's choices. A start while busy is ignored.
//
// Constant outputs: with FOLD = 1 (the default) there is only one phase, so
// fetch_ph and res_ph are always 0; they stay in the port list so that the
// same controller serves the folded build. Likewise, when S and K - 2*PAD
// are both even, the low bit of cur_oh/cur_ow is always 0.
module red_controller
  import red_pkg::*;
#(
  parameter int KH      = 4,
  parameter int KW      = 4,
  parameter int S       = 2,
  parameter int PAD     = 0,
  parameter int FOLD    = 1,
  parameter int IN_BITS = 8,
  parameter int MAX_IH  = 16,
  parameter int MAX_IW  = 16,
  localparam int HW     = $clog2(MAX_IH + 1),
  localparam int WW     = $clog2(MAX_IW + 1),
  localparam int TH     = tiles_of(MAX_IH, KH, S, PAD),
  localparam int TWD    = tiles_of(MAX_IW, KW, S, PAD),
  localparam int THW    = $clog2(TH + 1),
  localparam int TWW    = $clog2(TWD + 1),
  localparam int OHW    = $clog2(S * TH + 1),
  localparam int OWW    = $clog2(S * TWD + 1),
  localparam int PHW    = (FOLD > 1) ? $clog2(FOLD) : 1,
  localparam int BW     = (IN_BITS > 1) ? $clog2(IN_BITS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [HW-1:0]   cfg_ih,
  input  logic [WW-1:0]   cfg_iw,
  output logic            busy,
  output logic            done,
  output logic [31:0]     cycles,
  output logic [HW-1:0]   cur_ih,
  output logic [WW-1:0]   cur_iw,
  output logic [OHW-1:0]  cur_oh,
  output logic [OWW-1:0]  cur_ow,
  // item to fetch and load now
  output logic [THW-1:0]  fetch_t,
  output logic [TWW-1:0]  fetch_u,
  output logic [PHW-1:0]  fetch_ph,
  output logic            load,
  // bit-plane sequencing of the shift adders
  output logic            sa_en,
  output logic            sa_first,
  output logic            sa_last,
  output logic [BW-1:0]   sa_bit,
  // item whose result comes with sum_valid
  output logic [THW-1:0]  res_t,
  output logic [TWW-1:0]  res_u,
  output logic [PHW-1:0]  res_ph,
  output logic            res_last,
  // write-back of the final tile
  input  logic            wb_valid,
  input  logic            wb_last
);

  // Tiles per dimension: ceil((S*(I-1) + K - 2*PAD) / S) = I - 1 + ceil((K-2*PAD)/S).
  localparam int EXT_H = (KH - 2 * PAD + S - 1) / S;
  localparam int EXT_W = (KW - 2 * PAD + S - 1) / S;

  typedef enum logic [1:0] {IDLE, RUN, DRAIN} state_t;
  state_t state;

  logic [HW-1:0]  ih_q;
  logic [WW-1:0]  iw_q;
  logic [THW-1:0] th_q, t_q, nt;
  logic [TWW-1:0] tw_q, u_q, nu;
  logic [PHW-1:0] ph_q, nph;
  logic [BW-1:0]  bit_q;
  logic           item_last;

  assign cur_ih = (state == IDLE) ? cfg_ih : ih_q;
  assign cur_iw = (state == IDLE) ? cfg_iw : iw_q;
  assign cur_oh = OHW'(S * (int'(ih_q) - 1) + KH - 2 * PAD);
  assign cur_ow = OWW'(S * (int'(iw_q) - 1) + KW - 2 * PAD);
  assign busy   = (state != IDLE);

  // Next item in raster order: phase, then tile column, then tile row.
  always_comb begin
    nt = t_q; nu = u_q; nph = ph_q;
    if (int'(ph_q) < FOLD - 1) nph = ph_q + 1'b1;
    else begin
      nph = '0;
      if (u_q < tw_q - 1'b1) nu = u_q + 1'b1;
      else begin
        nu = '0;
        nt = t_q + 1'b1;
      end
    end
  end

  assign item_last = (t_q == th_q - 1'b1) && (u_q == tw_q - 1'b1) && (int'(ph_q) == FOLD - 1);

  always_comb begin
    if (state == IDLE) begin
      fetch_t = '0; fetch_u = '0; fetch_ph = '0;
    end else begin
      fetch_t = nt; fetch_u = nu; fetch_ph = nph;
    end
    load = ((state == IDLE) && start)
        || ((state == RUN) && int'(bit_q) == IN_BITS - 1 && !item_last);
  end

  assign sa_en    = (state == RUN);
  assign sa_first = (bit_q == '0);
  assign sa_last  = (int'(bit_q) == IN_BITS - 1);
  assign sa_bit   = bit_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= IDLE;
      ih_q     <= '0;
      iw_q     <= '0;
      th_q     <= '0;
      tw_q     <= '0;
      t_q      <= '0;
      u_q      <= '0;
      ph_q     <= '0;
      bit_q    <= '0;
      res_t    <= '0;
      res_u    <= '0;
      res_ph   <= '0;
      res_last <= 1'b0;
      done     <= 1'b0;
      cycles   <= '0;
    end else begin
      done <= 1'b0;
      if (state != IDLE) cycles <= cycles + 1;
      unique case (state)
        IDLE: if (start) begin
          ih_q   <= cfg_ih;
          iw_q   <= cfg_iw;
          th_q   <= THW'(int'(cfg_ih) - 1 + EXT_H);
          tw_q   <= TWW'(int'(cfg_iw) - 1 + EXT_W);
          t_q    <= '0;
          u_q    <= '0;
          ph_q   <= '0;
          bit_q  <= '0;
          cycles <= 32'd1;
          state  <= RUN;
        end
        RUN: begin
          if (int'(bit_q) == IN_BITS - 1) begin
            bit_q    <= '0;
            res_t    <= t_q;
            res_u    <= u_q;
            res_ph   <= ph_q;
            res_last <= item_last;
            if (item_last) state <= DRAIN;
            else begin
              t_q  <= nt;
              u_q  <= nu;
              ph_q <= nph;
            end
          end else begin
            bit_q <= bit_q + 1'b1;
          end
        end
        DRAIN: if (wb_valid && wb_last) begin
          done  <= 1'b1;
          state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

  // A layer needs at least one input pixel and must fit the input buffer.
  a_cfg_range: assert property (@(posedge clk) disable iff (!rst_n)
    (state == IDLE && start) |-> (cfg_ih >= 1 && int'(cfg_ih) <= MAX_IH && cfg_iw >= 1 && int'(cfg_iw) <= MAX_IW));
  // Write-backs only happen while a layer is in flight.
  a_wb_busy: assert property (@(posedge clk) disable iff (!rst_n) wb_valid |-> busy);

endmodule

// red_wl_driver: digital side of the wordline driver of one crossbar.
//
// The crossbar takes its input vector as voltage pulses, one bit-plane at a
// time. On `load` the driver captures a vector of ROWS signed IN_BITS-bit
// pixels; in each following clock it presents the next bit-plane on `wl`,
// least significant bit first, so bit b of every row is on the wordlines in
// the b-th clock after the load (b = 0 .. IN_BITS-1). A `load` in the clock
// that shows the last bit starts the next vector without a gap. The pulse
// encoding follows the paper (inputs enter as voltage spikes); LSB-first
// order and the width are this design's choices. The analog pulse shaping
// and the bitline driver are outside the model.
module red_wl_driver #(
  parameter int ROWS    = 21,
  parameter int IN_BITS = 8
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              load,
  input  logic [ROWS-1:0][IN_BITS-1:0]      vec,
  output logic [ROWS-1:0]                   wl
);

  logic [ROWS-1:0][IN_BITS-1:0] shreg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) shreg <= '0;
    else if (load) shreg <= vec;
    else for (int r = 0; r < ROWS; r++) shreg[r] <= shreg[r] >> 1;
  end

  always_comb
    for (int r = 0; r < ROWS; r++) wl[r] = shreg[r][0];

endmodule

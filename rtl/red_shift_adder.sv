// red_shift_adder: shift-and-add of bit-serial crossbar results, one lane per
// bitline.
//
// With the input applied one bit-plane per clock, bitline m returns in clock
// b the partial sum P_b = sum_r bit_b(x_r) * w_rm. The full dot product of
// two's-complement inputs is sum_{b<IN_BITS-1} P_b*2^b - P_{IN_BITS-1}*2^(IN_BITS-1).
// The adder accumulates P_b << b while `en` is high, `first` clears the
// accumulator, and `last` marks the sign plane (subtracted). One clock after
// the `last` plane, `sum` holds the result and `sum_valid` pulses for one
// clock; `sum` stays until the next result. The paper places a shift adder
// behind every crossbar; the signed LSB-first scheme is this design's choice.
module red_shift_adder #(
  parameter int LANES   = 21,
  parameter int IN_W    = 13,
  parameter int IN_BITS = 8,
  parameter int ACC_W   = 32,
  localparam int BW     = (IN_BITS > 1) ? $clog2(IN_BITS) : 1
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               en,
  input  logic                               first,
  input  logic                               last,
  input  logic [BW-1:0]                      bit_idx,
  input  logic signed [LANES-1:0][IN_W-1:0]  psum,
  output logic signed [LANES-1:0][ACC_W-1:0] sum,
  output logic                               sum_valid
);

  logic signed [LANES-1:0][ACC_W-1:0] acc, acc_next;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [ACC_W-1:0] term;
      term = ACC_W'(signed'(psum[l])) <<< bit_idx;
      acc_next[l] = (first ? '0 : acc[l]) + (last ? -term : term);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      sum       <= '0;
      sum_valid <= 1'b0;
    end else begin
      sum_valid <= en && last;
      if (en) begin
        acc <= acc_next;
        if (last) sum <= acc_next;
      end
    end
  end

endmodule

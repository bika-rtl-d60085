// bika_pe: one processing element of the BiKA systolic array, a
// comparison-accumulator (CAC).
//
// Each cycle the PE compares the activation arriving from its left neighbour
// with the threshold arriving from the neighbour below. If the activation is
// greater than the threshold it adds +1 to its accumulator, otherwise -1: this
// is one binary learnable threshold Thres_i(A_i) of a BiKA neuron, and the
// accumulator forms the neuron output sum_i Thres_i(A_i). No multiplier and no
// activation function follow, as in the paper's PE (comparator then ACCU).
// The accumulator is limited to [-(2^(ACC_W-1)), 2^(ACC_W-1)-1]; a step that
// would leave the range keeps the bound instead (the paper's "sum limitation",
// applied here on every step) and raises `sat` for one cycle.
//
// The comparison is strict (">"), as printed in the paper's PE drawing; the
// paper's threshold equation uses ">=", which an integer design gets by
// storing threshold-1. Signed operands, the valid bit and synchronous reset
// are choices of this design.
//
// Timing: act_out/thr_out are the inputs delayed by one register, so data
// moves one PE per cycle to the right (activations) and upwards (thresholds).
// acc reflects an input one cycle after it is presented. `clear` zeroes acc
// on the next edge and takes priority over accumulation.
module bika_pe #(
  parameter int unsigned DATA_W = bika_pkg::DATA_W,
  parameter int unsigned ACC_W  = bika_pkg::ACC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     act_valid_in,
  input  logic signed [DATA_W-1:0] act_in,
  input  logic signed [DATA_W-1:0] thr_in,
  output logic                     act_valid_out,
  output logic signed [DATA_W-1:0] act_out,
  output logic signed [DATA_W-1:0] thr_out,
  output logic signed [ACC_W-1:0]  acc,
  output logic                     sat
);

  localparam logic signed [ACC_W-1:0] ACC_MAX = {1'b0, {(ACC_W-1){1'b1}}};
  localparam logic signed [ACC_W-1:0] ACC_MIN = {1'b1, {(ACC_W-1){1'b0}}};
  localparam logic signed [ACC_W-1:0] ONE     = {{(ACC_W-1){1'b0}}, 1'b1};

  logic fire;        // threshold output: 1 -> +1, 0 -> -1
  logic at_bound;    // the step would leave the accumulator range

  assign fire     = act_in > thr_in;
  assign at_bound = fire ? (acc == ACC_MAX) : (acc == ACC_MIN);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      act_valid_out <= 1'b0;
      act_out       <= '0;
      thr_out       <= '0;
      acc           <= '0;
      sat           <= 1'b0;
    end else begin
      act_valid_out <= act_valid_in;
      act_out       <= act_in;
      thr_out       <= thr_in;
      sat           <= 1'b0;
      if (clear) begin
        acc <= '0;
      end else if (act_valid_in) begin
        if (at_bound) sat <= 1'b1;
        else          acc <= fire ? acc + ONE : acc - ONE;
      end
    end
  end

endmodule

// bika_skew: diagonal delay line that feeds a systolic array edge.
//
// Lane i of the output is lane i of the input delayed by i clock cycles
// (lane 0 passes straight through), so that data entering a LANES-wide edge
// of the array in the same cycle meets its partner stream in the right PE.
// Each lane carries WIDTH bits. Reset clears every stage. Lane 0 has no
// register and is a plain wire from input to output. This helper is not
// drawn in the paper; any output-stationary systolic array needs it.
module bika_skew #(
  parameter int unsigned LANES = 8,
  parameter int unsigned WIDTH = 9
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] din  [LANES],
  output logic [WIDTH-1:0] dout [LANES]
);

  assign dout[0] = din[0];

  for (genvar i = 1; i < LANES; i++) begin : g_lane
    logic [WIDTH-1:0] stage [i];
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        for (int s = 0; s < i; s++) stage[s] <= '0;
      end else begin
        stage[0] <= din[i];
        for (int s = 1; s < i; s++) stage[s] <= stage[s-1];
      end
    end
    assign dout[i] = stage[i-1];
  end

endmodule

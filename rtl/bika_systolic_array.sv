// bika_systolic_array: ROWS x COLS grid of comparison-accumulator PEs.
//
// The array is output stationary. Row r takes a stream of activations at its
// left edge; each activation moves one PE to the right per cycle. Column c
// takes a stream of thresholds at its bottom edge (row 0); each threshold
// moves one PE up per cycle. PE(r,c) therefore sees activation k of input
// vector r together with threshold k of neuron c, provided the host side
// skews the streams (row r delayed by r cycles, column c delayed by c cycles),
// and its accumulator ends up holding the BiKA output of neuron c for input
// vector r: sum over k of (A[r][k] > T[k][c] ? +1 : -1), saturated.
//
// The grid, the flow directions (activations rightwards, thresholds upwards)
// and the 8x8 size follow the paper's systolic-array drawing; that the inputs
// arrive already skewed and that every accumulator is visible in parallel at
// the `acc` output are this design's choices.
//
// Timing: an activation presented at act_in[r] with valid in cycle t is
// accumulated by PE(r,c) at the clock edge ending cycle t+c; `clear` zeroes
// every accumulator at the next edge. sat_any is high for a cycle in which
// some PE clipped its sum.
module bika_systolic_array #(
  parameter int unsigned ROWS   = 8,
  parameter int unsigned COLS   = 8,
  parameter int unsigned DATA_W = bika_pkg::DATA_W,
  parameter int unsigned ACC_W  = bika_pkg::ACC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     act_valid_in [ROWS],
  input  logic signed [DATA_W-1:0] act_in       [ROWS],
  input  logic signed [DATA_W-1:0] thr_in       [COLS],
  output logic signed [ACC_W-1:0]  acc          [ROWS][COLS],
  output logic                     sat_any
);

  // Horizontal links: h_*[r][c] is the input of PE(r,c); index COLS is the
  // output of the last PE of the row. Vertical links likewise with v_thr.
  logic                     h_valid [ROWS][COLS+1];
  logic signed [DATA_W-1:0] h_act   [ROWS][COLS+1];
  logic signed [DATA_W-1:0] v_thr   [ROWS+1][COLS];
  logic [ROWS*COLS-1:0]     sat_vec;

  for (genvar r = 0; r < ROWS; r++) begin : g_left
    assign h_valid[r][0] = act_valid_in[r];
    assign h_act[r][0]   = act_in[r];
  end
  for (genvar c = 0; c < COLS; c++) begin : g_bottom
    assign v_thr[0][c] = thr_in[c];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      bika_pe #(.DATA_W(DATA_W), .ACC_W(ACC_W)) u_pe (
        .clk          (clk),
        .rst_n        (rst_n),
        .clear        (clear),
        .act_valid_in (h_valid[r][c]),
        .act_in       (h_act[r][c]),
        .thr_in       (v_thr[r][c]),
        .act_valid_out(h_valid[r][c+1]),
        .act_out      (h_act[r][c+1]),
        .thr_out      (v_thr[r+1][c]),
        .acc          (acc[r][c]),
        .sat          (sat_vec[r*COLS+c])
      );
    end
  end

  assign sat_any = |sat_vec;

endmodule

// bika_accel_top: BiKA systolic-array accelerator.
//
// A BiKA layer computes, for every input vector r and neuron c,
//   out[r][c] = sum_k ( A[r][k] > T[k][c] ? +1 : -1 ),
// limited to the 8-bit range [-128, 127]. Each input of each neuron has its
// own learnable threshold T[k][c], which replaces both the weight multiply and
// the activation function of a conventional neuron; the hardware therefore
// needs only comparators and small accumulators.
//
// Structure (follows the paper's 8x8 array of comparator-accumulator PEs, with
// activations entering at the left and thresholds at the bottom):
//   u_act_buf  activation buffer, word a = ROWS activations (one per array row)
//   u_thr_buf  threshold buffer,  word t = COLS thresholds (one per column)
//   u_act_skew / u_thr_skew  diagonal delay lines feeding the array edges
//   u_array    ROWS x COLS bika_pe grid, output stationary
//   u_ctrl     layer state machine (see bika_controller for the tile loop)
//   u_out_buf  output buffer, word = the ROWS results of one neuron
// The buffers, their sizes and the host port are this design's choices: the
// paper gives the PE, the array and its 8x8 size, and the 8-bit accumulator
// with sum limitation, but does not describe memories or the host interface.
//
// Memory layout for a layer with K = cfg.k_len, N = cfg.n_groups*COLS:
//   activation word mg*K + k, lane r : A[mg*ROWS + r][k]
//   threshold  word ng*K + k, lane c : T[k][ng*COLS + c]
//   output     word mg*N + n, lane r : out[mg*ROWS + r][n]
// so an output word is already an activation word of the next layer (with
// K_next = N), and the host can copy the output buffer into the activation
// buffer unchanged between layers. Lane i occupies bits [8*i +: 8].
//
// Host port: while busy is low, host_we writes host_wdata to word host_waddr
// of the buffer chosen by host_wsel (activation or threshold). host_re reads
// output word host_raddr, returned on host_rdata one cycle later. A pulse on
// start (with cfg valid in the same cycle) runs one layer; done pulses for one
// cycle m_groups*n_groups*(K + ROWS + 2*COLS) + 1 cycles after the start
// edge. sat_count counts cycles in which the sum limitation clipped some
// accumulator; it is cleared by reset only.
module bika_accel_top
  import bika_pkg::*;
#(
  parameter int unsigned ROWS      = 8,
  parameter int unsigned COLS      = 8,
  parameter int unsigned ACT_DEPTH = 1024,
  parameter int unsigned THR_DEPTH = 8192,
  parameter int unsigned OUT_DEPTH = 1024,
  localparam int unsigned ACT_AW   = $clog2(ACT_DEPTH),
  localparam int unsigned THR_AW   = $clog2(THR_DEPTH),
  localparam int unsigned OUT_AW   = $clog2(OUT_DEPTH),
  localparam int unsigned HOST_AW  = (ACT_AW > THR_AW) ? ACT_AW : THR_AW,
  localparam int unsigned LANES    = (ROWS > COLS) ? ROWS : COLS,
  localparam int unsigned CW       = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // host buffer writes
  input  logic                       host_we,
  input  host_sel_e                  host_wsel,
  input  logic [HOST_AW-1:0]         host_waddr,
  input  logic [LANES*DATA_W-1:0]    host_wdata,
  // host result reads
  input  logic                       host_re,
  input  logic [OUT_AW-1:0]          host_raddr,
  output logic [ROWS*ACC_W-1:0]      host_rdata,
  // layer control
  input  logic                       start,
  input  layer_cfg_t                 cfg,
  output logic                       busy,
  output logic                       done,
  output logic [31:0]                sat_count
);

  // ---------------------------------------------------------------- buffers
  logic              act_re, thr_re, out_we, feed_valid, arr_clear, sat_any;
  logic [ACT_AW-1:0] act_raddr;
  logic [THR_AW-1:0] thr_raddr;
  logic [OUT_AW-1:0] out_waddr;
  logic [CW-1:0]     col_sel;
  logic [ROWS*DATA_W-1:0] act_rdata;
  logic [COLS*DATA_W-1:0] thr_rdata;
  logic [ROWS*ACC_W-1:0]  out_wdata;

  bika_buffer #(.WIDTH(ROWS*DATA_W), .DEPTH(ACT_DEPTH)) u_act_buf (
    .clk  (clk),
    .we   (host_we && host_wsel == SEL_ACT),
    .waddr(host_waddr[ACT_AW-1:0]),
    .wdata(host_wdata[ROWS*DATA_W-1:0]),
    .re   (act_re),
    .raddr(act_raddr),
    .rdata(act_rdata)
  );

  bika_buffer #(.WIDTH(COLS*DATA_W), .DEPTH(THR_DEPTH)) u_thr_buf (
    .clk  (clk),
    .we   (host_we && host_wsel == SEL_THR),
    .waddr(host_waddr[THR_AW-1:0]),
    .wdata(host_wdata[COLS*DATA_W-1:0]),
    .re   (thr_re),
    .raddr(thr_raddr),
    .rdata(thr_rdata)
  );

  bika_buffer #(.WIDTH(ROWS*ACC_W), .DEPTH(OUT_DEPTH)) u_out_buf (
    .clk  (clk),
    .we   (out_we),
    .waddr(out_waddr),
    .wdata(out_wdata),
    .re   (host_re),
    .raddr(host_raddr),
    .rdata(host_rdata)
  );

  // ------------------------------------------------------------ skew lines
  logic [DATA_W:0]   act_lane  [ROWS];   // {valid, activation}
  logic [DATA_W:0]   act_skwd  [ROWS];
  logic [DATA_W-1:0] thr_lane  [COLS];
  logic [DATA_W-1:0] thr_skwd  [COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_act_lane
    assign act_lane[r] = {feed_valid, act_rdata[r*DATA_W +: DATA_W]};
  end
  for (genvar c = 0; c < COLS; c++) begin : g_thr_lane
    assign thr_lane[c] = thr_rdata[c*DATA_W +: DATA_W];
  end

  bika_skew #(.LANES(ROWS), .WIDTH(DATA_W + 1)) u_act_skew (
    .clk(clk), .rst_n(rst_n), .din(act_lane), .dout(act_skwd)
  );
  bika_skew #(.LANES(COLS), .WIDTH(DATA_W)) u_thr_skew (
    .clk(clk), .rst_n(rst_n), .din(thr_lane), .dout(thr_skwd)
  );

  // ----------------------------------------------------------------- array
  logic                     arr_valid [ROWS];
  logic signed [DATA_W-1:0] arr_act   [ROWS];
  logic signed [DATA_W-1:0] arr_thr   [COLS];
  logic signed [ACC_W-1:0]  acc       [ROWS][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_arr_act
    assign arr_valid[r] = act_skwd[r][DATA_W];
    assign arr_act[r]   = act_skwd[r][DATA_W-1:0];
  end
  for (genvar c = 0; c < COLS; c++) begin : g_arr_thr
    assign arr_thr[c] = thr_skwd[c];
  end

  bika_systolic_array #(
    .ROWS(ROWS), .COLS(COLS), .DATA_W(DATA_W), .ACC_W(ACC_W)
  ) u_array (
    .clk         (clk),
    .rst_n       (rst_n),
    .clear       (arr_clear),
    .act_valid_in(arr_valid),
    .act_in      (arr_act),
    .thr_in      (arr_thr),
    .acc         (acc),
    .sat_any     (sat_any)
  );

  // Result write-back: one array column (one neuron, all ROWS inputs) per word.
  always_comb begin
    for (int r = 0; r < ROWS; r++) out_wdata[r*ACC_W +: ACC_W] = acc[r][col_sel];
  end

  // ------------------------------------------------------------- controller
  bika_controller #(
    .ROWS(ROWS), .COLS(COLS), .ACT_AW(ACT_AW), .THR_AW(THR_AW), .OUT_AW(OUT_AW)
  ) u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (start),
    .cfg       (cfg),
    .busy      (busy),
    .done      (done),
    .act_re    (act_re),
    .act_raddr (act_raddr),
    .thr_re    (thr_re),
    .thr_raddr (thr_raddr),
    .feed_valid(feed_valid),
    .arr_clear (arr_clear),
    .col_sel   (col_sel),
    .out_we    (out_we),
    .out_waddr (out_waddr)
  );

  always_ff @(posedge clk) begin
    if (!rst_n)       sat_count <= '0;
    else if (sat_any) sat_count <= sat_count + 32'd1;
  end

  // A layer must fit the buffers: the host splits larger layers.
  a_layer_fits: assert property (@(posedge clk) disable iff (!rst_n)
    (start && !busy) |->
      (32'(cfg.m_groups) * 32'(cfg.k_len) <= ACT_DEPTH) &&
      (32'(cfg.n_groups) * 32'(cfg.k_len) <= THR_DEPTH) &&
      (32'(cfg.m_groups) * 32'(cfg.n_groups) * COLS <= OUT_DEPTH))
    else $error("bika_accel_top: layer does not fit the buffers");

  // The buffers must not be rewritten while a layer is reading them.
  a_no_write_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    host_we |-> !busy)
    else $error("bika_accel_top: host write while busy");

endmodule

// bika_controller: state machine that runs one BiKA layer on the array.
//
// A layer multiplies out an M x K matrix of activations against a K x N
// matrix of thresholds (M = m_groups*ROWS input vectors, N = n_groups*COLS
// neurons, K = k_len inputs per neuron). The controller walks the output
// tiles in order (row group mg outer, neuron group ng inner) and, for each
// ROWS x COLS tile:
//   CLEAR  one cycle, zero the array's accumulators;
//   FEED   K cycles, read activation word mg*K+k and threshold word ng*K+k;
//          the buffer data reaches the skew registers one cycle later,
//          flagged by feed_valid;
//   DRAIN  ROWS+COLS-1 cycles, let the last skewed operands reach PE(R-1,C-1);
//   WRITE  COLS cycles, write array column c (the ROWS results of neuron
//          ng*COLS+c) to output word mg*N + ng*COLS + c.
// After the last tile it pulses `done` for one cycle and returns to IDLE.
// A tile takes K + ROWS + 2*COLS cycles and a layer
// m_groups*n_groups*(K + ROWS + 2*COLS) + 1 cycles from the start edge to
// the done cycle. Buffer base addresses are kept as running sums, so no
// multiplier is needed.
//
// The paper says only that the BiKA control state machine is simpler than
// the BNN/QNN ones because no threshold-activation phase follows the
// accumulation; the states, the tiling order and the output layout (one
// neuron per word, which is the activation layout of the next layer) are
// this design's own.
module bika_controller
  import bika_pkg::*;
#(
  parameter int unsigned ROWS   = 8,
  parameter int unsigned COLS   = 8,
  parameter int unsigned ACT_AW = 10,
  parameter int unsigned THR_AW = 13,
  parameter int unsigned OUT_AW = 10,
  localparam int unsigned CW    = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  layer_cfg_t        cfg,
  output logic              busy,
  output logic              done,
  // buffer reads
  output logic              act_re,
  output logic [ACT_AW-1:0] act_raddr,
  output logic              thr_re,
  output logic [THR_AW-1:0] thr_raddr,
  output logic              feed_valid,   // buffer rdata is a valid K step
  // array control and result write-back
  output logic              arr_clear,
  output logic [CW-1:0]     col_sel,
  output logic              out_we,
  output logic [OUT_AW-1:0] out_waddr
);

  typedef enum logic [2:0] {
    S_IDLE, S_CLEAR, S_FEED, S_DRAIN, S_WRITE, S_FINISH
  } state_e;

  localparam int unsigned DRAIN_CYC = ROWS + COLS - 1;
  localparam int unsigned DW        = $clog2(DRAIN_CYC + 1);

  state_e            state;
  layer_cfg_t        cfg_q;
  logic [10:0]       k_cnt;
  logic [7:0]        mg, ng;
  logic [DW-1:0]     drain_cnt;
  logic [CW-1:0]     col;
  logic [ACT_AW-1:0] act_base;   // mg * K
  logic [THR_AW-1:0] thr_base;   // ng * K
  logic [OUT_AW-1:0] out_ptr;

  wire last_k   = (k_cnt == cfg_q.k_len - 11'd1);
  wire last_col = (col == CW'(COLS - 1));
  wire last_ng  = (ng == cfg_q.n_groups - 8'd1);
  wire last_mg  = (mg == cfg_q.m_groups - 8'd1);
  wire cfg_ok   = (cfg.k_len != '0) && (cfg.m_groups != '0) && (cfg.n_groups != '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cfg_q      <= '0;
      k_cnt      <= '0;
      mg         <= '0;
      ng         <= '0;
      drain_cnt  <= '0;
      col        <= '0;
      act_base   <= '0;
      thr_base   <= '0;
      out_ptr    <= '0;
      feed_valid <= 1'b0;
    end else begin
      feed_valid <= (state == S_FEED);
      unique case (state)
        S_IDLE: begin
          if (start) begin
            cfg_q    <= cfg;
            mg       <= '0;
            ng       <= '0;
            act_base <= '0;
            thr_base <= '0;
            out_ptr  <= '0;
            state    <= cfg_ok ? S_CLEAR : S_FINISH;
          end
        end
        S_CLEAR: begin
          k_cnt <= '0;
          state <= S_FEED;
        end
        S_FEED: begin
          k_cnt <= k_cnt + 11'd1;
          if (last_k) begin
            drain_cnt <= '0;
            state     <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          drain_cnt <= drain_cnt + 1'b1;
          if (drain_cnt == DW'(DRAIN_CYC - 1)) begin
            col   <= '0;
            state <= S_WRITE;
          end
        end
        S_WRITE: begin
          col     <= col + 1'b1;
          out_ptr <= out_ptr + 1'b1;
          if (last_col) begin
            state <= S_CLEAR;
            if (!last_ng) begin
              ng       <= ng + 8'd1;
              thr_base <= thr_base + THR_AW'(cfg_q.k_len);
            end else begin
              ng       <= '0;
              thr_base <= '0;
              if (last_mg) state <= S_FINISH;
              else begin
                mg       <= mg + 8'd1;
                act_base <= act_base + ACT_AW'(cfg_q.k_len);
              end
            end
          end
        end
        S_FINISH: state <= S_IDLE;
        default:  state <= S_IDLE;
      endcase
    end
  end

  assign busy      = (state != S_IDLE);
  assign done      = (state == S_FINISH);
  assign arr_clear = (state == S_CLEAR);
  assign act_re    = (state == S_FEED);
  assign thr_re    = (state == S_FEED);
  assign act_raddr = act_base + ACT_AW'(k_cnt);
  assign thr_raddr = thr_base + THR_AW'(k_cnt);
  assign out_we    = (state == S_WRITE);
  assign out_waddr = out_ptr;
  assign col_sel   = col;

  // A start while a layer is running is ignored; the host must wait for done.
  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !busy)
    else $error("bika_controller: start while busy");
  a_cfg_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    (start && !busy) |-> cfg_ok)
    else $error("bika_controller: zero-sized layer");

endmodule

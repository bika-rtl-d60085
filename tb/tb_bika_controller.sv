// tb_bika_controller: self-checking test of the layer state machine.
//
// For several layer shapes the testbench records, cycle by cycle, the buffer
// read addresses, the clear pulses and the result writes, and compares them
// with the sequence expected from the tiling rule: for tile (mg, ng) one
// clear, then activation words mg*K+k and threshold words ng*K+k for
// k = 0..K-1, then COLS writes of output words mg*N + ng*COLS + c carrying
// column c, with ROWS+COLS-1 idle cycles between the last read and the first
// write. The done pulse must come m*n*(K+ROWS+2*COLS)+1 cycles after the
// start edge; feed_valid must follow the read enables by one cycle; start
// pulses during a layer are not given (the design asserts against them).
module tb_bika_controller;
  import bika_pkg::*;
  localparam int R = 8, C = 8;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  layer_cfg_t cfg = '0;
  logic busy, done, act_re, thr_re, feed_valid, arr_clear, out_we;
  logic [9:0]  act_raddr, out_waddr;
  logic [12:0] thr_raddr;
  logic [2:0]  col_sel;
  int checks = 0, failures = 0;

  bika_controller #(.ROWS(R), .COLS(C)) dut (
    .clk, .rst_n, .start, .cfg, .busy, .done, .act_re, .act_raddr, .thr_re,
    .thr_raddr, .feed_valid, .arr_clear, .col_sel, .out_we, .out_waddr);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_layer(int k_len, int mg_n, int ng_n);
    int cyc = 0, done_cyc = -1;
    int exp_cyc = mg_n * ng_n * (k_len + R + 2 * C) + 1;
    int tile_start;   // cycle of the clear of the current tile
    logic prev_re = 1'b0;
    cfg.k_len <= 11'(k_len); cfg.m_groups <= 8'(mg_n); cfg.n_groups <= 8'(ng_n);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    // cycle 1 is the first cycle after the start edge
    for (cyc = 1; cyc <= exp_cyc + 5; cyc++) begin
      int tile, ofs, mg, ng;
      logic e_clear, e_re, e_we;
      #1;
      tile = (cyc - 1) / (k_len + R + 2 * C);
      ofs  = (cyc - 1) % (k_len + R + 2 * C);
      mg   = tile / ng_n;
      ng   = tile % ng_n;
      e_clear = (cyc < exp_cyc) && ofs == 0;
      e_re    = (cyc < exp_cyc) && ofs >= 1 && ofs <= k_len;
      e_we    = (cyc < exp_cyc) && ofs >= 1 + k_len + R + C - 1;
      check(arr_clear == e_clear, "clear timing");
      check(act_re == e_re && thr_re == e_re, "read enable timing");
      check(out_we == e_we, "write timing");
      check(feed_valid == prev_re, "feed_valid follows read");
      check(busy == (cyc <= exp_cyc), "busy");
      if (e_re) begin
        check(act_raddr == 10'(mg * k_len + ofs - 1), "activation address");
        check(thr_raddr == 13'(ng * k_len + ofs - 1), "threshold address");
      end
      if (e_we) begin
        int c = ofs - (k_len + R + C);
        check(col_sel == 3'(c), "column select");
        check(out_waddr == 10'(mg * ng_n * C + ng * C + c), "output address");
      end
      if (done) begin
        check(done_cyc < 0, "single done pulse");
        done_cyc = cyc;
      end
      prev_re = act_re;
      @(posedge clk);
    end
    check(done_cyc == exp_cyc, "layer latency");
    if (done_cyc != exp_cyc) $display("done at %0d expected %0d", done_cyc, exp_cyc);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    run_layer(1, 1, 1);
    run_layer(3, 2, 3);
    run_layer(784, 1, 8);   // first layer of the tiny MLP for 8 inputs
    run_layer(64, 2, 4);
    run_layer(17, 3, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_bika_accel_top: end-to-end test of the BiKA accelerator at its default
// size (8x8 array, 1024/8192/1024-word buffers, no parameter overrides).
//
// The testbench acts as the host: it fills the activation and threshold
// buffers through the host port, starts a layer, waits for done, reads the
// output buffer and compares every result with a reference computed here
// from the BiKA neuron rule, out[r][n] = sum_k (A[r][k] > T[k][n] ? +1 : -1)
// with the sum clamped to [-128, 127] at every step.
// It runs
//   1. a 500-input layer with 16 input vectors and 24 neurons (2 x 3 tiles),
//   2. a second layer fed with the first layer's outputs, copied word for
//      word from the output buffer to the activation buffer (layer chaining),
//   3. a layer whose operands are biased so that sums hit both limits
//      (sum limitation), checked through the results and sat_count,
//   4. a layer with four thresholds per input (each input written four times
//      in a row, one threshold per copy), the multi-threshold form of the
//      network run on the same hardware,
//   5. a one-input layer, the smallest legal shape.
// Each layer's done must come m*n*(K+16)+1 cycles after start. Every
// mechanism (multi-tile walk, chaining, multi-threshold layer, upper and lower
// saturation) is
// counted and a failure is recorded for any that never occurred.
module tb_bika_accel_top;
  import bika_pkg::*;
  localparam int R = 8, C = 8;
  localparam int MAXM = 128, MAXK = 1024, MAXN = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  logic host_we = 1'b0, host_re = 1'b0, start = 1'b0;
  host_sel_e host_wsel = SEL_ACT;
  logic [12:0] host_waddr = '0;
  logic [63:0] host_wdata = '0;
  logic [9:0]  host_raddr = '0;
  logic [63:0] host_rdata;
  layer_cfg_t  cfg = '0;
  logic busy, done;
  logic [31:0] sat_count;

  int checks = 0, failures = 0;
  int n_multitile = 0, n_chain = 0, n_multi_thr = 0, n_clamp_hi = 0, n_clamp_lo = 0;
  byte A   [MAXM][MAXK];
  byte T   [MAXK][MAXN];
  byte OUT [MAXM][MAXN];

  bika_accel_top dut (
    .clk, .rst_n, .host_we, .host_wsel, .host_waddr, .host_wdata, .host_re,
    .host_raddr, .host_rdata, .start, .cfg, .busy, .done, .sat_count);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Host port drivers: inputs change at the falling edge, are sampled at the
  // next rising edge and are released 1 ns after it.
  task automatic host_write(host_sel_e sel, int addr, logic [63:0] data);
    @(negedge clk);
    host_we = 1'b1; host_wsel = sel; host_waddr = 13'(addr); host_wdata = data;
    @(posedge clk);
    #1 host_we = 1'b0;
  endtask

  task automatic host_read(int addr, output logic [63:0] data);
    @(negedge clk);
    host_re = 1'b1; host_raddr = 10'(addr);
    @(posedge clk);
    #1 data = host_rdata;
    host_re = 1'b0;
  endtask

  // Load A (m x k) and T (k x n) into the buffers in the documented layout.
  task automatic load_layer(int m, int k, int n, bit skip_act);
    logic [63:0] w;
    if (!skip_act)
      for (int mg = 0; mg < m / R; mg++)
        for (int kk = 0; kk < k; kk++) begin
          for (int r = 0; r < R; r++) w[8*r +: 8] = A[mg*R + r][kk];
          host_write(SEL_ACT, mg * k + kk, w);
        end
    for (int ng = 0; ng < n / C; ng++)
      for (int kk = 0; kk < k; kk++) begin
        for (int c = 0; c < C; c++) w[8*c +: 8] = T[kk][ng*C + c];
        host_write(SEL_THR, ng * k + kk, w);
      end
  endtask

  function automatic int ref_out(int r, int n, int k);
    int s = 0;
    for (int kk = 0; kk < k; kk++) begin
      if (A[r][kk] > T[kk][n]) s = (s == 127) ? s : s + 1;
      else                     s = (s == -128) ? s : s - 1;
    end
    return s;
  endfunction

  // Start the layer, time it, read back and check all m x n results.
  task automatic run_and_check(int m, int k, int n);
    int cyc = 0;
    int exp_cyc = (m / R) * (n / C) * (k + R + 2 * C) + 1;
    logic [63:0] w;
    @(negedge clk);
    cfg.k_len = 11'(k); cfg.m_groups = 8'(m / R); cfg.n_groups = 8'(n / C);
    start = 1'b1;
    @(posedge clk);
    #1 start = 1'b0;
    // cycle 1 is the first cycle after the start edge
    do begin
      cyc++;
      if (done) break;
      @(posedge clk);
      #1;
    end while (1);
    check(cyc == exp_cyc, "layer latency");
    if (cyc != exp_cyc) $display("latency %0d expected %0d", cyc, exp_cyc);
    if ((m / R) * (n / C) > 1) n_multitile++;
    for (int mg = 0; mg < m / R; mg++)
      for (int nn = 0; nn < n; nn++) begin
        host_read(mg * n + nn, w);
        for (int r = 0; r < R; r++) begin
          int e = ref_out(mg * R + r, nn, k);
          OUT[mg*R + r][nn] = byte'(w[8*r +: 8]);
          if (e == 127)  n_clamp_hi++;
          if (e == -128) n_clamp_lo++;
          check(OUT[mg*R + r][nn] == byte'(e), "layer result");
          if (OUT[mg*R + r][nn] != byte'(e) && failures < 10)
            $display("  out[%0d][%0d]=%0d expected %0d", mg*R + r, nn, OUT[mg*R + r][nn], e);
        end
      end
  endtask

  initial begin
    logic [63:0] w;
    int sat0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    // 1. 500 inputs, 16 vectors, 24 neurons
    for (int r = 0; r < 16; r++) for (int k = 0; k < 500; k++) A[r][k] = byte'($urandom);
    for (int k = 0; k < 500; k++) for (int n = 0; n < 24; n++) T[k][n] = byte'($urandom);
    load_layer(16, 500, 24, 0);
    run_and_check(16, 500, 24);

    // 2. chained layer: activations are the previous outputs, copied by word
    for (int mg = 0; mg < 2; mg++)
      for (int n = 0; n < 24; n++) begin
        host_read(mg * 24 + n, w);
        host_write(SEL_ACT, mg * 24 + n, w);
      end
    for (int r = 0; r < 16; r++) for (int k = 0; k < 24; k++) A[r][k] = OUT[r][k];
    for (int k = 0; k < 24; k++) for (int n = 0; n < 16; n++) T[k][n] = byte'($urandom_range(0, 40)) - 8'sd20;
    load_layer(16, 24, 16, 1);
    run_and_check(16, 24, 16);
    n_chain++;

    // 3. saturation: rows 0-3 far above, rows 4-7 far below the thresholds
    sat0 = int'(sat_count);
    for (int r = 0; r < 8; r++)
      for (int k = 0; k < 400; k++)
        A[r][k] = (r < 4) ? byte'($urandom_range(50, 127)) : byte'(-$urandom_range(50, 128));
    for (int k = 0; k < 400; k++) for (int n = 0; n < 16; n++) T[k][n] = byte'($urandom_range(0, 80)) - 8'sd40;
    load_layer(8, 400, 16, 0);
    run_and_check(8, 400, 16);
    check(int'(sat_count) > sat0, "sat_count advanced");

    // 4. multi-threshold layer, m = 4 thresholds per input: each of 50
    //    inputs is written 4 times in a row, each copy with its own threshold
    for (int r = 0; r < 16; r++) begin
      byte x [50];
      for (int i = 0; i < 50; i++) x[i] = byte'($urandom);
      for (int k = 0; k < 200; k++) A[r][k] = x[k / 4];
    end
    for (int k = 0; k < 200; k++) for (int n = 0; n < 8; n++) T[k][n] = byte'($urandom);
    load_layer(16, 200, 8, 0);
    run_and_check(16, 200, 8);
    n_multi_thr++;

    // 5. smallest shape
    for (int r = 0; r < 8; r++) A[r][0] = byte'($urandom);
    for (int n = 0; n < 8; n++) T[0][n] = byte'($urandom);
    load_layer(8, 1, 8, 0);
    run_and_check(8, 1, 8);

    $display("mechanisms: multi-threshold layers=%0d multi-tile layers=%0d chained layers=%0d clamp-high results=%0d clamp-low results=%0d sat cycles=%0d",
             n_multi_thr, n_multitile, n_chain, n_clamp_hi, n_clamp_lo, sat_count);
    check(n_multitile > 0, "multi-tile layer exercised");
    check(n_chain > 0, "layer chaining exercised");
    check(n_multi_thr > 0, "multi-threshold layer exercised");
    check(n_clamp_hi > 0, "upper sum limit exercised");
    check(n_clamp_lo > 0, "lower sum limit exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

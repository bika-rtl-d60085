// tb_bika_mlp_workloads: runs the three fully connected networks used to
// evaluate the accelerator, at the accelerator's default size, and checks
// every layer output against a reference model.
//
//   TFC  784 - 64 - 32 - 10
//   SFC  784 - 256 - 256 - 256 - 10
//   LFC  784 - 1024 - 1024 - 1024 - 10
//
// Eight input vectors (one row group of the 8x8 array) go through each
// network. Inputs and thresholds are pseudo-random 8-bit values (no trained
// model is used, so this checks arithmetic and sequencing, not accuracy):
// first-layer thresholds span the full 8-bit range; a later threshold is one
// of the eight actual inputs at that position plus -2..+2, so that
// comparisons go both ways and hidden sums do not all saturate.
//
// The testbench is the host. A layer whose thresholds do not fit the
// 8192-word threshold buffer is split into chunks of floor(8192/K) neuron
// groups; each chunk is loaded, run and read back, and the outputs become the
// next layer's activations. The 10-neuron output layer is padded to 16
// neurons with unused thresholds. For each network the testbench reports the
// array busy cycles (checked against m*n*(K+24)+1 per chunk) and the host
// transfer cycles, and the resulting time at 300 MHz.
module tb_bika_mlp_workloads;
  import bika_pkg::*;
  localparam int R = 8, C = 8, THR_WORDS = 8192, MAXK = 1024, MAXN = 1024;

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
  longint cycle = 0;
  byte X   [R][MAXK];        // current layer input (DUT side)
  byte Y   [R][MAXN];        // current layer output read from the DUT
  byte RX  [R][MAXK];        // reference model input
  byte RY  [R][MAXN];        // reference model output
  byte T   [MAXK][MAXN];     // thresholds of the current layer

  bika_accel_top dut (
    .clk, .rst_n, .host_we, .host_wsel, .host_waddr, .host_wdata, .host_re,
    .host_raddr, .host_rdata, .start, .cfg, .busy, .done, .sat_count);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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

  // Runs one layer (K inputs, N neurons, N a multiple of COLS) on the DUT,
  // chunked to fit the threshold buffer. Returns busy cycles.
  task automatic dut_layer(int k, int n, output longint busy_cyc);
    logic [63:0] w;
    int groups = n / C;
    int chunk  = THR_WORDS / k;
    busy_cyc = 0;
    for (int kk = 0; kk < k; kk++) begin
      for (int r = 0; r < R; r++) w[8*r +: 8] = X[r][kk];
      host_write(SEL_ACT, kk, w);
    end
    for (int g0 = 0; g0 < groups; g0 += chunk) begin
      int ng = (groups - g0 < chunk) ? groups - g0 : chunk;
      longint t0;
      for (int g = 0; g < ng; g++)
        for (int kk = 0; kk < k; kk++) begin
          for (int c = 0; c < C; c++) w[8*c +: 8] = T[kk][(g0 + g)*C + c];
          host_write(SEL_THR, g * k + kk, w);
        end
      @(negedge clk);
      cfg.k_len = 11'(k); cfg.m_groups = 8'd1; cfg.n_groups = 8'(ng);
      start = 1'b1;
      t0 = cycle;
      @(posedge clk);
      #1 start = 1'b0;
      while (!done) begin @(posedge clk); #1; end
      checks++;
      if (cycle - t0 != longint'(ng * (k + R + 2*C) + 1)) begin
        failures++;
        $display("FAIL chunk latency %0d expected %0d", cycle - t0, ng * (k + R + 2*C) + 1);
      end
      busy_cyc += cycle - t0;
      for (int nn = 0; nn < ng * C; nn++) begin
        host_read(nn, w);
        for (int r = 0; r < R; r++) Y[r][g0*C + nn] = byte'(w[8*r +: 8]);
      end
    end
  endtask

  // A hidden-layer threshold close to one of the actual inputs, so that
  // comparisons go both ways and hidden sums stay inside the 8-bit range.
  function automatic byte near(byte v);
    int t = int'(v) + $urandom_range(0, 4) - 2;
    return byte'((t > 127) ? 127 : (t < -128) ? -128 : t);
  endfunction

  task automatic ref_layer(int k, int n);
    for (int r = 0; r < R; r++)
      for (int nn = 0; nn < n; nn++) begin
        int s = 0;
        for (int kk = 0; kk < k; kk++) begin
          if (RX[r][kk] > T[kk][nn]) s = (s == 127) ? s : s + 1;
          else                       s = (s == -128) ? s : s - 1;
        end
        RY[r][nn] = byte'(s);
      end
  endtask

  task automatic run_network(string name, int sizes[$], real paper_us);
    longint busy_total = 0, t_start = cycle, bc;
    int bad = 0;
    for (int r = 0; r < R; r++)
      for (int kk = 0; kk < sizes[0]; kk++) begin
        X[r][kk]  = byte'($urandom);
        RX[r][kk] = X[r][kk];
      end
    for (int l = 1; l < sizes.size(); l++) begin
      int k = sizes[l-1];
      int n = ((sizes[l] + C - 1) / C) * C;
      for (int kk = 0; kk < k; kk++)
        for (int nn = 0; nn < n; nn++)
          T[kk][nn] = (l == 1) ? byte'($urandom) : near(RX[$urandom_range(0, R-1)][kk]);
      ref_layer(k, n);
      dut_layer(k, n, bc);
      busy_total += bc;
      for (int r = 0; r < R; r++)
        for (int nn = 0; nn < sizes[l]; nn++) begin
          checks++;
          if (Y[r][nn] != RY[r][nn]) begin
            failures++; bad++;
            if (bad < 5) $display("FAIL %s layer %0d out[%0d][%0d]=%0d expected %0d", name, l, r, nn, Y[r][nn], RY[r][nn]);
          end
        end
      for (int r = 0; r < R; r++)
        for (int nn = 0; nn < n; nn++) begin X[r][nn] = Y[r][nn]; RX[r][nn] = RY[r][nn]; end
    end
    $display("%s: array busy %0d cycles = %.3f us at 300 MHz for 8 inputs; with host transfers %0d cycles = %.3f us (reported: %.3f us)",
             name, busy_total, real'(busy_total) / 300.0, cycle - t_start, real'(cycle - t_start) / 300.0, paper_us);
    $display("%s: output of input 0 = %0d %0d %0d %0d %0d %0d %0d %0d %0d %0d", name,
             Y[0][0], Y[0][1], Y[0][2], Y[0][3], Y[0][4], Y[0][5], Y[0][6], Y[0][7], Y[0][8], Y[0][9]);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    run_network("TFC", '{784, 64, 32, 10}, 11.201);
    run_network("SFC", '{784, 256, 256, 256, 10}, 71.421);
    run_network("LFC", '{784, 1024, 1024, 1024, 10}, 611.890);
    $display("sum limitation cycles over all networks: %0d", sat_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

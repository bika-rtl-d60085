// tb_bika_systolic_array: self-checking test of the 8x8 CAC array.
//
// The testbench plays the role of the skew registers: activation k of row r
// is presented at the left edge in cycle k+r, threshold k of column c at the
// bottom edge in cycle k+c, and every other slot carries random data with the
// valid bit low (thresholds carry random junk), so misalignment or
// accumulating invalid slots shows up as wrong sums. After the last operand
// reaches the far corner (cycle K-1 + ROWS-1 + COLS-1) every accumulator must
// equal the reference: sum_k (A[r][k] > T[k][c] ? +1 : -1) with per-step
// clamping to [-128, 127]. Several tiles are run, some with operands biased
// so that sums saturate; sat_any must have been seen.
module tb_bika_systolic_array;
  localparam int R = 8, C = 8, DW = 8, AW = 8, KMAX = 300;
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0;
  logic                 vin [R];
  logic signed [DW-1:0] ain [R];
  logic signed [DW-1:0] tin [C];
  logic signed [AW-1:0] acc [R][C];
  logic sat_any;
  int checks = 0, failures = 0, sat_cycles = 0;
  logic signed [DW-1:0] A [R][KMAX];
  logic signed [DW-1:0] T [KMAX][C];

  bika_systolic_array #(.ROWS(R), .COLS(C), .DATA_W(DW), .ACC_W(AW)) dut (
    .clk, .rst_n, .clear, .act_valid_in(vin), .act_in(ain), .thr_in(tin), .acc, .sat_any);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && sat_any) sat_cycles++;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_out(int r, int c, int k_len);
    int s = 0;
    for (int k = 0; k < k_len; k++) begin
      if (A[r][k] > T[k][c]) s = (s == 127) ? s : s + 1;
      else                   s = (s == -128) ? s : s - 1;
    end
    return s;
  endfunction

  task automatic run_tile(int k_len, int mode);
    int bad = 0;
    for (int r = 0; r < R; r++)
      for (int k = 0; k < k_len; k++) begin
        A[r][k] = DW'($urandom);
        // mode 1: rows 0..3 mostly above the thresholds, rows 4..7 mostly below
        if (mode == 1) A[r][k] = (r < 4) ? DW'($urandom_range(60, 127)) : -DW'($urandom_range(60, 128));
      end
    for (int k = 0; k < k_len; k++)
      for (int c = 0; c < C; c++)
        T[k][c] = (mode == 1) ? DW'($urandom_range(0, 100)) - DW'(50) : DW'($urandom);
    clear <= 1'b1;
    @(posedge clk);
    clear <= 1'b0;
    for (int t = 0; t < k_len + R + C; t++) begin
      for (int r = 0; r < R; r++) begin
        if (t - r >= 0 && t - r < k_len) begin vin[r] <= 1'b1; ain[r] <= A[r][t-r]; end
        else begin vin[r] <= 1'b0; ain[r] <= DW'($urandom); end
      end
      for (int c = 0; c < C; c++)
        tin[c] <= (t - c >= 0 && t - c < k_len) ? T[t-c][c] : DW'($urandom);
      @(posedge clk);
      // the far corner sees its last operands in cycle k_len-1 + R-1 + C-1
      if (t == k_len - 1 + R - 1 + C - 1) begin
        #1;
        for (int r = 0; r < R; r++)
          for (int c = 0; c < C; c++) begin
            checks++;
            if (acc[r][c] != AW'(ref_out(r, c, k_len))) begin
              failures++; bad++;
              if (failures < 8) $display("FAIL k=%0d acc[%0d][%0d]=%0d exp %0d", k_len, r, c, acc[r][c], ref_out(r, c, k_len));
            end
          end
      end
    end
  endtask

  initial begin
    for (int r = 0; r < R; r++) begin vin[r] = 1'b0; ain[r] = '0; end
    for (int c = 0; c < C; c++) tin[c] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    run_tile(1, 0);
    run_tile(5, 0);
    run_tile(64, 0);
    run_tile(200, 1);
    run_tile(KMAX, 0);
    run_tile(17, 0);
    checks++;
    if (sat_cycles == 0) begin failures++; $display("FAIL saturation never happened"); end
    $display("saturation cycles: %0d", sat_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

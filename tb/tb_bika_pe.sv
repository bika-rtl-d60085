// tb_bika_pe: self-checking test of one comparison-accumulator PE.
//
// Drives random activations, thresholds, valid bits and occasional clears,
// including long runs biased to one sign so that the accumulator reaches both
// saturation bounds. A reference model written from the BiKA rule
// (+1 when activation > threshold, -1 otherwise, clamped to [-128, 127])
// predicts acc and sat; the forwarded activation/threshold must equal the
// inputs of the previous cycle. Also checks the equality case (a == t gives
// -1). A watchdog ends the run after a fixed number of cycles.
module tb_bika_pe;
  localparam int DW = 8, AW = 8;
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, vin = 1'b0;
  logic signed [DW-1:0] ain = '0, tin = '0;
  logic vout, sat;
  logic signed [DW-1:0] aout, tout;
  logic signed [AW-1:0] acc;
  int checks = 0, failures = 0;
  int ref_acc = 0;
  logic ref_sat = 1'b0;
  int n_sat_hi = 0, n_sat_lo = 0, n_eq = 0;

  bika_pe #(.DATA_W(DW), .ACC_W(AW)) dut (
    .clk, .rst_n, .clear, .act_valid_in(vin), .act_in(ain), .thr_in(tin),
    .act_valid_out(vout), .act_out(aout), .thr_out(tout), .acc, .sat);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [DW-1:0] pa, pt;
    logic pv;
    int bias;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    check(acc == 0, "acc zero after reset");
    for (int i = 0; i < 6000; i++) begin
      // phases: 0..999 random; then long up-biased, then down-biased runs
      bias = (i / 500) % 4;
      vin   <= ($urandom_range(0, 9) != 0);
      clear <= ($urandom_range(0, 599) == 0);
      case (bias)
        1: begin ain <= DW'($urandom_range(0, 127)); tin <= -DW'($urandom_range(1, 128)); end
        2: begin ain <= -DW'($urandom_range(1, 128)); tin <= DW'($urandom_range(0, 127)); end
        default: begin
          pa = DW'($urandom);
          ain <= pa;
          tin <= ($urandom_range(0, 7) == 0) ? pa : DW'($urandom);
        end
      endcase
      @(posedge clk);
      // inputs seen at this edge: the values assigned above
      pa = ain; pt = tin; pv = vin;
      ref_sat = 1'b0;
      if (clear) ref_acc = 0;
      else if (pv) begin
        if (pa == pt) n_eq++;
        if (pa > pt) begin
          if (ref_acc == 127) begin ref_sat = 1'b1; n_sat_hi++; end else ref_acc++;
        end else begin
          if (ref_acc == -128) begin ref_sat = 1'b1; n_sat_lo++; end else ref_acc--;
        end
      end
      #1;
      check(acc == AW'(ref_acc), "acc");
      check(sat == ref_sat, "sat");
      check(aout == pa && tout == pt && vout == pv, "forwarding");
    end
    check(n_sat_hi > 0, "upper bound reached");
    check(n_sat_lo > 0, "lower bound reached");
    check(n_eq > 0, "equal operands exercised");
    $display("saturations high=%0d low=%0d equal-operand steps=%0d", n_sat_hi, n_sat_lo, n_eq);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

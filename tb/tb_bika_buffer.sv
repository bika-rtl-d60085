// tb_bika_buffer: self-checking test of the synchronous buffer RAM.
//
// Writes random words to random addresses while reading others, and checks
// every read against a shadow array one cycle after re: one-cycle latency,
// rdata held while re is low, and old data returned when the read and the
// write hit the same address in the same cycle.
module tb_bika_buffer;
  localparam int W = 64, D = 256, AW = $clog2(D);
  logic clk = 1'b0, we = 1'b0, re = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [W-1:0]  wdata = '0, rdata;
  logic [W-1:0]  shadow [D];
  logic          written [D];
  int checks = 0, failures = 0, collisions = 0;

  bika_buffer #(.WIDTH(W), .DEPTH(D)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] expect_q;
    logic         expect_v;
    logic [W-1:0] held;
    for (int i = 0; i < D; i++) written[i] = 1'b0;
    // fill every word first
    for (int i = 0; i < D; i++) begin
      we <= 1'b1; waddr <= AW'(i); wdata <= {$urandom, $urandom};
      @(posedge clk);
      shadow[i] = wdata; written[i] = 1'b1;
    end
    we <= 1'b0;
    expect_v = 1'b0;
    for (int i = 0; i < 5000; i++) begin
      we    <= ($urandom_range(0, 1) == 1);
      waddr <= AW'($urandom);
      wdata <= {$urandom, $urandom};
      re    <= ($urandom_range(0, 2) != 0);
      raddr <= ($urandom_range(0, 4) == 0) ? waddr : AW'($urandom);
      #1;
      if (re && we && raddr == waddr) collisions++;
      expect_q = re ? shadow[raddr] : expect_q;
      expect_v = re ? 1'b1 : expect_v;
      @(posedge clk);
      if (we) shadow[waddr] = wdata;
      #1;
      if (expect_v) begin
        checks++;
        if (rdata !== expect_q) begin
          failures++;
          if (failures < 8) $display("FAIL read got %h exp %h", rdata, expect_q);
        end
      end
    end
    checks++;
    if (collisions == 0) begin failures++; $display("FAIL no read/write collision exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

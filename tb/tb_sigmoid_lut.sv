// tb_sigmoid_lut -- sweeps every table entry and compares it with the
// logistic function evaluated in floating point (tolerance 1 LSB), checks
// sigma(0) = 1/2, monotonicity, and a second table with other widths.
module tb_sigmoid_lut;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;

  logic signed [7:0]  x8;
  logic        [15:0] p8;
  logic signed [9:0]  x10;
  logic        [11:0] p10;

  sigmoid_lut #(.IN_W(8), .FRAC(4), .P_W(16))  dut_a (.x(x8),  .p(p8));
  sigmoid_lut #(.IN_W(10), .FRAC(6), .P_W(12)) dut_b (.x(x10), .p(p10));

  task automatic check(input logic cond, input string what, input longint got, input longint exp);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    longint prev, r;
    prev = -1;
    for (int i = -128; i < 128; i++) begin
      x8 = 8'(i);
      #1;
      r = sigmoid_q(i, 4, 16);
      check((longint'(p8) - r) <= 1 && (r - longint'(p8)) <= 1, "table A entry", p8, r);
      check(longint'(p8) >= prev, "table A monotonic", p8, prev);
      prev = p8;
    end
    x8 = 0; #1;
    check(p8 == 16'd32768, "sigma(0)", p8, 32768);
    x8 = 8'sd16; #1;   // x = 1.0 -> 0.7311 * 65536 = 47911
    check(p8 >= 16'd47910 && p8 <= 16'd47912, "sigma(1)", p8, 47911);
    for (int i = -512; i < 512; i++) begin
      x10 = 10'(i);
      #1;
      r = sigmoid_q(i, 6, 12);
      check((longint'(p10) - r) <= 1 && (r - longint'(p10)) <= 1, "table B entry", p10, r);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

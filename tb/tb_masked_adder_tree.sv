// tb_masked_adder_tree -- random masks and weights on an odd-sized tree (37)
// and on the full 600-input tree, compared with a plain sum; includes the
// all-ones / extreme-weight cases that need the full sum width.
module tb_masked_adder_tree;
  localparam int N1 = 37, N2 = 600;
  int checks = 0, failures = 0;

  logic [N1-1:0]      m1;
  logic signed [7:0]  w1 [N1];
  logic signed [13:0] s1;
  logic [N2-1:0]      m2;
  logic signed [7:0]  w2 [N2];
  logic signed [17:0] s2;

  masked_adder_tree #(.N(N1), .W_W(8), .SUM_W(14)) dut1 (.mask(m1), .w(w1), .sum(s1));
  masked_adder_tree #(.N(N2), .W_W(8))             dut2 (.mask(m2), .w(w2), .sum(s2));

  task automatic run_case(input int mode);
    longint r1, r2;
    r1 = 0; r2 = 0;
    for (int i = 0; i < N1; i++) begin
      m1[i] = (mode == 1) ? 1'b1 : 1'($urandom);
      w1[i] = (mode == 1) ? -8'sd128 : (mode == 2) ? 8'sd127 : 8'($urandom);
      if (m1[i]) r1 += w1[i];
    end
    for (int i = 0; i < N2; i++) begin
      m2[i] = (mode != 0) ? 1'b1 : 1'($urandom);
      w2[i] = (mode == 1) ? -8'sd128 : (mode == 2) ? 8'sd127 : 8'($urandom);
      if (m2[i]) r2 += w2[i];
    end
    #1;
    checks += 2;
    if (longint'(s1) != r1) begin failures++; $display("FAIL N=37 got %0d exp %0d", s1, r1); end
    if (longint'(s2) != r2) begin failures++; $display("FAIL N=600 got %0d exp %0d", s2, r2); end
  endtask

  initial begin
    run_case(1);
    run_case(2);
    for (int t = 0; t < 300; t++) run_case(0);
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

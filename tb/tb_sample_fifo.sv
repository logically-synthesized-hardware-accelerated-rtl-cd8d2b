// tb_sample_fifo -- random push/pop traffic against a queue model, with
// phases that fill the FIFO (in_ready must fall at exactly DEPTH entries)
// and drain it; data order and occupancy flags are checked every clock.
module tb_sample_fifo;
  localparam int W = 20, D = 8;

  logic clk = 0, rst = 1;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = '0, out_data;
  logic [W-1:0] q [$];
  int checks = 0, failures = 0, fulls = 0;

  sample_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk(clk), .rst(rst), .in_valid(in_valid),
    .in_ready(in_ready), .in_data(in_data), .out_valid(out_valid), .out_ready(out_ready),
    .out_data(out_data));

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int t = 0; t < 4000; t++) begin
      int phase;
      @(negedge clk);
      phase = (t / 200) % 3;   // 0: fill, 1: drain, 2: balanced
      in_valid  = ($urandom_range(0, 9) < (phase == 0 ? 8 : phase == 1 ? 2 : 5));
      out_ready = ($urandom_range(0, 9) < (phase == 0 ? 2 : phase == 1 ? 8 : 5));
      in_data   = W'($urandom);
      #1;
      check(in_ready == (q.size() < D), "in_ready");
      check(out_valid == (q.size() > 0), "out_valid");
      if (q.size() > 0) check(out_data == q[0], "out_data");
      if (!in_ready) fulls++;
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    check(fulls > 0, "full reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_lfsr32 -- checks the per-neuron LFSR against a polynomial reference:
// reset value = seed, one step per enabled clock, hold when disabled, and no
// return to the seed within 200,000 steps.
module tb_lfsr32;
  import tb_ref_pkg::*;
  localparam logic [31:0] SEED = 32'hACE1_2468;

  logic clk = 0, rst = 1, en = 0;
  logic [31:0] state, model;
  int checks = 0, failures = 0;

  lfsr32 #(.SEED(SEED)) dut (.clk(clk), .rst(rst), .en(en), .state(state));

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s: state=%h model=%h", what, state, model);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    @(negedge clk);
    model = SEED;
    check(state == SEED, "reset to seed");
    for (int i = 0; i < 2000; i++) begin
      en = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (en) model = lfsr_next(model);
      @(negedge clk);
      check(state == model, en ? "step" : "hold");
    end
    en = 1;
    for (int i = 0; i < 200000; i++) begin
      @(posedge clk);
      model = lfsr_next(model);
      if (i % 1000 == 0) begin
        @(negedge clk);
        check(state == model, "long run");
      end
      if (state == SEED && i > 0) begin
        checks++; failures++;
        $display("FAIL: sequence returned to seed after %0d steps", i);
        break;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

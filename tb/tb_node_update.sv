// tb_node_update -- compares one neuron's update, clock by clock, with a
// reference built from a floating-point sigmoid and an LFSR model: the
// probability output, the sampled bit, saturation of large fields, and the
// clamp override. Also checks the firing rate for a fixed field of 1.0.
module tb_node_update;
  import tb_ref_pkg::*;
  localparam int N = 16, W_W = 8, B_W = 8, FRAC = 4, LIN = 8, PW = 16;
  localparam logic [31:0] SEED = 32'h1357_9BDF;

  logic clk = 0, rst = 1, en = 0;
  logic [N-1:0]          other;
  logic signed [W_W-1:0] w [N];
  logic signed [B_W-1:0] bias;
  logic                  clamp_en = 0, clamp_val = 0;
  logic [PW-1:0]         p;
  logic                  next;
  logic [31:0]           rnd;
  int checks = 0, failures = 0, ones = 0, sat_cases = 0;

  node_update #(.N_IN(N), .W_W(W_W), .B_W(B_W), .FRAC(FRAC), .LUT_IN_W(LIN),
                .P_W(PW), .SEED(SEED)) dut (
    .clk(clk), .rst(rst), .en(en), .other(other), .w(w), .bias(bias),
    .clamp_en(clamp_en), .clamp_val(clamp_val), .p(p), .next(next));

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic longint field_ref();
    longint f = bias;
    for (int i = 0; i < N; i++) if (other[i]) f += w[i];
    return f;
  endfunction

  initial begin
    other = '0; bias = 0;
    for (int i = 0; i < N; i++) w[i] = 0;
    repeat (2) @(posedge clk);
    rst <= 0;
    rnd = SEED;
    // Random operands, checked every cycle.
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      other = N'($urandom);
      for (int i = 0; i < N; i++) w[i] = W_W'($urandom_range(0, 255));
      if (t % 3 == 0) for (int i = 0; i < N; i++) w[i] = w[i] >>> 3;  // keep some fields small
      bias = B_W'($urandom);
      clamp_en  = ($urandom_range(0, 9) == 0);
      clamp_val = 1'($urandom);
      en = 1;
      #1;
      begin
        longint f, fs, pr;
        f  = field_ref();
        fs = saturate(f, LIN);
        if (fs != f) sat_cases++;
        pr = sigmoid_q(fs, FRAC, PW);
        check((longint'(p) - pr) <= 1 && (pr - longint'(p)) <= 1, "probability");
        if (clamp_en) check(next == clamp_val, "clamp");
        else          check(next == (longint'(rnd[31 -: PW]) < longint'(p)), "sample bit");
      end
      @(posedge clk);
      rnd = lfsr_next(rnd);
    end
    check(sat_cases > 0, "saturation exercised");
    // Firing rate at field = 1.0 (bias 16, no active inputs): sigma(1) = 0.731.
    @(negedge clk);
    other = '0; bias = 8'sd16; clamp_en = 0;
    for (int t = 0; t < 8000; t++) begin
      @(negedge clk);
      if (next) ones++;
    end
    check(ones > 5600 && ones < 6100, "firing rate at sigma(1)");
    $display("firing rate %0d / 8000", ones);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

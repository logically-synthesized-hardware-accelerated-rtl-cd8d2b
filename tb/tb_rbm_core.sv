// tb_rbm_core -- a 6 x 5 RBM core with random weights, biases and clamps,
// checked clock by clock against a behavioural block-Gibbs model (per-node
// LFSRs, floating-point sigmoid). Also checks one sample per clock when the
// consumer is always ready, and that the core stalls with the sample held
// when the consumer is not.
module tb_rbm_core;
  import rbm_pkg::*;
  import tb_ref_pkg::*;
  localparam int NV = 6, NH = 5;

  logic clk = 0, rst = 1;
  prog_wr_t wr;
  logic run = 0, sample_taken, smp_valid, smp_ready = 0;
  logic [NV-1:0] smp_data;
  logic [NH-1:0] hidden;

  logic signed [7:0] W [NV][NH];
  logic signed [7:0] b [NV], a [NH];
  logic [NV-1:0] ce = '0, cv = '0, v_m = '0;
  logic [NH-1:0] h_m = '0;
  logic [31:0] rv [NV], rh [NH];
  int checks = 0, failures = 0, taken = 0, stalls = 0;

  rbm_core #(.NV(NV), .NH(NH)) dut (.clk(clk), .rst(rst), .wr(wr), .run(run),
    .sample_taken(sample_taken), .smp_valid(smp_valid), .smp_ready(smp_ready),
    .smp_data(smp_data), .hidden(hidden));

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic prog(input prog_region_e rg, input int row, input int col, input logic [31:0] d);
    @(negedge clk);
    wr.en = 1; wr.region = rg; wr.row = ROW_W'(row); wr.col = COL_W'(col); wr.data = d;
    @(negedge clk);
    wr.en = 0;
  endtask

  // Reference block-Gibbs step: both layers from the old state.
  task automatic model_step();
    logic [NV-1:0] vn;
    logic [NH-1:0] hn;
    for (int j = 0; j < NH; j++) begin
      longint f = a[j];
      for (int i = 0; i < NV; i++) if (v_m[i]) f += W[i][j];
      hn[j] = (longint'(rh[j][31:16]) < sigmoid_q(saturate(f, 8), 4, 16));
      rh[j] = lfsr_next(rh[j]);
    end
    for (int i = 0; i < NV; i++) begin
      longint f = b[i];
      for (int j = 0; j < NH; j++) if (h_m[j]) f += W[i][j];
      vn[i] = ce[i] ? cv[i] : (longint'(rv[i][31:16]) < sigmoid_q(saturate(f, 8), 4, 16));
      rv[i] = lfsr_next(rv[i]);
    end
    v_m = vn;
    h_m = hn;
  endtask

  initial begin
    wr = '0;
    for (int i = 0; i < NV; i++) begin rv[i] = seed_of(0, i); b[i] = 8'($urandom) >>> 1; end
    for (int j = 0; j < NH; j++) begin rh[j] = seed_of(1, j); a[j] = 8'($urandom) >>> 1; end
    for (int i = 0; i < NV; i++) for (int j = 0; j < NH; j++) W[i][j] = 8'($urandom) >>> 1;
    ce = 6'b000101; cv = 6'b000100;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < NV; i++) for (int j = 0; j < NH; j++) prog(REG_WEIGHT, i, j, 32'(W[i][j]));
    for (int i = 0; i < NV; i++) prog(REG_VBIAS, 0, i, 32'(b[i]));
    for (int j = 0; j < NH; j++) prog(REG_HBIAS, 0, j, 32'(a[j]));
    for (int i = 0; i < NV; i++) prog(REG_CLAMP, 0, i, {30'd0, cv[i], ce[i]});
    check(!sample_taken && !smp_valid, "idle before run");

    // Phase 1: consumer always ready -> one sample per clock.
    @(negedge clk);
    run = 1; smp_ready = 1;
    for (int t = 0; t < 100; t++) begin
      #1;
      if (sample_taken) taken++;
      @(posedge clk);
      if (sample_taken) model_step();
      @(negedge clk);
      check(smp_data == v_m && hidden == h_m, "state vs model");
    end
    check(taken == 100, "one sample per clock");

    // Phase 2: random consumer -> stalls hold the sample.
    for (int t = 0; t < 2000; t++) begin
      logic [NV-1:0] held;
      logic was_stalled;
      smp_ready = 1'($urandom);
      if (t == 1000) begin run = 0; end
      if (t == 1100) begin run = 1; end
      #1;
      was_stalled = run && smp_valid && !smp_ready;
      held = smp_data;
      if (was_stalled) begin
        stalls++;
        check(!sample_taken, "no sample while stalled");
      end
      @(posedge clk);
      if (sample_taken) model_step();
      @(negedge clk);
      check(smp_data == v_m && hidden == h_m, "state vs model");
      if (was_stalled) check(smp_data == held && smp_valid, "sample held");
      check((smp_data & ce) == (cv & ce), "clamped nodes");
    end
    check(stalls > 100, "stalls exercised");
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

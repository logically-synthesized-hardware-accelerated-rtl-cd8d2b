// tb_rbm_fpga_top -- end-to-end run of the accelerator on a small integer
// factorization problem, entirely through the host ports.
//
// Problem: factor p = 6 with two 2-bit factors. The RBM is built by hand
// (no training): visible nodes 0-1 hold factor a, 2-3 factor b, 4-7 the
// product, 8-10 are bias nodes clamped to 1. Hidden node j = 4a + b is a
// template for the valid row (a, b, a*b): its weight to a visible node is +4
// where the template has a 1 and -4 where it has a 0, and its total bias
// (hidden bias plus the three bias nodes) is 2 - 4 * (ones in the template),
// so its field is 2 - 4 * (Hamming distance to the template). Valid rows of
// the multiplication table then have high probability. The product bits are
// clamped to 6 and the sampler must find a, b.
//
// The testbench programs the model, runs NS samples with a random-rate
// host reader (so the FIFO fills and the core stalls), reassembles every
// sample from the 32-bit stream and checks: every sample arrives, clamps
// hold, the run stops at the target, the two most frequent (a, b) are the
// factor pairs (2, 3) and (3, 2), and the sampled distribution of (a, b) is
// within 0.12 total-variation distance of the exact one computed here.
module tb_rbm_fpga_top;
  import rbm_pkg::*;
  import tb_ref_pkg::*;

  localparam int NV = 11, NH = 16, FIFO_DEPTH = 16;
  localparam int NS = 4000;
  localparam int WORDS = (NV + 31) / 32;
  localparam int PRODUCT = 6;
  localparam int K = 64;  // 4.0 in the 4-fractional-bit format

  logic clk = 0, rst = 1;
  logic host_wr_en = 0;
  logic [ADDR_W-1:0] host_wr_addr = '0;
  logic [DATA_W-1:0] host_wr_data = '0;
  logic host_rd_valid, host_rd_ready = 0;
  logic [31:0] host_rd_data;
  logic running, done, stalled;
  logic [31:0] sample_count;

  rbm_fpga_top #(.NV(NV), .NH(NH), .FIFO_DEPTH(FIFO_DEPTH)) dut (
    .clk(clk), .rst(rst), .host_wr_en(host_wr_en), .host_wr_addr(host_wr_addr),
    .host_wr_data(host_wr_data), .host_rd_valid(host_rd_valid), .host_rd_ready(host_rd_ready),
    .host_rd_data(host_rd_data), .running(running), .done(done), .sample_count(sample_count),
    .stalled(stalled));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int hist [16];
  int received = 0, words_in = 0, clamp_bad = 0;
  int n_stall = 0, n_fifo_full = 0, n_clamped = 0, n_target_stop = 0, n_prog = 0;
  logic [WORDS*32-1:0] rx;
  int ready_pct = 50;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic host_write(input prog_region_e rg, input int row, input int col, input logic [31:0] d);
    @(negedge clk);
    host_wr_en = 1;
    host_wr_addr = {rg, ROW_W'(row), COL_W'(col)};
    host_wr_data = d;
    n_prog++;
    @(negedge clk);
    host_wr_en = 0;
  endtask

  // Template of hidden node j: bits {a*b, b, a} of the multiplication table.
  function automatic logic [7:0] tmpl(input int j);
    int a = j / 4, b = j % 4;
    return {4'(a * b), 2'(b), 2'(a)};
  endfunction

  function automatic int weight(input int i, input int j);
    return tmpl(j)[i] ? K : -K;
  endfunction

  function automatic int hbias_total(input int j);
    return K / 2 - K * $countones(tmpl(j));
  endfunction

  // Host reader: takes words with probability ready_pct %.
  always @(negedge clk) host_rd_ready <= ($urandom_range(0, 99) < ready_pct);
  always @(posedge clk) begin : rx_proc
    if (stalled) n_stall++;
    if (dut.u_core.smp_valid && !dut.u_fifo.in_ready) n_fifo_full++;
    if (host_rd_valid && host_rd_ready) begin
      logic [WORDS*32-1:0] s;
      s = rx;
      s[32*words_in +: 32] = host_rd_data;
      rx = s;
      if (words_in == WORDS - 1) begin
        logic [NV-1:0] v;
        v = s[NV-1:0];
        words_in = 0;
        received++;
        hist[{v[1:0], v[3:2]}]++;   // index 4a + b
        if (v[7:4] != 4'(PRODUCT) || v[10:8] != 3'b111) clamp_bad++;
        else n_clamped++;
      end else begin
        words_in++;
      end
    end
  end

  // Exact marginal of (a, b) with the product clamped: p(v) is proportional to
  // prod_j (1 + exp(field_j(v))).
  function automatic real exact_p(input int idx);
    real z, num;
    z = 0.0; num = 0.0;
    for (int s = 0; s < 16; s++) begin
      real f;
      logic [7:0] v;
      f = 1.0;
      v = {4'(PRODUCT), 2'(s % 4), 2'(s / 4)};
      for (int j = 0; j < NH; j++) begin
        int x = hbias_total(j);
        for (int i = 0; i < 8; i++) if (v[i]) x += weight(i, j);
        f *= 1.0 + $exp(real'(x) / 16.0);
      end
      z += f;
      if (s == idx) num = f;
    end
    return num / z;
  endfunction

  initial begin
    for (int k = 0; k < 16; k++) hist[k] = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    // Model: weights, biases (hidden bias split over a_j and three bias nodes).
    for (int j = 0; j < NH; j++) begin
      int tot, part;
      tot = hbias_total(j);
      part = tot / 4;
      for (int i = 0; i < 8; i++) host_write(REG_WEIGHT, i, j, 32'(weight(i, j)));
      for (int i = 8; i < 11; i++) host_write(REG_WEIGHT, i, j, 32'(part));
      host_write(REG_HBIAS, 0, j, 32'(tot - 3 * part));
    end
    // Clamps: product bits and bias nodes.
    for (int i = 4; i < 8; i++) host_write(REG_CLAMP, 0, i, {30'd0, 1'(PRODUCT >> (i - 4)), 1'b1});
    for (int i = 8; i < 11; i++) host_write(REG_CLAMP, 0, i, 32'd3);
    // Run NS samples.
    host_write(REG_CONTROL, 0, int'(CTRL_TARGET), NS);
    host_write(REG_CONTROL, 0, int'(CTRL_RUN), 32'd3);
    begin
      int guard = 0;
      while (!(done && received == NS) && guard < 40 * NS) begin
        @(negedge clk);
        guard++;
      end
    end
    repeat (20) @(negedge clk);
    if (done) n_target_stop++;
    check(received == NS, $sformatf("all %0d samples received (%0d)", NS, received));
    check(sample_count == NS && !running, "run stopped at the target");
    check(clamp_bad == 0, "clamped nodes held in every sample");
    begin
      int best = 0, second = 0;
      real tv = 0.0, pvalid;
      for (int k = 0; k < 16; k++) begin
        if (hist[k] > hist[best]) best = k;
      end
      second = (best == 0) ? 1 : 0;
      for (int k = 0; k < 16; k++) if (k != best && hist[k] > hist[second]) second = k;
      $display("mode (a,b) = (%0d,%0d) %0d samples; second (%0d,%0d) %0d samples",
               best / 4, best % 4, hist[best], second / 4, second % 4, hist[second]);
      check((best / 4) * (best % 4) == PRODUCT && (second / 4) * (second % 4) == PRODUCT,
            "two most frequent answers are the factor pairs");
      for (int k = 0; k < 16; k++) begin
        real e, d;
        e = exact_p(k);
        d = real'(hist[k]) / real'(NS) - e;
        tv += (d < 0.0) ? -d : d;
      end
      tv = tv / 2.0;
      pvalid = real'(hist[2 * 4 + 3] + hist[3 * 4 + 2]) / real'(NS);
      $display("fraction of samples with a*b = %0d: %f (exact %f); TV distance %f",
               PRODUCT, pvalid, exact_p(11) + exact_p(14), tv);
      check(tv < 0.12, "sampled distribution matches the exact one");
    end
    // Every mechanism must have happened at least once.
    $display("mechanisms: program writes %0d, stall cycles %0d, fifo-full cycles %0d, clamped samples %0d, target stops %0d",
             n_prog, n_stall, n_fifo_full, n_clamped, n_target_stop);
    check(n_prog > 0, "host programming");
    check(n_stall > 0, "core stalled by a full FIFO");
    check(n_fifo_full > 0, "FIFO full");
    check(n_clamped > 0, "clamped samples");
    check(n_target_stop > 0, "run stopped at target");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

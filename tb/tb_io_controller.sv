// tb_io_controller -- 80-bit samples from a random source are reassembled
// from the 32-bit host stream (random host back-pressure) and compared in
// order; host writes must reach the memory-controller side one clock later;
// with the host always ready a sample must take exactly 3 clocks.
module tb_io_controller;
  import rbm_pkg::*;
  localparam int NV = 80, WORDS = 3;

  logic clk = 0, rst = 1;
  logic host_wr_en = 0;
  logic [ADDR_W-1:0] host_wr_addr = '0;
  logic [DATA_W-1:0] host_wr_data = '0;
  logic mm_wr_en;
  logic [ADDR_W-1:0] mm_addr;
  logic [DATA_W-1:0] mm_wdata;
  logic smp_valid = 0, smp_ready;
  logic [NV-1:0] smp_data = '0;
  logic host_rd_valid, host_rd_ready = 0;
  logic [31:0] host_rd_data;
  logic [NV-1:0] sent [$];
  logic [WORDS*32-1:0] rx;
  int rx_words = 0, received = 0;
  int checks = 0, failures = 0;
  bit fast = 0;
  int first_cycle = 0, last_cycle = 0, cycle = 0, fast_count = 0;

  io_controller #(.NV(NV)) dut (.clk(clk), .rst(rst), .host_wr_en(host_wr_en),
    .host_wr_addr(host_wr_addr), .host_wr_data(host_wr_data), .mm_wr_en(mm_wr_en),
    .mm_addr(mm_addr), .mm_wdata(mm_wdata), .smp_valid(smp_valid), .smp_ready(smp_ready),
    .smp_data(smp_data), .host_rd_valid(host_rd_valid), .host_rd_ready(host_rd_ready),
    .host_rd_data(host_rd_data));

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  // Sample source: offers a new sample with probability src_prob/10 once the
  // previous one is taken; in the burst phase it offers exactly burst_left.
  int src_prob = 0, burst_left = -1;
  always @(posedge clk) if (!rst) begin
    if (!smp_valid || smp_ready) begin
      if (burst_left != 0 && $urandom_range(0, 9) < src_prob) begin
        smp_valid <= 1'b1;
        smp_data  <= {$urandom, $urandom, $urandom};
        if (burst_left > 0) burst_left <= burst_left - 1;
      end else begin
        smp_valid <= 1'b0;
      end
    end
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  // Source of samples and sink of words, sampled at the clock edge.
  always @(posedge clk) if (!rst) begin
    if (smp_valid && smp_ready) sent.push_back(smp_data);
    if (host_rd_valid && host_rd_ready) begin
      rx[32*rx_words +: 32] <= host_rd_data;
      if (rx_words == WORDS - 1) begin
        rx_words <= 0;
        received <= received + 1;
        if (fast) begin
          if (fast_count == 0) first_cycle <= cycle;
          last_cycle <= cycle;
          fast_count <= fast_count + 1;
        end
        #1;
        checks++;
        if (sent.size() == 0 || rx[NV-1:0] !== sent[0] || rx[WORDS*32-1:NV] !== '0) begin
          failures++;
          if (failures < 10) $display("FAIL sample mismatch");
        end
        if (sent.size() > 0) void'(sent.pop_front());
      end else begin
        rx_words <= rx_words + 1;
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    // Host writes are forwarded one clock later.
    for (int t = 0; t < 50; t++) begin
      @(negedge clk);
      host_wr_en = 1'($urandom);
      host_wr_addr = ADDR_W'($urandom);
      host_wr_data = $urandom;
      @(negedge clk);
      check(mm_wr_en == host_wr_en && mm_addr == host_wr_addr && mm_wdata == host_wr_data, "write forward");
    end
    host_wr_en = 0;
    // Random traffic, source and sink both throttled.
    src_prob = 5;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      host_rd_ready = 1'($urandom);
    end
    // Drain, then a back-to-back burst of 40 samples with the host always ready.
    src_prob = 0;
    host_rd_ready = 1;
    repeat (20) @(negedge clk);
    fast = 1;
    burst_left = 40;
    src_prob = 10;
    repeat (200) @(negedge clk);
    check(sent.size() == 0, "all samples delivered");
    check(received > 500, "traffic volume");
    check(fast_count == 40 && (last_cycle - first_cycle) == 3 * 39, "3 clocks per sample");
    $display("fast burst: %0d samples in %0d clocks", fast_count, last_cycle - first_cycle);
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

// tb_memory_controller -- checks that array writes are decoded into the
// prog_wr_t fields one clock later, that control writes are not forwarded,
// and that a run with a sample target stops after exactly that many samples
// and raises done; clear restarts the count.
module tb_memory_controller;
  import rbm_pkg::*;

  logic clk = 0, rst = 1;
  logic mm_wr_en = 0, sample_taken = 0;
  logic [ADDR_W-1:0] mm_addr = '0;
  logic [DATA_W-1:0] mm_wdata = '0;
  prog_wr_t wr;
  logic run, done;
  logic [31:0] count;
  int checks = 0, failures = 0;

  memory_controller dut (.clk(clk), .rst(rst), .mm_wr_en(mm_wr_en), .mm_addr(mm_addr),
    .mm_wdata(mm_wdata), .sample_taken(sample_taken), .wr(wr), .run(run), .done(done),
    .sample_count(count));

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic host_write(input logic [2:0] region, input int row, input int col, input logic [31:0] data);
    @(negedge clk);
    mm_wr_en = 1;
    mm_addr  = {region, ROW_W'(row), COL_W'(col)};
    mm_wdata = data;
    @(negedge clk);
    mm_wr_en = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    // Array writes.
    for (int t = 0; t < 200; t++) begin
      logic [2:0] rg;
      int r, c;
      logic [31:0] d;
      rg = 3'($urandom_range(0, 3));
      r = $urandom_range(0, 1023);
      c = $urandom_range(0, 2047);
      d = $urandom;
      host_write(rg, r, c, d);
      check(wr.en && wr.region == prog_region_e'(rg) && wr.row == ROW_W'(r) &&
            wr.col == COL_W'(c) && wr.data == d, "decoded write");
      @(negedge clk);
      check(!wr.en, "single write");
    end
    // Control write is not forwarded.
    host_write(3'(REG_CONTROL), 0, 1, 32'd7);
    check(!wr.en, "control not forwarded");
    check(!run, "idle after target write");
    // Run of 7 samples with a sample taken on random clocks.
    host_write(3'(REG_CONTROL), 0, 0, 32'd3);   // run + clear
    check(run && count == 0 && !done, "run started");
    begin
      int taken = 0, guard = 0;
      while (run && guard < 200) begin
        @(negedge clk);
        sample_taken = run && ($urandom_range(0, 2) != 0);
        if (sample_taken) taken++;
        guard++;
      end
      @(negedge clk);
      sample_taken = 0;
      check(taken == 7, "exactly target samples");
      check(count == 7 && done && !run, "stopped at target");
    end
    // Unlimited run stopped by the host.
    host_write(3'(REG_CONTROL), 0, 1, 32'd0);
    host_write(3'(REG_CONTROL), 0, 0, 32'd3);
    check(!done && count == 0, "clear");
    repeat (50) begin
      @(negedge clk);
      sample_taken = 1;
    end
    @(negedge clk);
    sample_taken = 0;
    check(run && count == 50, "unlimited run");
    host_write(3'(REG_CONTROL), 0, 0, 32'd0);
    check(!run && count == 50 && !done, "stopped by host");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

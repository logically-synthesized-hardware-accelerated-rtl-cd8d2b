// tb_bias_array -- random writes to the visible-bias, hidden-bias and other
// regions; both bias vectors are compared with a model after every write.
module tb_bias_array;
  import rbm_pkg::*;
  localparam int NV = 5, NH = 11;

  logic clk = 0, rst = 1;
  prog_wr_t wr;
  logic signed [7:0] vb [NV], hb [NH], vm [NV], hm [NH];
  int checks = 0, failures = 0;

  bias_array #(.NV(NV), .NH(NH), .B_W(8)) dut (.clk(clk), .rst(rst), .wr(wr), .vbias(vb), .hbias(hb));

  always #5 clk = ~clk;

  task automatic compare();
    for (int i = 0; i < NV; i++) begin
      checks++;
      if (vb[i] !== vm[i]) begin failures++; if (failures < 10) $display("FAIL b[%0d]=%0d exp %0d", i, vb[i], vm[i]); end
    end
    for (int j = 0; j < NH; j++) begin
      checks++;
      if (hb[j] !== hm[j]) begin failures++; if (failures < 10) $display("FAIL a[%0d]=%0d exp %0d", j, hb[j], hm[j]); end
    end
  endtask

  initial begin
    wr = '0;
    for (int i = 0; i < NV; i++) vm[i] = 0;
    for (int j = 0; j < NH; j++) hm[j] = 0;
    repeat (2) @(posedge clk);
    rst <= 0;
    @(negedge clk);
    compare();
    for (int t = 0; t < 500; t++) begin
      int k, c;
      k = $urandom_range(0, 4);
      c = $urandom_range(0, NH + 1);
      wr.en     = (k != 0);
      wr.region = (k == 1) ? REG_WEIGHT : (k == 2) ? REG_VBIAS : REG_HBIAS;
      wr.row    = ROW_W'($urandom);
      wr.col    = COL_W'(c);
      wr.data   = $urandom;
      @(posedge clk);
      if (wr.en && wr.region == REG_VBIAS && c < NV) vm[c] = 8'(wr.data);
      if (wr.en && wr.region == REG_HBIAS && c < NH) hm[c] = 8'(wr.data);
      @(negedge clk);
      wr.en = 0;
      compare();
    end
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

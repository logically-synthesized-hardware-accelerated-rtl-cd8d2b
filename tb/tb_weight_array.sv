// tb_weight_array -- writes random weights at random (row, col) through
// prog_wr_t bundles, including writes to other regions and to rows/columns
// outside the array, and compares the whole matrix with a model after every
// write (one clock of write latency).
module tb_weight_array;
  import rbm_pkg::*;
  localparam int NV = 6, NH = 9;

  logic clk = 0, rst = 1;
  prog_wr_t wr;
  logic signed [7:0] w [NV][NH];
  logic signed [7:0] model [NV][NH];
  int checks = 0, failures = 0;

  weight_array #(.NV(NV), .NH(NH), .W_W(8)) dut (.clk(clk), .rst(rst), .wr(wr), .w(w));

  always #5 clk = ~clk;

  task automatic compare(input string what);
    for (int i = 0; i < NV; i++)
      for (int j = 0; j < NH; j++) begin
        checks++;
        if (w[i][j] !== model[i][j]) begin
          failures++;
          if (failures < 10) $display("FAIL %s W[%0d][%0d]=%0d exp %0d", what, i, j, w[i][j], model[i][j]);
        end
      end
  endtask

  initial begin
    wr = '0;
    for (int i = 0; i < NV; i++) for (int j = 0; j < NH; j++) model[i][j] = 0;
    repeat (2) @(posedge clk);
    rst <= 0;
    @(negedge clk);
    compare("reset");
    for (int t = 0; t < 600; t++) begin
      int r, c, k;
      r = $urandom_range(0, NV);      // NV itself is out of range
      c = $urandom_range(0, NH);
      k = $urandom_range(0, 9);
      wr.en     = (k != 0);
      wr.region = (k == 1) ? REG_VBIAS : (k == 2) ? REG_CLAMP : REG_WEIGHT;
      wr.row    = ROW_W'(r);
      wr.col    = COL_W'(c);
      wr.data   = $urandom;
      @(posedge clk);
      if (wr.en && wr.region == REG_WEIGHT && r < NV && c < NH) model[r][c] = 8'(wr.data);
      @(negedge clk);
      wr.en = 0;
      compare("write");
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

// tb_clamp_array -- random clamp writes (enable in data[0], value in
// data[1]) mixed with writes to other regions; compared with a model.
module tb_clamp_array;
  import rbm_pkg::*;
  localparam int NV = 12;

  logic clk = 0, rst = 1;
  prog_wr_t wr;
  logic [NV-1:0] ce, cv, cem, cvm;
  int checks = 0, failures = 0;

  clamp_array #(.NV(NV)) dut (.clk(clk), .rst(rst), .wr(wr), .clamp_en(ce), .clamp_val(cv));

  always #5 clk = ~clk;

  initial begin
    wr = '0; cem = '0; cvm = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int t = 0; t < 500; t++) begin
      int k, c;
      @(negedge clk);
      checks++;
      if (ce !== cem || cv !== cvm) begin
        failures++;
        if (failures < 10) $display("FAIL en=%b/%b val=%b/%b", ce, cem, cv, cvm);
      end
      k = $urandom_range(0, 4);
      c = $urandom_range(0, NV + 2);
      wr.en     = (k != 0);
      wr.region = (k == 1) ? REG_HBIAS : REG_CLAMP;
      wr.row    = ROW_W'($urandom);
      wr.col    = COL_W'(c);
      wr.data   = $urandom;
      @(posedge clk);
      if (wr.en && wr.region == REG_CLAMP && c < NV) begin
        cem[c] = wr.data[0];
        cvm[c] = wr.data[1];
      end
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

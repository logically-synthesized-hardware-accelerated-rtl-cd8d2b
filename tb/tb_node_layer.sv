// tb_node_layer -- a 5-node layer reading 7 inputs: after every enabled clock
// all node registers must equal a reference that recomputes each node's
// field, sigmoid and LFSR draw (seeded by the documented per-node rule);
// with enable low the registers must hold; clamps must win.
module tb_node_layer;
  import tb_ref_pkg::*;
  localparam int N = 5, NI = 7, LAYER = 1;

  logic clk = 0, rst = 1, en = 0;
  logic [NI-1:0]      other;
  logic signed [7:0]  w [N][NI];
  logic signed [7:0]  bias [N];
  logic [N-1:0]       clamp_en, clamp_val, state, model;
  logic [31:0]        rnd [N];
  int checks = 0, failures = 0, updates = 0;

  node_layer #(.N(N), .N_IN(NI), .W_W(8), .B_W(8), .FRAC(4), .LUT_IN_W(8),
               .P_W(16), .LAYER(LAYER)) dut (
    .clk(clk), .rst(rst), .en(en), .other(other), .w(w), .bias(bias),
    .clamp_en(clamp_en), .clamp_val(clamp_val), .state(state));

  always #5 clk = ~clk;

  initial begin
    other = '0; clamp_en = '0; clamp_val = '0;
    for (int n = 0; n < N; n++) begin
      bias[n] = 0;
      for (int i = 0; i < NI; i++) w[n][i] = 0;
      rnd[n] = seed_of(LAYER, n);
    end
    repeat (2) @(posedge clk);
    rst <= 0;
    model = '0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      checks++;
      if (state !== model) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d state=%b model=%b", t, state, model);
      end
      other = NI'($urandom);
      en = ($urandom_range(0, 4) != 0);
      clamp_en = N'($urandom) & N'($urandom);
      clamp_val = N'($urandom);
      for (int n = 0; n < N; n++) begin
        bias[n] = 8'($urandom_range(0, 255)) >>> 1;
        for (int i = 0; i < NI; i++) w[n][i] = 8'($urandom_range(0, 255)) >>> 2;
      end
      if (en) begin
        updates++;
        for (int n = 0; n < N; n++) begin
          longint f;
          f = bias[n];
          for (int i = 0; i < NI; i++) if (other[i]) f += w[n][i];
          if (clamp_en[n]) model[n] = clamp_val[n];
          else model[n] = (longint'(rnd[n][31:16]) < sigmoid_q(saturate(f, 8), 4, 16));
          rnd[n] = lfsr_next(rnd[n]);
        end
      end
    end
    checks++;
    if (updates < 1000) failures++;
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

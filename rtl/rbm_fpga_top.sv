// rbm_fpga_top -- restricted Boltzmann machine sampling accelerator.
//
// Blocks and data flow:
//
//   host write port -> io_controller -> memory_controller -> weight / bias /
//                      clamp arrays inside rbm_core
//   rbm_core visible node registers -> sample_fifo -> io_controller ->
//                      32-bit host sample stream
//
// The host loads a trained, quantized RBM (weights, visible and hidden
// biases), clamps the visible nodes whose values are given (for integer
// factorization: the product bits), writes a sample target and sets run.
// The core then performs a block-Gibbs step on every clock and streams every
// visible sample to the host, which reads the answer off the mode of the
// sampled distribution. When the host stream cannot keep up, the FIFO fills
// and the core stalls.
//
// The block structure (IO controller, memory controller, weight/bias arrays,
// node update circuits, node registers, FIFO toward the IO controller)
// follows the original design; the PCIe link core that would sit on the host
// ports is not included, so its signals are this module's ports.
// Default size: 80 visible x 600 hidden nodes, 8-bit weights and biases.
module rbm_fpga_top #(
  parameter int unsigned NV         = rbm_pkg::NV_DEFAULT,
  parameter int unsigned NH         = rbm_pkg::NH_DEFAULT,
  parameter int unsigned W_W        = rbm_pkg::W_W_DEFAULT,
  parameter int unsigned B_W        = rbm_pkg::B_W_DEFAULT,
  parameter int unsigned FRAC       = rbm_pkg::FRAC_DEFAULT,
  parameter int unsigned LUT_IN_W   = rbm_pkg::LUT_IN_W_DEF,
  parameter int unsigned P_W        = rbm_pkg::P_W_DEFAULT,
  parameter int unsigned FIFO_DEPTH = rbm_pkg::FIFO_DEPTH_DEF
) (
  input  logic                       clk,
  input  logic                       rst,
  // host programming port (memory mapped, write only)
  input  logic                       host_wr_en,
  input  logic [rbm_pkg::ADDR_W-1:0] host_wr_addr,
  input  logic [rbm_pkg::DATA_W-1:0] host_wr_data,
  // sample stream to the host
  output logic                       host_rd_valid,
  input  logic                       host_rd_ready,
  output logic [31:0]                host_rd_data,
  // status
  output logic                       running,
  output logic                       done,
  output logic [31:0]                sample_count,
  output logic                       stalled
);
  logic                       mm_wr_en;
  logic [rbm_pkg::ADDR_W-1:0] mm_addr;
  logic [rbm_pkg::DATA_W-1:0] mm_wdata;
  rbm_pkg::prog_wr_t          wr;
  logic                       sample_taken;
  logic                       core_valid, core_ready;
  logic [NV-1:0]              core_data;
  logic                       fifo_valid, fifo_ready;
  logic [NV-1:0]              fifo_data;
  logic [NH-1:0]              hidden_unused;

  io_controller #(.NV(NV)) u_io (
    .clk(clk), .rst(rst),
    .host_wr_en(host_wr_en), .host_wr_addr(host_wr_addr), .host_wr_data(host_wr_data),
    .mm_wr_en(mm_wr_en), .mm_addr(mm_addr), .mm_wdata(mm_wdata),
    .smp_valid(fifo_valid), .smp_ready(fifo_ready), .smp_data(fifo_data),
    .host_rd_valid(host_rd_valid), .host_rd_ready(host_rd_ready), .host_rd_data(host_rd_data)
  );

  memory_controller u_mem (
    .clk(clk), .rst(rst),
    .mm_wr_en(mm_wr_en), .mm_addr(mm_addr), .mm_wdata(mm_wdata),
    .sample_taken(sample_taken), .wr(wr),
    .run(running), .done(done), .sample_count(sample_count)
  );

  rbm_core #(
    .NV(NV), .NH(NH), .W_W(W_W), .B_W(B_W), .FRAC(FRAC),
    .LUT_IN_W(LUT_IN_W), .P_W(P_W)
  ) u_core (
    .clk(clk), .rst(rst), .wr(wr), .run(running), .sample_taken(sample_taken),
    .smp_valid(core_valid), .smp_ready(core_ready), .smp_data(core_data),
    .hidden(hidden_unused)
  );

  sample_fifo #(.WIDTH(NV), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk(clk), .rst(rst),
    .in_valid(core_valid), .in_ready(core_ready), .in_data(core_data),
    .out_valid(fifo_valid), .out_ready(fifo_ready), .out_data(fifo_data)
  );

  // The core wants to run but the FIFO is holding it back.
  assign stalled = running && !sample_taken;
endmodule

// io_controller -- the accelerator's side of the host link.
//
// Two jobs. (1) It forwards the host's memory-mapped programming writes to
// the memory controller through one register stage. (2) It takes buffered
// visible samples from the sample FIFO and sends each one to the host as
// WORDS = ceil(NV / 32) 32-bit words, least significant word first, the last
// word zero-padded. Word k of a sample carries visible nodes 32k .. 32k+31.
// A new sample is accepted in the same clock as the last word of the previous
// one leaves, so the link is kept busy whenever samples are waiting.
//
// In the original the host link is a PCIe core (Xillybus) with a
// memory-mapped interface and data streams; that core is not part of this
// RTL. Here the host side is a plain write port plus a 32-bit valid/ready
// stream, and the word packing is this design's choice.
//
// Timing: host writes reach mm_* one clock later. host_rd_data is stable
// while host_rd_valid is high and host_rd_ready low (checked by an assertion).
module io_controller #(
  parameter int unsigned NV = rbm_pkg::NV_DEFAULT
) (
  input  logic                       clk,
  input  logic                       rst,
  // host programming port
  input  logic                       host_wr_en,
  input  logic [rbm_pkg::ADDR_W-1:0] host_wr_addr,
  input  logic [rbm_pkg::DATA_W-1:0] host_wr_data,
  // to the memory controller
  output logic                       mm_wr_en,
  output logic [rbm_pkg::ADDR_W-1:0] mm_addr,
  output logic [rbm_pkg::DATA_W-1:0] mm_wdata,
  // samples from the FIFO
  input  logic                       smp_valid,
  output logic                       smp_ready,
  input  logic [NV-1:0]              smp_data,
  // sample stream to the host
  output logic                       host_rd_valid,
  input  logic                       host_rd_ready,
  output logic [31:0]                host_rd_data
);
  localparam int unsigned WORDS = (NV + 31) / 32;
  localparam int unsigned IW    = (WORDS > 1) ? $clog2(WORDS) : 1;

  logic [WORDS*32-1:0] buffer;
  logic [IW-1:0]       idx;
  logic                busy, last_word_out;

  always_ff @(posedge clk) begin
    if (rst) begin
      mm_wr_en <= 1'b0;
      mm_addr  <= '0;
      mm_wdata <= '0;
    end else begin
      mm_wr_en <= host_wr_en;
      mm_addr  <= host_wr_addr;
      mm_wdata <= host_wr_data;
    end
  end

  assign last_word_out = busy && host_rd_ready && (idx == IW'(WORDS - 1));
  assign smp_ready     = !busy || last_word_out;
  assign host_rd_valid = busy;
  assign host_rd_data  = buffer[32*idx +: 32];

  always_ff @(posedge clk) begin
    if (rst) begin
      busy   <= 1'b0;
      idx    <= '0;
      buffer <= '0;
    end else if (smp_valid && smp_ready) begin
      busy   <= 1'b1;
      idx    <= '0;
      buffer <= (WORDS*32)'(smp_data);
    end else if (busy && host_rd_ready) begin
      if (last_word_out) busy <= 1'b0;
      else               idx  <= idx + IW'(1);
    end
  end

  assert property (@(posedge clk) disable iff (rst)
                   host_rd_valid && !host_rd_ready |=> host_rd_valid && $stable(host_rd_data))
    else $error("io_controller: host stream word changed before it was taken");
endmodule

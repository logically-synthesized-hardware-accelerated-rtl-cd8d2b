// sample_fifo -- synchronous FIFO between the visible node registers and the
// IO controller.
//
// Every stored entry is one complete visible-layer sample (WIDTH = NV bits).
// Both sides use a valid/ready handshake: an entry moves when valid and ready
// are high on the same clock. The read side is first-word-fall-through:
// `out_data` shows the oldest entry whenever `out_valid` is high. When the
// FIFO is full `in_ready` falls and the RBM core stalls rather than drop a
// sample. The original only says the samples are buffered to the IO
// controller through a FIFO; the depth (512 samples) and the stall-on-full
// policy are this design's choices.
//
// Timing: an entry written on one clock can be read on the next.
module sample_fifo #(
  parameter int unsigned WIDTH = rbm_pkg::NV_DEFAULT,
  parameter int unsigned DEPTH = rbm_pkg::FIFO_DEPTH_DEF
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic [AW:0]      count;
  logic             push, pop;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rd_ptr];

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] ptr);
    return (ptr == AW'(DEPTH - 1)) ? '0 : ptr + AW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= incr(wr_ptr);
      if (pop)  rd_ptr <= incr(rd_ptr);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  assert property (@(posedge clk) disable iff (rst) count <= (AW+1)'(DEPTH))
    else $error("sample_fifo: occupancy above depth");
endmodule

// memory_controller -- decodes host programming writes and runs the sampler.
//
// The host programs the accelerator through a memory-mapped write port (the
// address map is in rbm_pkg). The controller registers each write, splits
// the address into region / row / col fields and presents it as one
// prog_wr_t bundle to the weight, bias and clamp arrays, which pick out the
// writes to their own region. Writes to REG_CONTROL are handled here:
//
//   CTRL_RUN    data[0] = run, data[1] = clear the sample counter and `done`
//   CTRL_TARGET number of samples per run; 0 = sample until run is cleared
//
// While `run` is high the RBM core takes a sample on every clock it is not
// stalled, and pulses `sample_taken`. The controller counts those pulses and,
// when the count reaches a non-zero target, clears `run` and raises `done`,
// so a run produces exactly `target` samples. The original states only that
// the controller programs weights, clamps and biases through a memory-mapped
// interface; the field layout, the control registers and the sample target
// are this design's.
//
// Timing: a write presented on mm_* appears on `wr` one clock later and in
// the arrays one clock after that. `run` falls on the clock after the
// sample that reaches the target.
module memory_controller (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       mm_wr_en,
  input  logic [rbm_pkg::ADDR_W-1:0] mm_addr,
  input  logic [rbm_pkg::DATA_W-1:0] mm_wdata,
  input  logic                       sample_taken,
  output rbm_pkg::prog_wr_t          wr,
  output logic                       run,
  output logic                       done,
  output logic [31:0]                sample_count
);
  import rbm_pkg::*;

  logic [31:0]  target;
  prog_region_e region;
  logic [COL_W-1:0] col;

  assign region = prog_region_e'(mm_addr[ADDR_W-1 -: 3]);
  assign col    = mm_addr[COL_W-1:0];

  // Registered decode toward the storage arrays.
  always_ff @(posedge clk) begin
    if (rst) begin
      wr <= '0;
    end else begin
      wr.en     <= mm_wr_en && (region != REG_CONTROL);
      wr.region <= region;
      wr.row    <= mm_addr[COL_W +: ROW_W];
      wr.col    <= col;
      wr.data   <= mm_wdata;
    end
  end

  // Control registers and sample counting.
  always_ff @(posedge clk) begin
    if (rst) begin
      run          <= 1'b0;
      done         <= 1'b0;
      target       <= '0;
      sample_count <= '0;
    end else begin
      if (sample_taken) begin
        sample_count <= sample_count + 32'd1;
        if (target != 32'd0 && sample_count + 32'd1 == target) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
      end
      if (mm_wr_en && region == REG_CONTROL) begin
        if (col == CTRL_RUN) begin
          run <= mm_wdata[0];
          if (mm_wdata[1]) begin
            sample_count <= '0;
            done         <= 1'b0;
          end
        end else if (col == CTRL_TARGET) begin
          target <= mm_wdata;
        end
      end
    end
  end

  // The core may only take samples while the controller lets it run.
  assert property (@(posedge clk) disable iff (rst) sample_taken |-> run)
    else $error("memory_controller: sample taken while not running");
endmodule

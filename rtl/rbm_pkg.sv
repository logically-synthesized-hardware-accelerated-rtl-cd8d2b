// rbm_pkg -- types and constants shared by the RBM Gibbs-sampling accelerator.
//
// The accelerator keeps a restricted Boltzmann machine (weight matrix W,
// visible biases b, hidden biases a, visible clamps) in on-chip registers and
// updates every visible and every hidden neuron in parallel each clock.
// This package holds the default sizes (the 80 x 600 RBM with 8-bit
// fixed-point weights and biases that is the largest configuration the
// accelerator was built for), the host programming address map, and the
// programming-write bundle that the memory controller hands to the storage
// arrays.
//
// Address map of the 32-bit-data, 24-bit-address programming port (this
// design's own choice; the original only says the interface is memory
// mapped):
//   addr[23:21] region  (prog_region_e)
//   addr[20:11] row     visible-node index, used by REG_WEIGHT
//   addr[10:0]  col     hidden-node index for REG_WEIGHT, otherwise the
//                       element index of the region
package rbm_pkg;

  // Default RBM size and number formats.
  localparam int unsigned NV_DEFAULT     = 80;   // visible nodes
  localparam int unsigned NH_DEFAULT     = 600;  // hidden nodes
  localparam int unsigned W_W_DEFAULT    = 8;    // weight width (signed)
  localparam int unsigned B_W_DEFAULT    = 8;    // bias width (signed)
  localparam int unsigned FRAC_DEFAULT   = 4;    // fractional bits of weights/biases
  localparam int unsigned LUT_IN_W_DEF   = 8;    // sigmoid LUT input width (signed)
  localparam int unsigned P_W_DEFAULT    = 16;   // probability / random-number width
  localparam int unsigned FIFO_DEPTH_DEF = 512;  // samples buffered toward the host

  // Host programming port.
  localparam int unsigned ADDR_W  = 24;
  localparam int unsigned DATA_W  = 32;
  localparam int unsigned ROW_W   = 10;  // up to 1024 visible nodes
  localparam int unsigned COL_W   = 11;  // up to 2048 hidden nodes
  localparam int unsigned MAX_NV  = 1 << ROW_W;
  localparam int unsigned MAX_NH  = 1 << COL_W;

  typedef enum logic [2:0] {
    REG_WEIGHT  = 3'd0,  // W[row][col] <= data[W_W-1:0]
    REG_VBIAS   = 3'd1,  // b[col]      <= data[B_W-1:0]
    REG_HBIAS   = 3'd2,  // a[col]      <= data[B_W-1:0]
    REG_CLAMP   = 3'd3,  // clamp[col]  <= {data[1]=value, data[0]=enable}
    REG_CONTROL = 3'd4   // control/status registers, see memory_controller
  } prog_region_e;

  // Control registers in REG_CONTROL, selected by the col field.
  localparam logic [COL_W-1:0] CTRL_RUN    = 'd0;  // data[0]: run, data[1]: clear sample count
  localparam logic [COL_W-1:0] CTRL_TARGET = 'd1;  // samples per run, 0 = run until stopped

  // One decoded programming write, as the storage arrays see it.
  typedef struct packed {
    logic                en;
    prog_region_e        region;
    logic [ROW_W-1:0]    row;
    logic [COL_W-1:0]    col;
    logic [DATA_W-1:0]   data;
  } prog_wr_t;

  // Seed of the LFSR of node `idx` in layer `layer` (0 visible, 1 hidden).
  // Every node gets a different, non-zero seed.
  function automatic logic [31:0] lfsr_seed(input int unsigned layer, input int unsigned idx);
    logic [31:0] s;
    s = (32'(idx) + 32'd1) * 32'h9E37_79B9;
    s = s ^ (32'(layer) * 32'h85EB_CA6B) ^ 32'h2545_F491;
    s = s ^ (s >> 15);
    if (s == 32'd0) s = 32'h1;
    return s;
  endfunction

endpackage

// apu_pkg: constants and types shared by the accelerator blocks.
//
// The accelerator computes one fully connected layer whose weight matrix has
// been pruned into N_PE independent dense blocks of BLOCK x BLOCK weights.
// Each block lives in one processing element (PE). The sizes below are the
// chip's: 10 PEs, 400x400 blocks, 4-bit weights and activations, a 9-stage
// adder tree. Widths that the published description does not give (bias,
// command field layout, response data) are this design's own choices and are
// marked as such.
package apu_pkg;

  // ---- array geometry (published numbers) ----
  parameter int unsigned N_PE   = 10;   // processing elements on the chip
  parameter int unsigned BLOCK  = 400;  // block size: inputs and outputs per PE
  parameter int unsigned W_W    = 4;    // weight width, signed INT4
  parameter int unsigned A_W    = 4;    // activation width, unsigned INT4 (post-ReLU)

  // ---- derived / own choices ----
  parameter int unsigned PROD_W = W_W + A_W;     // signed product of INT4 x UINT4 fits 8 bits
  parameter int unsigned XLEN   = 64;            // RoCC operand width of a 64-bit Rocket core
  parameter int unsigned BIAS_W = 16;            // own choice: bias per output row

  // ---- RoCC command opcodes (funct7), own choice ----
  typedef enum logic [6:0] {
    OP_WR_WEIGHT = 7'd0,  // rs1 = {pe, chunk, row}, rs2 = 64-bit weight chunk (or bias)
    OP_WR_SELECT = 7'd1,  // rs1 = {pe, addr},       rs2 = crossbar select value
    OP_WR_ACT    = 7'd2,  // rs1 = {pe, addr},       rs2 = activation value
    OP_CONFIG    = 7'd3,  // rs1 = n_in,             rs2 = {shift, n_out}
    OP_RUN       = 7'd4,  // route n_in activations, then compute n_out rows; responds
    OP_RD_ACT    = 7'd5,  // rs1 = {pe, addr}; responds with the activation
    OP_LOAD      = 7'd6   // rs1 = byte address; rs2 = {target[41:40], pe[31:24], count[15:0]};
                          // copies count 64-bit words from memory into a PE memory
  } apu_op_e;

  // rs1 field positions, own choice
  parameter int unsigned RS1_ADDR_LSB  = 0;   // [15:0]  row / address
  parameter int unsigned RS1_CHUNK_LSB = 16;  // [23:16] 64-bit chunk inside a weight row
  parameter int unsigned RS1_PE_LSB    = 24;  // [31:24] PE index
  // rs2 field positions of OP_LOAD, own choice
  parameter int unsigned RS2_PE_LSB     = 24; // [31:24] PE index
  parameter int unsigned RS2_TARGET_LSB = 40; // [41:40] mem_sel_e of the target memory

  // RoCC command and response, reduced to the fields this accelerator uses
  typedef struct packed {
    logic [6:0]      funct;
    logic [4:0]      rd;
    logic            xd;      // response wanted
    logic [XLEN-1:0] rs1;
    logic [XLEN-1:0] rs2;
  } rocc_cmd_t;

  typedef struct packed {
    logic [4:0]      rd;
    logic [XLEN-1:0] data;
  } rocc_resp_t;

  // which PE memory a memory-interface write goes to
  typedef enum logic [1:0] {
    MEM_WEIGHT = 2'd0,
    MEM_SELECT = 2'd1,
    MEM_ACT    = 2'd2
  } mem_sel_e;

endpackage

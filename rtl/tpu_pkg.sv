// tpu_pkg: types and constants shared by the TPU blocks.
//
// The paper fixes the sizes used as defaults here: a 256x256 array of 8-bit
// MACs, 256-byte internal paths, a 24 MiB Unified Buffer (96K rows of 256 B),
// 4096 accumulator rows of 256 x 32 bit, a Weight FIFO four 64 KiB tiles deep,
// and a 12-byte CISC instruction with a 3-byte Unified Buffer address, a
// 2-byte accumulator address and a 4-byte length; the remaining 3 bytes hold
// the opcode and flags. The opcode values, the split of those 3 bytes into an
// 8-bit opcode and 16 flag bits, the meaning of each flag and the reuse of
// the fields by the non-matrix instructions are this design's own choices.
package tpu_pkg;

  // Default sizes (paper values).
  localparam int unsigned ARRAY_N        = 256;    // MACs per side, bytes per path
  localparam int unsigned UB_ROWS        = 98304;  // 96K x 256 B = 24 MiB
  localparam int unsigned ACC_ROWS       = 4096;   // 4K x 256 x 32 b = 4 MiB
  localparam int unsigned WFIFO_TILES    = 4;      // Weight FIFO depth in tiles
  localparam int unsigned ACC_W          = 32;     // accumulator width
  localparam int unsigned WMEM_ROW_AW    = 25;     // 8 GiB / 256 B rows

  // Opcodes of the key instructions plus the housekeeping ones the paper lists.
  typedef enum logic [7:0] {
    OP_NOP               = 8'h00,
    OP_READ_HOST_MEMORY  = 8'h01,
    OP_READ_WEIGHTS      = 8'h02,
    OP_MATRIX_MULTIPLY   = 8'h03,
    OP_ACTIVATE          = 8'h04,
    OP_WRITE_HOST_MEMORY = 8'h05,
    OP_SYNC              = 8'h06,
    OP_INTERRUPT_HOST    = 8'h07,
    OP_HALT              = 8'h08
  } opcode_e;

  // 12-byte instruction. Field use per opcode:
  //   READ/WRITE_HOST_MEMORY: ub_addr, host row = {flags, acc_addr}, length rows
  //   READ_WEIGHTS:           weight tile number = ub_addr, length tiles
  //   MATRIX_MULTIPLY:        ub_addr, acc_addr, length = B rows, mm flags
  //   ACTIVATE:               acc_addr (source), ub_addr (destination),
  //                           length = output rows, act flags
  typedef struct packed {
    opcode_e     opcode;    // 1 byte
    logic [15:0] flags;     // 2 bytes
    logic [23:0] ub_addr;   // 3 bytes
    logic [15:0] acc_addr;  // 2 bytes
    logic [31:0] length;    // 4 bytes
  } instr_t;

  // MATRIX_MULTIPLY flag bits.
  localparam int unsigned MMF_ACCUMULATE = 0;  // add into the accumulator, else overwrite
  localparam int unsigned MMF_SWITCH     = 1;  // take the next weight tile first
  localparam int unsigned MMF_DSIGNED    = 2;  // data bytes are signed
  localparam int unsigned MMF_WSIGNED    = 3;  // weight bytes are signed
  localparam int unsigned MMF_SHIFT_LO   = 4;  // [5:4]: partial sum << 8*shift

  // Nonlinear functions of ACTIVATE, flags[2:0].
  typedef enum logic [2:0] {
    FN_NONE    = 3'd0,
    FN_RELU    = 3'd1,
    FN_SIGMOID = 3'd2,
    FN_TANH    = 3'd3
  } act_fn_e;
  // ACTIVATE flag bits beyond the function.
  localparam int unsigned AF_POOL_AVG = 3;   // 1: average pooling, 0: max pooling
  localparam int unsigned AF_POOL_LO  = 4;   // [5:4]: log2 of the rows pooled
  localparam int unsigned AF_SHIFT_LO = 6;   // [10:6]: arithmetic right shift

  // Tag that travels with each data row through the skew and the array.
  typedef struct packed {
    logic valid;
    logic bank;      // which weight buffer this row multiplies with
    logic dsigned;
    logic wsigned;
  } row_tag_t;

  // Accumulator write control that travels beside the partial sums.
  typedef struct packed {
    logic        valid;
    logic [15:0] addr;
    logic        accumulate;
    logic [1:0]  shift;
  } acc_ctrl_t;

  // Performance events, one bit per cycle each.
  typedef struct packed {
    logic array_active;   // a data row entered the matrix unit
    logic weight_stall;   // matrix waits for a weight tile still in memory
    logic weight_shift;   // matrix waits while the tile is shifted in
    logic raw_stall;      // issue blocked by a read-after-write hazard
    logic input_stall;    // DMA waits for the host
    logic instr_issued;
  } perf_ev_t;

  // One MAC: 8 x 8 bit, each operand signed or unsigned, product sign-extended.
  function automatic logic [ACC_W-1:0] mac_mul(input logic [7:0] a, input logic [7:0] w,
                                                input logic as, input logic ws);
    logic signed [8:0]  ae, we;
    logic signed [17:0] p;
    ae = {as & a[7], a};
    we = {ws & w[7], w};
    p  = ae * we;
    return ACC_W'(p);
  endfunction

endpackage

// tmu_pkg -- types and constants shared by the Tensor Manipulation Unit (TMU).
//
// The TMU moves tensors memory-to-memory over a 128-bit (16-byte) bus and
// rearranges them on the way. One TM instruction describes one operator on
// one tensor: its sizes, its source and destination, the affine address map
// (matrices A and B) used by coarse-grained operators, and the byte masks used
// by the fine-grained Reconfigurable Masking Engine (RME).
//
// Following the paper: the 16-byte bus, the opcode list (the operators of the
// execution model), the three dataflow classes (fine-grained, coarse-grained,
// element-wise), the 3x3 matrix A and vector B, the byte masking and byte
// destination registers and three calculation units. The field widths, the
// encodings and the segment/group fields are this design's own choices.
package tmu_pkg;

  localparam int BUS_BYTES = 16;             // 128-bit AXI data bus
  localparam int BUS_W     = 8 * BUS_BYTES;
  localparam int ADDR_W    = 32;
  localparam int IDX_W     = 24;             // tensor index / size counters
  localparam int COEF_W    = 16;             // element of matrix A
  localparam int OFS_W     = 32;             // element of vector B
  localparam int N_CAL     = 3;              // calculation units of the evaluate scheme
  localparam int SEG_W     = 8;              // segment length field

  typedef logic [BUS_W-1:0]     beat_t;
  typedef logic [BUS_BYTES-1:0] strb_t;
  typedef logic [ADDR_W-1:0]    addr_t;

  // Operators decoded by the execution model (one state per operator in the
  // Decode stage of the execution model).
  typedef enum logic [3:0] {
    OP_HALT      = 4'd0,
    OP_REARRANGE = 4'd1,   // fine-grained, assemble
    OP_RESIZE    = 4'd2,   // fine-grained, evaluate (averaging)
    OP_BBOXCAL   = 4'd3,   // fine-grained, evaluate (threshold filter)
    OP_ADD       = 4'd4,   // element-wise (Add / Sub / Mul)
    OP_TRANSPOSE = 4'd5,   // coarse-grained, all through the address generator
    OP_ROT90     = 4'd6,
    OP_IMG2COL   = 4'd7,
    OP_PIXSHUF   = 4'd8,   // PixelShuffle and PixelUnshuffle
    OP_UPSAMPLE  = 4'd9,
    OP_ROUTE     = 4'd10,  // Route and Split
    OP_CUSTOM    = 4'd11
  } opcode_e;

  // Dataflow class chosen by the decoder.
  typedef enum logic [2:0] {
    CLS_HALT     = 3'd0,
    CLS_ASSEMBLE = 3'd1,
    CLS_EVALUATE = 3'd2,
    CLS_ELEM     = 3'd3,
    CLS_COARSE   = 3'd4
  } class_e;

  typedef enum logic [1:0] { EOP_ADD = 2'd0, EOP_SUB = 2'd1, EOP_MUL = 2'd2 } eop_e;
  typedef enum logic [1:0] { CAL_MAX = 2'd0, CAL_MIN = 2'd1, CAL_SUM = 2'd2, CAL_AVG = 2'd3 } cal_op_e;
  typedef enum logic       { EV_REDUCE = 1'b0, EV_FILTER = 1'b1 } ev_mode_e;

  // A byte destination value of 3 routes a byte to no calculation unit.

  // States of the TMU finite-state machine: the stages of the execution model.
  typedef enum logic [3:0] {
    S_IDLE, S_FETCH, S_DECODE, S_LD_MEM,
    S_ASSEMBLE, S_EVALUATE, S_ELEM,        // fine-grained TM / element-wise processing
    S_ADDR_GEN,                            // coarse-grained TM (address generation)
    S_ST_MEM, S_UPDATE_INDEX               // tensor store, branch
  } fsm_state_e;

  typedef logic signed [COEF_W-1:0] coef_t;
  typedef logic signed [OFS_W-1:0]  ofs_t;

  typedef struct packed {
    opcode_e                       op;
    logic                          src_fwd;     // load from the TPU forwarding stream, not DRAM
    logic                          dst_fwd;     // store to the forwarding output, not DRAM
    addr_t                         src0_base;
    addr_t                         src1_base;   // second operand (element-wise)
    addr_t                         dst_base;    // addr_base of Eq. 1
    logic [IDX_W-1:0]              wi;          // input width  (x_i range)
    logic [IDX_W-1:0]              hi;          // input height (y_i range)
    logic [IDX_W-1:0]              cb;          // input channel blocks of 16 bytes (c_i range)
    logic [SEG_W-1:0]              seg_len;     // beats loaded per segment
    coef_t [2:0][2:0]              a;           // matrix A, a[row][col]
    logic  [2:0][3:0]              a_shr;       // per-row right shift: division by 2^k (1/x_s, 1/s)
    ofs_t  [2:0]                   b;           // vector B
    logic [IDX_W-1:0]              c_stride;    // output bytes per pixel position
    strb_t                         byte_mask;   // Byte Masking REG (assemble)
    logic [4:0]                    grp_in;      // bytes per assembled group
    logic [4:0]                    grp_out;     // output slots per group (zero padded)
    logic [BUS_BYTES-1:0][1:0]     byte_dest;   // Byte Destination REG (evaluate)
    logic [N_CAL-1:0][1:0]         cal_op;      // operation of each calculation unit
    logic [2:0]                    avg_shift;   // CAL_AVG: sum >> avg_shift
    ev_mode_e                      ev_mode;
    logic [1:0]                    cond_unit;   // unit whose result gates a filter commit
    logic signed [7:0]             threshold;
    logic [SEG_W-1:0]              seg_period;  // segment read masking: period in beats
    logic [SEG_W-1:0]              seg_keep;    // beats acquired at the start of each period
    eop_e                          eop;
    logic [2:0]                    mul_shift;   // Mul: product >>> mul_shift before saturation
  } inst_t;

  function automatic class_e op_class(opcode_e op);
    case (op)
      OP_HALT:      return CLS_HALT;
      OP_REARRANGE: return CLS_ASSEMBLE;
      OP_RESIZE,
      OP_BBOXCAL:   return CLS_EVALUATE;
      OP_ADD:       return CLS_ELEM;
      default:      return CLS_COARSE;
    endcase
  endfunction

  function automatic logic signed [7:0] sat8(input logic signed [17:0] v);
    if (v > 18'sd127)       return 8'sd127;
    else if (v < -18'sd128) return -8'sd128;
    else                    return v[7:0];
  endfunction

endpackage

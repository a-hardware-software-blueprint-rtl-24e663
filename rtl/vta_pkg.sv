// vta_pkg: shapes, widths, opcodes and instruction layouts shared by every
// module of the tensor accelerator.
//
// The GEMM intrinsic shape is (BATCH, BLOCK_IN) x (BLOCK_IN, BLOCK_OUT) =
// (2,16) x (16,16) with 8-bit weights and inputs (W8A8) and 32-bit
// accumulators, one of the candidate shapes the design was explored with.
// Instructions are 128 bits wide and their fields are laid out LSB first,
// as printed in the instruction-format drawing: opcode at bit 0, then four
// dependency flags, then the instruction-specific fields; the upper 64 bits
// start at bit 64. Field widths that the drawing gives only by name
// (OPCODE_WIDTH, MEMOP_*_WIDTH, LOOP_ITER_WIDTH, ...) and all buffer depths
// are this design's own choices, sized so each 64-bit half fits.
// The padding fields are 4 bits each (MEMOP_PAD_WIDTH); the drawing labels
// that group "4 * MEMOP_DRAM_ADDR_WIDTH", which could not fit in 64 bits.
// Opcode and buffer-id encodings are this design's own.
package vta_pkg;

  // ---- GEMM intrinsic shape and data types ----
  localparam int unsigned BATCH     = 2;
  localparam int unsigned BLOCK_IN  = 16;
  localparam int unsigned BLOCK_OUT = 16;
  localparam int unsigned INP_WIDTH = 8;
  localparam int unsigned WGT_WIDTH = 8;
  localparam int unsigned ACC_WIDTH = 32;
  localparam int unsigned OUT_WIDTH = INP_WIDTH;

  // ---- on-chip buffer depths (log2 of the number of tensor entries) ----
  localparam int unsigned LOG_UOP_BUFF_DEPTH = 13;  // 8192 x 32 b  = 32 KiB
  localparam int unsigned LOG_INP_BUFF_DEPTH = 10;  // 1024 x 256 b = 32 KiB
  localparam int unsigned LOG_WGT_BUFF_DEPTH = 10;  // 1024 x 2048 b = 256 KiB
  localparam int unsigned LOG_ACC_BUFF_DEPTH = 10;  // 1024 x 1024 b = 128 KiB
  localparam int unsigned LOG_OUT_BUFF_DEPTH = LOG_ACC_BUFF_DEPTH;

  // ---- tensor entry widths in bits ----
  localparam int unsigned UOP_ELEM_W = 32;
  localparam int unsigned INP_ELEM_W = BATCH * BLOCK_IN * INP_WIDTH;
  localparam int unsigned WGT_ELEM_W = BLOCK_OUT * BLOCK_IN * WGT_WIDTH;
  localparam int unsigned ACC_ELEM_W = BATCH * BLOCK_OUT * ACC_WIDTH;
  localparam int unsigned OUT_ELEM_W = BATCH * BLOCK_OUT * OUT_WIDTH;
  localparam int unsigned INSN_W     = 128;

  // ---- DRAM ports: byte addresses, 32-bit data beats ----
  localparam int unsigned MEM_ADDR_W = 32;
  localparam int unsigned MEM_DATA_W = 32;
  localparam int unsigned MEM_BEAT_BYTES = MEM_DATA_W / 8;

  // ---- instruction field widths ----
  localparam int unsigned OPCODE_WIDTH          = 3;
  localparam int unsigned MEMOP_ID_WIDTH        = 3;
  localparam int unsigned MEMOP_SRAM_ADDR_WIDTH = 16;
  localparam int unsigned MEMOP_DRAM_ADDR_WIDTH = 32;
  localparam int unsigned MEMOP_SIZE_WIDTH      = 16;
  localparam int unsigned MEMOP_STRIDE_WIDTH    = 16;
  localparam int unsigned MEMOP_PAD_WIDTH       = 4;
  localparam int unsigned LOOP_ITER_WIDTH       = 14;
  localparam int unsigned ALU_OPCODE_WIDTH      = 2;
  localparam int unsigned ALUOP_IMM_WIDTH       = 16;

  typedef enum logic [OPCODE_WIDTH-1:0] {
    OP_LOAD  = 3'd0,
    OP_STORE = 3'd1,
    OP_GEMM  = 3'd2,
    OP_ALU   = 3'd4
  } opcode_e;

  typedef enum logic [MEMOP_ID_WIDTH-1:0] {
    MEM_UOP = 3'd0,
    MEM_WGT = 3'd1,
    MEM_INP = 3'd2,
    MEM_ACC = 3'd3,
    MEM_OUT = 3'd4
  } mem_id_e;

  typedef enum logic [ALU_OPCODE_WIDTH-1:0] {
    ALU_MIN = 2'd0,
    ALU_MAX = 2'd1,
    ALU_ADD = 2'd2,
    ALU_SHR = 2'd3
  } alu_op_e;

  // Dependency flags (bits 3..6 of every instruction). "prev" is the module
  // upstream in the load -> compute -> store chain, "next" the one downstream.
  typedef struct packed {
    logic push_next;  // bit 6: after the task, push a token to the next module
    logic push_prev;  // bit 5: after the task, push a token to the previous module
    logic pop_next;   // bit 4: before the task, wait for a token from the next module
    logic pop_prev;   // bit 3: before the task, wait for a token from the previous module
  } dep_flags_t;

  // LOAD / STORE: 2D strided DMA between DRAM and one on-chip buffer.
  // dram_base and x_stride count tensor entries of the target buffer.
  typedef struct packed {
    logic [MEMOP_PAD_WIDTH-1:0]        x_pad_1;    // 127:124
    logic [MEMOP_PAD_WIDTH-1:0]        x_pad_0;    // 123:120
    logic [MEMOP_PAD_WIDTH-1:0]        y_pad_1;    // 119:116
    logic [MEMOP_PAD_WIDTH-1:0]        y_pad_0;    // 115:112
    logic [MEMOP_STRIDE_WIDTH-1:0]     x_stride;   // 111:96
    logic [MEMOP_SIZE_WIDTH-1:0]       x_size;     // 95:80
    logic [MEMOP_SIZE_WIDTH-1:0]       y_size;     // 79:64
    logic [5:0]                        unused;     // 63:58
    logic [MEMOP_DRAM_ADDR_WIDTH-1:0]  dram_base;  // 57:26
    logic [MEMOP_SRAM_ADDR_WIDTH-1:0]  sram_base;  // 25:10
    mem_id_e                           sram_mem;   // 9:7
    dep_flags_t                        dept;       // 6:3
    opcode_e                           opcode;     // 2:0
  } mem_insn_t;

  // GEMM: reg[i0*x0+i1*x1+x] += inp[i0*y0+i1*y1+y] * wgt[i0*z0+i1*z1+z]
  typedef struct packed {
    logic [3:0]                        unused_hi;  // 127:124
    logic [LOG_WGT_BUFF_DEPTH-1:0]     z1;         // 123:114
    logic [LOG_WGT_BUFF_DEPTH-1:0]     z0;         // 113:104
    logic [LOG_INP_BUFF_DEPTH-1:0]     y1;         // 103:94
    logic [LOG_INP_BUFF_DEPTH-1:0]     y0;         // 93:84
    logic [LOG_ACC_BUFF_DEPTH-1:0]     x1;         // 83:74
    logic [LOG_ACC_BUFF_DEPTH-1:0]     x0;         // 73:64
    logic [1:0]                        unused_lo;  // 63:62
    logic [LOOP_ITER_WIDTH-1:0]        end1;       // 61:48
    logic [LOOP_ITER_WIDTH-1:0]        end0;       // 47:34
    logic [LOG_UOP_BUFF_DEPTH-1:0]     uop_end;    // 33:21
    logic [LOG_UOP_BUFF_DEPTH-1:0]     uop_bgn;    // 20:8
    logic                              reset;      // 7
    dep_flags_t                        dept;       // 6:3
    opcode_e                           opcode;     // 2:0
  } gemm_insn_t;

  // ALU: reg[dst] = OP(reg[dst], use_imm ? imm : reg[src])
  typedef struct packed {
    logic [4:0]                        unused_hi;  // 127:123
    logic [ALUOP_IMM_WIDTH-1:0]        imm;        // 122:107
    logic                              use_imm;    // 106
    alu_op_e                           alu_op;     // 105:104
    logic [LOG_ACC_BUFF_DEPTH-1:0]     y1;         // 103:94
    logic [LOG_ACC_BUFF_DEPTH-1:0]     y0;         // 93:84
    logic [LOG_ACC_BUFF_DEPTH-1:0]     x1;         // 83:74
    logic [LOG_ACC_BUFF_DEPTH-1:0]     x0;         // 73:64
    logic [1:0]                        unused_lo;  // 63:62
    logic [LOOP_ITER_WIDTH-1:0]        end1;       // 61:48
    logic [LOOP_ITER_WIDTH-1:0]        end0;       // 47:34
    logic [LOG_UOP_BUFF_DEPTH-1:0]     uop_end;    // 33:21
    logic [LOG_UOP_BUFF_DEPTH-1:0]     uop_bgn;    // 20:8
    logic                              reset;      // 7
    dep_flags_t                        dept;       // 6:3
    opcode_e                           opcode;     // 2:0
  } alu_insn_t;

  // Micro-op: three buffer indices. For ALU micro-ops the acc field is the
  // destination and the inp field the source, both register-file indices.
  typedef struct packed {
    logic [1:0]                        unused;     // 31:30
    logic [LOG_WGT_BUFF_DEPTH-1:0]     wgt_idx;    // 29:20
    logic [LOG_INP_BUFF_DEPTH-1:0]     inp_idx;    // 19:10
    logic [LOG_ACC_BUFF_DEPTH-1:0]     acc_idx;    // 9:0
  } uop_t;

  // log2 of the number of bytes of one tensor entry of each buffer
  function automatic logic [3:0] elem_shift_of(mem_id_e id);
    case (id)
      MEM_UOP: return 4'($clog2(UOP_ELEM_W / 8));
      MEM_WGT: return 4'($clog2(WGT_ELEM_W / 8));
      MEM_INP: return 4'($clog2(INP_ELEM_W / 8));
      MEM_ACC: return 4'($clog2(ACC_ELEM_W / 8));
      default: return 4'($clog2(OUT_ELEM_W / 8));
    endcase
  endfunction

endpackage

// vta_pkg: shared constants and instruction formats of the tensor accelerator.
//
// All instructions are 128 bits wide. Three formats share the low 7 bits:
// a 3-bit opcode and four dependency bits (pop_prev, pop_next, push_prev,
// push_next). "prev" and "next" are the dependency queues on the left and
// right of the module that executes the instruction (load | compute | store).
// The field widths below are this design's choice: they are sized for
// 8192-entry scratchpads (13-bit indices) and squeezed (10-bit loop counts,
// 11-bit loop factors) so that every format still fits in 128 bits, which is
// the constraint the ISA keeps fixed. A micro-op (uop) holds three 13-bit
// scratchpad base indices and is widened from the classic 32 bits to 64 bits
// because 39 bits of indices no longer fit.
// Interface: constants, enums and instruction/micro-op structs shared by
// all modules. Timing: none (declarations only).
package vta_pkg;

  // ---------------- default configuration (1 x 16 x 16, 64-bit bus) -------
  localparam int unsigned CFG_BATCH     = 1;
  localparam int unsigned CFG_BLOCK_IN  = 16;
  localparam int unsigned CFG_BLOCK_OUT = 16;
  localparam int unsigned INP_AW    = 13;   // input buffer index bits
  localparam int unsigned WGT_AW    = 13;   // weight buffer index bits
  localparam int unsigned ACC_AW    = 13;   // register file (acc) index bits
  localparam int unsigned OUT_AW    = 13;   // output buffer (same depth as acc)
  localparam int unsigned UOP_AW    = 13;   // micro-op cache index bits
  localparam int unsigned CFG_BUS_BITS  = 64;   // DRAM data bus width

  localparam int unsigned INP_BITS = 8;     // input element
  localparam int unsigned WGT_BITS = 8;     // weight element
  localparam int unsigned ACC_BITS = 32;    // accumulator element
  localparam int unsigned OUT_BITS = 8;     // output element
  localparam int unsigned UOP_BITS = 64;    // micro-op

  localparam int unsigned INSN_BITS = 128;
  localparam int unsigned IDX_W     = 13;   // scratchpad index field width in the ISA
  localparam int unsigned META_W    = 32;   // VME request metadata width
  localparam int unsigned LEN_W     = 8;    // burst length field (beats - 1)

  // ---------------- opcodes and memory types ----------------
  typedef enum logic [2:0] {
    OP_LOAD   = 3'd0,
    OP_STORE  = 3'd1,
    OP_GEMM   = 3'd2,
    OP_FINISH = 3'd3,
    OP_ALU    = 3'd4
  } opcode_t;

  typedef enum logic [2:0] {
    MEM_UOP = 3'd0,
    MEM_WGT = 3'd1,
    MEM_INP = 3'd2,
    MEM_ACC = 3'd3,
    MEM_OUT = 3'd4
  } mem_type_t;

  typedef enum logic [2:0] {
    ALU_MIN  = 3'd0,
    ALU_MAX  = 3'd1,
    ALU_ADD  = 3'd2,
    ALU_SHR  = 3'd3,
    ALU_MUL  = 3'd4,   // element-wise 8-bit multiply (depthwise convolution)
    ALU_CLIP = 3'd5    // clamp to [-b, +b]
  } alu_op_t;

  typedef struct packed {
    logic push_next;
    logic push_prev;
    logic pop_next;
    logic pop_prev;
  } dep_t;

  // LOAD / STORE: 2-D strided tile with padding. dram_base and x_stride are
  // in units of the destination tensor size.
  typedef struct packed {
    logic [7:0]  rsvd;
    logic        pad_sel;     // 0: pad with zero, 1: pad with most negative value
    logic [3:0]  x_pad_1;
    logic [3:0]  x_pad_0;
    logic [3:0]  y_pad_1;
    logic [3:0]  y_pad_0;
    logic [15:0] x_stride;
    logic [15:0] x_size;
    logic [15:0] y_size;
    logic [31:0] dram_base;
    logic [IDX_W-1:0] sram_base;
    mem_type_t   mem_type;
    dep_t        dep;
    opcode_t     opcode;
  } mem_insn_t;

  typedef struct packed {
    logic [6:0]  rsvd;
    logic [10:0] wgt_fi;
    logic [10:0] wgt_fo;
    logic [10:0] src_fi;
    logic [10:0] src_fo;
    logic [10:0] dst_fi;
    logic [10:0] dst_fo;
    logic [9:0]  iter_in;
    logic [9:0]  iter_out;
    logic [UOP_AW:0]   uop_end;
    logic [UOP_AW-1:0] uop_bgn;
    logic        reset;
    dep_t        dep;
    opcode_t     opcode;
  } gemm_insn_t;

  typedef struct packed {
    logic [8:0]  rsvd;
    logic [15:0] imm;
    logic        use_imm;
    alu_op_t     alu_op;
    logic [10:0] src_fi;
    logic [10:0] src_fo;
    logic [10:0] dst_fi;
    logic [10:0] dst_fo;
    logic [9:0]  iter_in;
    logic [9:0]  iter_out;
    logic [UOP_AW:0]   uop_end;
    logic [UOP_AW-1:0] uop_bgn;
    logic        reset;
    dep_t        dep;
    opcode_t     opcode;
  } alu_insn_t;

  typedef struct packed {
    logic [UOP_BITS-3*IDX_W-1:0] rsvd;
    logic [IDX_W-1:0] wgt;   // weight buffer base index
    logic [IDX_W-1:0] src;   // input buffer (GEMM) or register file (ALU) base index
    logic [IDX_W-1:0] dst;   // register file base index
  } uop_t;

  typedef struct packed {
    logic [INSN_BITS-7-1:0] body;
    dep_t    dep;
    opcode_t opcode;
  } insn_t;

  // Metadata that travels with a VME read request (kept in the VME tag array).
  typedef struct packed {
    logic [2:0]  rsvd;
    logic [7:0]  n_m1;      // wide mode: tensors in the request minus one
    logic [4:0]  off;       // wide mode: tensor slot of the first tensor in the first beat
    logic [15:0] idx;       // destination scratchpad index (or buffer slot)
  } vme_meta_t;

endpackage

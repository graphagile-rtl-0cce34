// ga_pkg: types and constants shared by the GNN overlay accelerator.
//
// Data words are 32-bit signed fixed point with 16 fractional bits (Q16.16).
// The paper states 32-bit data and edge fields but not the number format;
// fixed point is this design's choice. An edge is a COO 3-tuple
// (src, dst, weight) of 32 bits each, as the paper gives it (96-bit edges).
//
// High-level instructions are 128 bits. The order of the fields follows the
// paper's field figure (OPCODE, INFO, buffer IDs, bases, ...); the bit
// positions and widths below are this design's choice:
//   [127:120] OPCODE
//   [119:72]  INFO   ([47:40] of INFO is the mutex lock/unlock mask)
//   [71:64]   buffer ID A      [63:56] buffer ID B
//   [55:40]   base A (16 bit)  [39:16] base B / num_edge (24 bit)
//   [15:0]    output base
//   Memory R/W: DRAM base at [39:8]; CSI: num_of_tiling_block at [119:96].
// Buffer IDs: [7:6] type (0 feature, 1 weight, 2 edge), [1:0] copy.
package ga_pkg;

  localparam int DW   = 32;
  localparam int FRAC = 16;

  typedef logic signed [DW-1:0] word_t;

  typedef struct packed {
    logic [31:0] src;
    logic [31:0] dst;
    word_t       weight;
  } edge_t;                                  // 96 bits

  typedef enum logic [7:0] {
    OP_NOP    = 8'd0,
    OP_CSI    = 8'd1,   // control and scheduling instruction
    OP_MEM_RD = 8'd2,   // DDR -> buffer
    OP_MEM_WR = 8'd3,   // buffer -> DDR
    OP_GEMM   = 8'd4,
    OP_SPDMM  = 8'd5,
    OP_SDDMM  = 8'd6,
    OP_VADD   = 8'd7,
    OP_ACT    = 8'd8,   // post-processing (activation element functions)
    OP_INIT   = 8'd9,   // initialisation of a feature buffer region
    OP_TB_END = 8'd10,  // end of a tiling block
    OP_HALT   = 8'd11   // end of the program
  } opcode_e;

  typedef enum logic [2:0] {
    ALU_PASS, ALU_MUL, ALU_ADD, ALU_MAC, ALU_MIN, ALU_MAX, ALU_RDACC
  } alu_op_e;

  typedef enum logic [1:0] { POST_NONE, POST_RELU, POST_PRELU } post_e;

  typedef enum logic [2:0] {
    MODE_IDLE, MODE_GEMM, MODE_SPDMM, MODE_SDDMM, MODE_VADD
  } ack_mode_e;

  typedef enum logic [1:0] { RED_SUM, RED_MAX, RED_MIN } red_e;

  typedef enum logic [3:0] { ACT_EXP, ACT_SIGMOID, ACT_DIV } act_fn_e;

  typedef enum logic [1:0] { BT_FEAT, BT_WGT, BT_EDGE } buf_type_e;

  // microcode word: how the control signal generator runs an instruction
  typedef enum logic [2:0] {
    SEQ_NONE, SEQ_DMA, SEQ_GEMM, SEQ_EDGE, SEQ_ACT, SEQ_INIT, SEQ_END
  } seq_e;

  typedef struct packed {
    seq_e      seq;        // which sequencer runs it
    ack_mode_e mode;       // ACK mode it needs (MODE_IDLE: none)
    logic      pair;       // edge op sends src and dst indices (2 per edge)
    logic      store;      // DMA direction buffer -> DDR
  } ucode_t;

  // mutex index of a buffer copy: feature 0..2, weight 3..4, edge 5..6
  localparam int NMUTEX = 7;

  function automatic word_t fxmul(word_t a, word_t b);
    logic signed [2*DW-1:0] p;
    p = a * b;
    return word_t'(p >>> FRAC);
  endfunction

  function automatic int unsigned mutex_idx(logic [7:0] id);
    case (id[7:6])
      2'd0:    return 32'(id[1:0]);
      2'd1:    return 32'(3 + id[0]);
      default: return 32'(5 + id[0]);
    endcase
  endfunction

  // instruction field accessors
  function automatic opcode_e  i_op    (logic [127:0] i); return opcode_e'(i[127:120]); endfunction
  function automatic logic [47:0] i_info(logic [127:0] i); return i[119:72]; endfunction
  function automatic logic [7:0]  i_ida (logic [127:0] i); return i[71:64];  endfunction
  function automatic logic [7:0]  i_idb (logic [127:0] i); return i[63:56];  endfunction
  function automatic logic [15:0] i_basea(logic [127:0] i); return i[55:40]; endfunction
  function automatic logic [23:0] i_baseb(logic [127:0] i); return i[39:16]; endfunction
  function automatic logic [15:0] i_obase(logic [127:0] i); return i[15:0];  endfunction
  function automatic logic [31:0] i_dram (logic [127:0] i); return i[39:8];  endfunction
  function automatic logic [7:0]  i_mask (logic [127:0] i); return i[119:112]; endfunction
  function automatic logic [23:0] i_ntb  (logic [127:0] i); return i[119:96]; endfunction

endpackage

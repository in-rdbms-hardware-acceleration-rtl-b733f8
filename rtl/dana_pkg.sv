// dana_pkg: types and constants shared by the access engine (striders) and the
// execution engine (analytic clusters and units).
//
// Follows the paper: 22-bit strider instructions with a 4-bit opcode in bits
// 21..18 and three 6-bit fields (17..12, 11..6, 5..0), opcodes 0..10 in the
// order of the strider ISA table; 8 analytic units per analytic cluster; the
// execution-engine operation set (+ - * / > < sigmoid gaussian sqrt).
// This design's own choices: 32-bit Q16.16 fixed-point data (the paper's
// compiler converts tuples to floating point), the encoding of strider operand
// fields (bit 5 set = register, clear = 5-bit immediate), the analytic-unit
// micro-instruction layout, the configuration-stream header and the register
// numbering.
package dana_pkg;

  // ---------------- numeric format ----------------
  localparam int unsigned DATA_W = 32;   // one feature / model value
  localparam int unsigned FRAC_W = 16;   // Q16.16
  typedef logic signed [DATA_W-1:0] word_t;

  localparam int unsigned BEAT_BYTES = 8;            // stream beat and page-buffer word
  localparam int unsigned BEAT_W     = 8 * BEAT_BYTES;
  typedef logic [BEAT_W-1:0] beat_t;

  // ---------------- strider ISA ----------------
  localparam int unsigned SINST_W = 22;
  typedef enum logic [3:0] {
    S_READB  = 4'd0,   // read bytes from the page buffer into the tuple stage
    S_EXTRB  = 4'd1,   // extract bytes from the stage into a register
    S_WRITEB = 4'd2,   // write stage bytes back into the page buffer
    S_EXTRBI = 4'd3,   // extract bits from the stage
    S_CLN    = 4'd4,   // clean: keep a byte window and send it to the thread
    S_INS    = 4'd5,   // insert constant bytes into the stage
    S_AD     = 4'd6,
    S_SUB    = 4'd7,
    S_MUL    = 4'd8,
    S_BENTR  = 4'd9,   // loop entry
    S_BEXIT  = 4'd10   // loop exit test
  } sop_e;

  typedef struct packed {
    sop_e       op;    // 21..18
    logic [5:0] f1;    // 17..12
    logic [5:0] f2;    // 11..6
    logic [5:0] f3;    // 5..0
  } sinst_t;

  // operand field: bit 5 = register select, bits 3..0 register index,
  // otherwise bits 4..0 are an unsigned immediate
  localparam int unsigned SREG_N = 16;
  localparam logic [3:0] R_PAGE_SIZE   = 4'd0;
  localparam logic [3:0] R_TUPLE_SIZE  = 4'd1;
  localparam logic [3:0] R_TUPLES_PP   = 4'd2;
  localparam logic [3:0] R_NUM_THREADS = 4'd3;
  localparam logic [3:0] R_TUPLE_OFF   = 4'd4;
  localparam logic [3:0] R_BITS        = 4'd15;  // destination of extrBi

  // bexit condition codes (field 17..12)
  localparam logic [5:0] C_EQ = 6'd0;
  localparam logic [5:0] C_GE = 6'd1;
  localparam logic [5:0] C_LT = 6'd2;
  localparam logic [5:0] C_NE = 6'd3;

  function automatic logic [5:0] reg_f(input logic [3:0] r);
    return {2'b10, r};
  endfunction
  function automatic logic [5:0] imm_f(input logic [4:0] v);
    return {1'b0, v};
  endfunction
  function automatic sinst_t sinst(input sop_e op, input logic [5:0] a,
                                   input logic [5:0] b, input logic [5:0] c);
    sinst_t i;
    i.op = op; i.f1 = a; i.f2 = b; i.f3 = c;
    return i;
  endfunction

  // ---------------- execution engine ISA ----------------
  typedef enum logic [3:0] {
    OP_NOP  = 4'd0,
    OP_ADD  = 4'd1,
    OP_SUB  = 4'd2,
    OP_MUL  = 4'd3,
    OP_DIV  = 4'd4,
    OP_GT   = 4'd5,
    OP_LT   = 4'd6,
    OP_SIGM = 4'd7,
    OP_GAUS = 4'd8,
    OP_SQRT = 4'd9,
    OP_MOV  = 4'd10
  } aop_e;

  // cluster-level (selective SIMD) instruction
  typedef struct packed {
    logic       halt;   // end of this program segment
    aop_e       op;
    logic [7:0] mask;   // which of the 8 AUs execute op
  } ac_inst_t;          // 13 bits

  typedef enum logic [1:0] {
    SRC_MEM   = 2'd0,
    SRC_BUS   = 2'd1,   // pop the bus FIFO
    SRC_LEFT  = 2'd2,   // left neighbour's output register
    SRC_RIGHT = 2'd3
  } src_e;

  localparam int unsigned MADDR_W = 11;    // data memory address (2048 words)

  // per-AU micro-instruction, read at the cluster's program counter
  typedef struct packed {
    src_e               s0_type;
    logic [MADDR_W-1:0] s0_addr;
    src_e               s1_type;
    logic [MADDR_W-1:0] s1_addr;
    logic               wr_mem;
    logic [MADDR_W-1:0] d_addr;
    logic               wr_nbr;    // update own neighbour output register
    logic               wr_bus;    // send result on the intra-cluster bus
    logic [2:0]         bus_au;    // destination AU on that bus
    logic               wr_xbus;   // send on the inter-cluster bus (AU0 only)
    logic [2:0]         xbus_ac;   // destination cluster on that bus
  } au_inst_t;                     // 4+33+1+1+1+3+1+3 = 47 bits

  typedef enum logic [1:0] {
    M_ADD = 2'd0, M_MUL = 2'd1, M_MAX = 2'd2, M_MIN = 2'd3
  } mop_e;

  // ---------------- configuration stream ----------------
  // A configuration packet starts with a header beat, followed by `count`
  // payload beats written to consecutive addresses from `addr`.
  typedef enum logic [2:0] {
    CD_STRIDER_IMEM = 3'd0,  // all striders (same program)
    CD_STRIDER_REG  = 3'd1,  // strider control registers
    CD_AC_IMEM      = 3'd2,  // cluster `ac` of every thread
    CD_AU_IMEM      = 3'd3,  // AU `au` of cluster `ac` of every thread
    CD_AU_DMEM      = 3'd4,  // data memory of AU `au` of cluster `ac`, every thread
    CD_CTRL_REG     = 3'd5   // execution-engine control registers
  } cdest_e;

  typedef struct packed {
    logic [63-3-8-8-16-16:0] rsvd;
    cdest_e      dest;
    logic [7:0]  ac;
    logic [7:0]  au;
    logic [15:0] addr;
    logic [15:0] count;
  } cfg_hdr_t;

  // strider control registers (CD_STRIDER_REG)
  localparam logic [15:0] SR_PROG_LEN  = 16'd0;  // instructions in the strider program
  localparam logic [15:0] SR_INS_CONST = 16'd1;  // byte used by ins
  localparam logic [15:0] SR_THREADS   = 16'd2;  // page buffers/striders in use

  // execution-engine control registers (CD_CTRL_REG)
  localparam logic [15:0] XR_SEG_UPDATE = 16'd0;  // cluster PC of the update rule
  localparam logic [15:0] XR_SEG_POST   = 16'd1;  // cluster PC of the post-merge code
  localparam logic [15:0] XR_MERGE_SRC  = 16'd2;
  localparam logic [15:0] XR_MERGE_DST  = 16'd3;
  localparam logic [15:0] XR_MERGE_LEN  = 16'd4;
  localparam logic [15:0] XR_MERGE_OP   = 16'd5;
  localparam logic [15:0] XR_TUPLES     = 16'd6;  // tuples per epoch
  localparam logic [15:0] XR_EPOCHS     = 16'd7;
  localparam logic [15:0] XR_CONV_ADDR  = 16'd8;  // AU0 of cluster 0, thread 0
  localparam logic [15:0] XR_CONV_EN    = 16'd9;
  localparam logic [15:0] XR_IN_BASE    = 16'd10; // data-memory address of tuple word 0
  localparam logic [15:0] XR_START      = 16'd11; // write to start training
  localparam logic [15:0] XR_THREADS    = 16'd12; // threads in use (= page buffers in use)

  // ---------------- fixed-point helpers ----------------
  function automatic word_t q_mul(input word_t a, input word_t b);
    logic signed [2*DATA_W-1:0] p;
    p = a * b;
    return word_t'(p >>> FRAC_W);
  endfunction

endpackage

// analytic_unit (AU): the compute element of the execution engine.
//
// An AU holds a data memory (training data, model and intermediate values),
// a bus-data FIFO, an instruction buffer of per-unit micro-instructions, an
// ALU and an output register that its left and right neighbours can read.
// The cluster controller decides *whether* the unit works and *which
// operation* it performs (selective SIMD); the unit's own micro-instruction,
// read at the cluster's program counter, decides *where the operands come
// from* (data memory, bus FIFO, left or right neighbour) and *where the
// result goes* (data memory, own neighbour register, intra-cluster bus to one
// unit, inter-cluster bus to another cluster).
//
// Timing of one instruction (issue pulse, then 3 cycles):
//   RD  memory addresses presented (synchronous read),
//   EX  operands selected, ALU result registered; waits here while a bus
//       operand is needed and the FIFO is empty (a stall),
//   WB  memory/neighbour write, bus send, `done` pulse.
// Neighbour registers are read in EX and written in WB, so every unit of a
// cluster sees the values of the previous instruction. If both operands name
// the bus, both get the same (single) popped word.
//
// The external port (`ext_*`) reaches the data memory while the unit is idle;
// the thread uses it to load tuple words and the execution engine to read and
// write merge data. Paper: Fig. 11 structure (left/right, bus FIFO,
// instruction buffer, data memory, ALU, control from the cluster); the
// three-step timing and micro-instruction format are this design's.
module analytic_unit
  import dana_pkg::*;
#(
  parameter int unsigned DMEM_DEPTH = 2048,
  parameter int unsigned IMEM_DEPTH = 256,
  parameter int unsigned FIFO_DEPTH = 8,
  localparam int unsigned IAW       = $clog2(IMEM_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  // micro-instruction buffer load
  input  logic               ui_we,
  input  logic [IAW-1:0]     ui_addr,
  input  au_inst_t           ui_wdata,
  // external data-memory port (idle only)
  input  logic               ext_we,
  input  logic               ext_re,
  input  logic [MADDR_W-1:0] ext_addr,
  input  word_t              ext_wdata,
  output word_t              ext_rdata,
  // control from the cluster
  input  logic               issue,
  input  aop_e               op,
  input  logic [IAW-1:0]     pc,
  output logic               done,
  output logic               busy,
  output logic               stall,
  // neighbours
  input  word_t              left_in,
  input  word_t              right_in,
  output word_t              nbr_out,
  // bus input (into the FIFO)
  input  logic               bus_push,
  input  word_t              bus_wdata,
  // bus outputs
  output logic               bus_send,
  output logic [2:0]         bus_au,
  output logic               xbus_send,
  output logic [2:0]         xbus_ac,
  output word_t              res_out
);
  typedef enum logic [1:0] {U_IDLE, U_RD, U_EX, U_WB} ust_e;
  ust_e st;

  au_inst_t  imem [IMEM_DEPTH];
  word_t     dmem [DMEM_DEPTH];
  au_inst_t  ui;
  aop_e      op_q;
  logic [IAW-1:0] pc_q;
  word_t     rd0, rd1, res_q;
  word_t     opa, opb, alu_y;
  word_t     fifo_q;
  logic      fifo_empty, fifo_full, fifo_pop, need_bus;

  always_ff @(posedge clk) if (ui_we) imem[ui_addr] <= ui_wdata;
  assign ui = imem[pc_q];

  // data memory: two synchronous read ports, one write port
  logic               we;
  logic [MADDR_W-1:0] waddr, raddr0;
  word_t              wdata;
  always_comb begin
    we     = ext_we && (st == U_IDLE);
    waddr  = ext_addr;
    wdata  = ext_wdata;
    raddr0 = (st == U_IDLE) ? ext_addr : ui.s0_addr;
    if (st == U_WB && ui.wr_mem) begin
      we = 1'b1; waddr = ui.d_addr; wdata = res_q;
    end
  end
  always_ff @(posedge clk) begin
    if (we) dmem[waddr] <= wdata;
    if (st == U_RD || (st == U_IDLE && ext_re)) rd0 <= dmem[raddr0];
    if (st == U_RD) rd1 <= dmem[ui.s1_addr];
  end
  assign ext_rdata = rd0;

  bus_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .push(bus_push), .wdata(bus_wdata), .pop(fifo_pop),
    .rdata(fifo_q), .empty(fifo_empty), .full(fifo_full)
  );

  function automatic word_t pick(input src_e t, input word_t m, input word_t f,
                                 input word_t l, input word_t r);
    unique case (t)
      SRC_MEM:  return m;
      SRC_BUS:  return f;
      SRC_LEFT: return l;
      default:  return r;
    endcase
  endfunction

  assign need_bus = (ui.s0_type == SRC_BUS) || (ui.s1_type == SRC_BUS);
  assign opa      = pick(ui.s0_type, rd0, fifo_q, left_in, right_in);
  assign opb      = pick(ui.s1_type, rd1, fifo_q, left_in, right_in);
  assign fifo_pop = (st == U_EX) && need_bus && !fifo_empty;
  assign stall    = (st == U_EX) && need_bus && fifo_empty;

  au_alu u_alu (.op(op_q), .a(opa), .b(opb), .y(alu_y));

  assign busy      = (st != U_IDLE);
  assign done      = (st == U_WB);
  assign bus_send  = (st == U_WB) && ui.wr_bus;
  assign bus_au    = ui.bus_au;
  assign xbus_send = (st == U_WB) && ui.wr_xbus;
  assign xbus_ac   = ui.xbus_ac;
  assign res_out   = res_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= U_IDLE; op_q <= OP_NOP; pc_q <= '0; res_q <= '0; nbr_out <= '0;
    end else begin
      unique case (st)
        U_IDLE: if (issue) begin
          op_q <= op; pc_q <= pc; st <= U_RD;
        end
        U_RD: st <= U_EX;
        U_EX: if (!stall) begin
          res_q <= alu_y; st <= U_WB;
        end
        U_WB: begin
          if (ui.wr_nbr) nbr_out <= res_q;
          st <= U_IDLE;
        end
        default: st <= U_IDLE;
      endcase
    end
  end

  a_issue_when_idle: assert property (@(posedge clk) disable iff (!rst_n) issue |-> st == U_IDLE);
endmodule

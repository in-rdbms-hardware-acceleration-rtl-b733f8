// analytic_cluster (AC): eight analytic units run by one controller in
// selective-SIMD mode.
//
// Compute controller: a program counter and the selective-SIMD instruction
// buffer. Each cluster instruction (dana_pkg::ac_inst_t) names one operation
// and an 8-bit mask of the units that perform it; the others do nothing.
// The controller issues the instruction to the masked units, waits until all
// of them report done, then advances the PC. An instruction with `halt` set
// ends the program segment started by `start`/`start_pc`.
//
// Communication controller: the units form a line; unit i reads the output
// registers of unit i+1 (its left, as drawn AU7..AU0) and unit i-1 (its
// right), and the ends read 0. One shared intra-cluster bus carries at most
// one word per cycle from a sending unit to the bus FIFO of the unit it names
// (lowest-numbered sender wins; two senders in a cycle is a schedule error,
// caught by an assertion). Unit 0 connects the cluster to the inter-cluster
// bus of its thread: it sends with `xout_*` and receives `xin_*` into its
// FIFO.
//
// Paper: 8 AUs per AC, selective SIMD, PC and instruction buffer, neighbour
// links, shared line bus, unit 0 at the inter-cluster bus (Fig. 10).
// Own: instruction format, the issue/wait protocol and bus priority.
module analytic_cluster
  import dana_pkg::*;
#(
  parameter int unsigned NAU        = 8,
  parameter int unsigned DMEM_DEPTH = 2048,
  parameter int unsigned IMEM_DEPTH = 256,
  parameter int unsigned FIFO_DEPTH = 8,
  localparam int unsigned IAW       = $clog2(IMEM_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  // program load
  input  logic               ci_we,
  input  logic [IAW-1:0]     ci_addr,
  input  ac_inst_t           ci_wdata,
  input  logic [NAU-1:0]     ui_we,
  input  logic [IAW-1:0]     ui_addr,
  input  au_inst_t           ui_wdata,
  // external data-memory port, one enable per unit
  input  logic [NAU-1:0]     ext_we,
  input  logic               ext_re,
  input  logic [MADDR_W-1:0] ext_addr,
  input  word_t              ext_wdata [NAU],
  output word_t              ext_rdata [NAU],
  // run control
  input  logic               start,
  input  logic [IAW-1:0]     start_pc,
  output logic               busy,
  output logic               done,
  output logic               stall,
  // inter-cluster bus
  input  logic               xin_valid,
  input  word_t              xin_data,
  output logic               xout_valid,
  output logic [2:0]         xout_ac,
  output word_t              xout_data
);
  typedef enum logic [1:0] {C_IDLE, C_ISSUE, C_WAIT} cst_e;
  cst_e st;

  ac_inst_t       imem [IMEM_DEPTH];
  logic [IAW-1:0] pc;
  ac_inst_t       ci;
  logic [NAU-1:0] pend, issue_v, au_done, au_busy, au_stall, bus_send, push;
  logic [2:0]     bus_au [NAU];
  logic [NAU-1:0] xsend;
  logic [2:0]     xac [NAU];
  word_t          res [NAU], nbr [NAU], push_data [NAU];
  word_t          bus_word;
  logic           bus_any;
  logic [2:0]     bus_dst;

  always_ff @(posedge clk) if (ci_we) imem[ci_addr] <= ci_wdata;
  assign ci = imem[pc];

  assign issue_v = (st == C_ISSUE && !ci.halt && ci.op != OP_NOP) ? ci.mask[NAU-1:0] : '0;
  assign busy    = (st != C_IDLE);
  assign stall   = |au_stall;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; pc <= '0; pend <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        C_IDLE: if (start) begin
          pc <= start_pc; st <= C_ISSUE;
        end
        C_ISSUE: begin
          if (ci.halt) begin
            st <= C_IDLE; done <= 1'b1;
          end else if (issue_v == '0) begin
            pc <= pc + 1'b1;
          end else begin
            pend <= issue_v; st <= C_WAIT;
          end
        end
        C_WAIT: begin
          if ((pend & ~au_done) == '0) begin
            pend <= '0; pc <= pc + 1'b1; st <= C_ISSUE;
          end else begin
            pend <= pend & ~au_done;
          end
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  // ---------------- communication controller ----------------
  always_comb begin
    bus_any  = 1'b0;
    bus_word = '0;
    bus_dst  = '0;
    for (int i = NAU - 1; i >= 0; i--) begin
      if (bus_send[i]) begin
        bus_any = 1'b1; bus_word = res[i]; bus_dst = bus_au[i];
      end
    end
    for (int i = 0; i < NAU; i++) begin
      push[i]      = bus_any && (32'(bus_dst) == i);
      push_data[i] = bus_word;
    end
    if (xin_valid) begin
      push[0]      = 1'b1;
      push_data[0] = xin_data;
    end
  end

  assign xout_valid = xsend[0];
  assign xout_ac    = xac[0];
  assign xout_data  = res[0];

  for (genvar i = 0; i < NAU; i++) begin : g_au
    analytic_unit #(.DMEM_DEPTH(DMEM_DEPTH), .IMEM_DEPTH(IMEM_DEPTH), .FIFO_DEPTH(FIFO_DEPTH)) u_au (
      .clk, .rst_n,
      .ui_we(ui_we[i]), .ui_addr, .ui_wdata,
      .ext_we(ext_we[i]), .ext_re, .ext_addr, .ext_wdata(ext_wdata[i]), .ext_rdata(ext_rdata[i]),
      .issue(issue_v[i]), .op(ci.op), .pc,
      .done(au_done[i]), .busy(au_busy[i]), .stall(au_stall[i]),
      .left_in ((i == NAU - 1) ? '0 : nbr[(i + 1) % NAU]),
      .right_in((i == 0)       ? '0 : nbr[(i + NAU - 1) % NAU]),
      .nbr_out(nbr[i]),
      .bus_push(push[i]), .bus_wdata(push_data[i]),
      .bus_send(bus_send[i]), .bus_au(bus_au[i]),
      .xbus_send(xsend[i]), .xbus_ac(xac[i]), .res_out(res[i])
    );
  end

  a_one_bus_sender: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(bus_send));
  a_no_au0_collision: assert property (@(posedge clk) disable iff (!rst_n)
    !(xin_valid && bus_any && bus_dst == 3'd0));
  a_xbus_au0_only: assert property (@(posedge clk) disable iff (!rst_n) (xsend & ~NAU'(1)) == '0);
endmodule

// tb_analytic_unit: self-checking test of one analytic unit with small
// memories. The testbench loads random data through the external port and
// random micro-instructions (memory, neighbour and bus operands; memory,
// neighbour and bus destinations), issues them with random ALU operations
// and checks: the result written to data memory (read back through the
// external port), the neighbour register, the bus-send flags, the
// issue-to-done time of 3 cycles without a stall, and that a bus operand
// with an empty FIFO stalls until a word is pushed (stall cycles counted).
module tb_analytic_unit;
  import dana_pkg::*;
  localparam int DM = 64, IM = 16;
  logic clk = 0, rst_n = 0;
  logic ui_we, ext_we, ext_re, issue, done, busy, stall, bus_push, bus_send, xbus_send;
  logic [3:0] ui_addr, pc;
  au_inst_t ui_wdata;
  logic [MADDR_W-1:0] ext_addr;
  word_t ext_wdata, ext_rdata, left_in, right_in, nbr_out, bus_wdata, res_out;
  aop_e op;
  logic [2:0] bus_au, xbus_ac;
  int checks = 0, failures = 0, stalls = 0, cyc = 0;
  word_t dm [DM];
  word_t nbr_ref;

  analytic_unit #(.DMEM_DEPTH(DM), .IMEM_DEPTH(IM), .FIFO_DEPTH(4)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (stall) stalls++;
  initial begin #2000000; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic word_t alu_ref(input aop_e o, input word_t a, input word_t b);
    longint p;
    case (o)
      OP_ADD: return a + b;
      OP_SUB: return a - b;
      OP_MUL: begin p = (longint'(a) * longint'(b)) >>> 16; return word_t'(p); end
      OP_GT:  return (a > b) ? 32'sh10000 : 0;
      OP_LT:  return (a < b) ? 32'sh10000 : 0;
      OP_MOV: return a;
      default: return 0;
    endcase
  endfunction

  task automatic ext_write(input int a, input word_t v);
    @(negedge clk); ext_we = 1; ext_addr = MADDR_W'(a); ext_wdata = v;
    @(negedge clk); ext_we = 0;
  endtask
  task automatic ext_read(input int a, output word_t v);
    @(negedge clk); ext_re = 1; ext_addr = MADDR_W'(a);
    @(negedge clk); ext_re = 0; v = ext_rdata;
  endtask

  initial begin
    ui_we = 0; ext_we = 0; ext_re = 0; issue = 0; bus_push = 0; ui_addr = 0; pc = 0;
    ui_wdata = '0; ext_addr = 0; ext_wdata = 0; bus_wdata = 0; op = OP_NOP;
    left_in = 0; right_in = 0; nbr_ref = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < DM; i++) begin dm[i] = word_t'($signed($urandom) >>> 10); ext_write(i, dm[i]); end
    for (int i = 0; i < DM; i++) begin
      automatic word_t v;
      ext_read(i, v); check(v == dm[i], "external read-back");
    end
    for (int k = 0; k < 400; k++) begin
      automatic au_inst_t u = '0;
      automatic word_t a, b, bus_v, e, v;
      automatic int t_issue, t_done, delay;
      automatic bit uses_bus;
      u.s0_type = src_e'($urandom_range(0, 3));
      u.s1_type = src_e'($urandom_range(0, 3));
      u.s0_addr = MADDR_W'($urandom_range(0, DM - 1));
      u.s1_addr = MADDR_W'($urandom_range(0, DM - 1));
      u.d_addr  = MADDR_W'($urandom_range(0, DM - 1));
      u.wr_mem  = 1;
      u.wr_nbr  = $urandom_range(0, 1);
      u.wr_bus  = $urandom_range(0, 1);
      u.bus_au  = 3'($urandom);
      u.wr_xbus = $urandom_range(0, 1);
      u.xbus_ac = 3'($urandom);
      left_in  = word_t'($signed($urandom) >>> 10);
      right_in = word_t'($signed($urandom) >>> 10);
      bus_v    = word_t'($signed($urandom) >>> 10);
      uses_bus = (u.s0_type == SRC_BUS) || (u.s1_type == SRC_BUS);
      op = aop_e'($urandom_range(1, 6) == 4 ? 10 : $urandom_range(1, 6));
      if (op == OP_DIV) op = OP_MOV;
      a = (u.s0_type == SRC_MEM) ? dm[u.s0_addr] : (u.s0_type == SRC_BUS) ? bus_v :
          (u.s0_type == SRC_LEFT) ? left_in : right_in;
      b = (u.s1_type == SRC_MEM) ? dm[u.s1_addr] : (u.s1_type == SRC_BUS) ? bus_v :
          (u.s1_type == SRC_LEFT) ? left_in : right_in;
      e = alu_ref(op, a, b);
      @(negedge clk); ui_we = 1; ui_addr = 4'(k % IM); ui_wdata = u;
      @(negedge clk); ui_we = 0;
      // push the bus word either before issue or after a random delay
      delay = uses_bus ? $urandom_range(0, 6) : -1;
      if (delay == 0) begin bus_push = 1; bus_wdata = bus_v; @(negedge clk); bus_push = 0; end
      issue = 1; pc = 4'(k % IM); t_issue = cyc;
      @(negedge clk); issue = 0;
      for (int c = 1; !done; c++) begin
        if (c == delay) begin bus_push = 1; bus_wdata = bus_v; end
        @(negedge clk); bus_push = 0;
        if (c > 50) break;
      end
      t_done = cyc;
      check(done, "done seen");
      if (!uses_bus || delay == 0) check(t_done - t_issue == 3, $sformatf("issue-to-done %0d cycles", t_done - t_issue));
      else check(t_done - t_issue >= 3 + delay - 2, "stalled for the bus word");
      check(bus_send == u.wr_bus && xbus_send == u.wr_xbus, "bus send flags");
      check(bus_au == u.bus_au && xbus_ac == u.xbus_ac, "bus destinations");
      check(res_out == e, $sformatf("result %h vs %h (op %0d)", res_out, e, op));
      @(negedge clk);
      if (u.wr_nbr) nbr_ref = e;
      check(nbr_out == nbr_ref, "neighbour register");
      dm[u.d_addr] = e;
      ext_read(int'(u.d_addr), v);
      check(v == e, "result in data memory");
    end
    check(stalls > 0, "bus stalls happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

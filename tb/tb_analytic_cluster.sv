// tb_analytic_cluster: self-checking test of one analytic cluster (8 units,
// small memories). Each unit i holds x_i (address 0) and w_i (address 1).
// Program segment A:
//   PC0      MUL all units: p_i = x_i*w_i -> mem 2 and the neighbour register
//   PC1..7   MOV unit i alone, sends p_i on the intra-cluster bus to unit 0
//   PC8..14  ADD unit 0 alone: mem2 += bus word  (unit 0 ends with sum p_i)
//   PC15     ADD all units: left + right neighbour -> mem 3
//   PC16     SUB only units in mask A5: x_i - w_i -> mem 4 (others untouched)
//   PC17     halt
// Segment B (started at PC18): unit 0 adds a word from the inter-cluster
// bus, delivered late so the unit stalls, then sends its sum on the
// inter-cluster bus to cluster 3, then halts.
// Checks all results against values computed here, the selective-SIMD mask,
// that segment A takes 4 cycles per instruction plus 2 (start to done), and
// that segment B stalled.
module tb_analytic_cluster;
  import dana_pkg::*;
  localparam int NAU = 8, DM = 32, IM = 32;
  logic clk = 0, rst_n = 0;
  logic ci_we, ext_re, start, busy, done, stall, xin_valid, xout_valid;
  logic [4:0] ci_addr, ui_addr, start_pc;
  ac_inst_t ci_wdata;
  logic [NAU-1:0] ui_we, ext_we;
  au_inst_t ui_wdata;
  logic [MADDR_W-1:0] ext_addr;
  word_t ext_wdata [NAU], ext_rdata [NAU];
  word_t xin_data, xout_data;
  logic [2:0] xout_ac;
  int checks = 0, failures = 0, cyc = 0, stalls = 0, xouts = 0;
  word_t x [NAU], w [NAU], p [NAU], m4 [NAU];
  word_t xout_seen;

  analytic_cluster #(.NAU(NAU), .DMEM_DEPTH(DM), .IMEM_DEPTH(IM), .FIFO_DEPTH(8)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (stall) stalls++;
  always @(posedge clk) if (xout_valid) begin xouts++; xout_seen = xout_data; check(xout_ac == 3'd3, "xout destination"); end
  initial begin #2000000; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic au_inst_t ai(input src_e t0, input int a0, input src_e t1, input int a1,
                                  input bit wm, input int d, input bit nb = 0, input bit wb = 0,
                                  input int bau = 0, input bit xb = 0, input int xac = 0);
    au_inst_t u;
    u.s0_type = t0; u.s0_addr = MADDR_W'(a0); u.s1_type = t1; u.s1_addr = MADDR_W'(a1);
    u.wr_mem = wm; u.d_addr = MADDR_W'(d); u.wr_nbr = nb; u.wr_bus = wb; u.bus_au = 3'(bau);
    u.wr_xbus = xb; u.xbus_ac = 3'(xac);
    return u;
  endfunction

  task automatic ld_ac(input int a, input bit h, input aop_e o, input logic [7:0] m);
    @(negedge clk); ci_we = 1; ci_addr = 5'(a); ci_wdata.halt = h; ci_wdata.op = o; ci_wdata.mask = m;
    @(negedge clk); ci_we = 0;
  endtask
  task automatic ld_au(input int u, input int a, input au_inst_t v);
    @(negedge clk); ui_we = '0; ui_we[u] = 1; ui_addr = 5'(a); ui_wdata = v;
    @(negedge clk); ui_we = '0;
  endtask
  task automatic run(input int pc, output int cycles);
    automatic int t0;
    @(negedge clk); start = 1; start_pc = 5'(pc); t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    cycles = cyc - t0;
  endtask

  initial begin
    automatic int cyc_a, cyc_b;
    automatic word_t sum = 0, xin_v;
    ci_we = 0; ext_re = 0; start = 0; xin_valid = 0; ci_addr = 0; ui_addr = 0; start_pc = 0;
    ci_wdata = '0; ui_we = '0; ext_we = '0; ui_wdata = '0; ext_addr = 0; xin_data = 0;
    for (int i = 0; i < NAU; i++) ext_wdata[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // data
    for (int i = 0; i < NAU; i++) begin
      x[i] = word_t'($signed($urandom) >>> 12); w[i] = word_t'($signed($urandom) >>> 12);
      p[i] = word_t'((longint'(x[i]) * longint'(w[i])) >>> 16); sum += p[i];
      m4[i] = word_t'($urandom);
    end
    for (int a = 0; a < 5; a++) begin
      @(negedge clk); ext_we = '1; ext_addr = MADDR_W'(a);
      for (int i = 0; i < NAU; i++) ext_wdata[i] = (a == 0) ? x[i] : (a == 1) ? w[i] : (a == 4) ? m4[i] : 0;
    end
    @(negedge clk); ext_we = '0;
    // segment A
    ld_ac(0, 0, OP_MUL, 8'hFF);
    for (int i = 0; i < NAU; i++) ld_au(i, 0, ai(SRC_MEM, 0, SRC_MEM, 1, 1, 2, 1));
    for (int i = 1; i < NAU; i++) begin
      ld_ac(i, 0, OP_MOV, 8'(1 << i));
      ld_au(i, i, ai(SRC_MEM, 2, SRC_MEM, 2, 0, 0, 0, 1, 0));
    end
    for (int k = 8; k < 15; k++) begin
      ld_ac(k, 0, OP_ADD, 8'h01);
      ld_au(0, k, ai(SRC_MEM, 2, SRC_BUS, 0, 1, 2));
    end
    ld_ac(15, 0, OP_ADD, 8'hFF);
    for (int i = 0; i < NAU; i++) ld_au(i, 15, ai(SRC_LEFT, 0, SRC_RIGHT, 0, 1, 3));
    ld_ac(16, 0, OP_SUB, 8'hA5);
    for (int i = 0; i < NAU; i++) ld_au(i, 16, ai(SRC_MEM, 0, SRC_MEM, 1, 1, 4));
    ld_ac(17, 1, OP_NOP, 8'h00);
    // segment B
    ld_ac(18, 0, OP_ADD, 8'h01);
    ld_au(0, 18, ai(SRC_BUS, 0, SRC_MEM, 2, 1, 5));
    ld_ac(19, 0, OP_MOV, 8'h01);
    ld_au(0, 19, ai(SRC_MEM, 5, SRC_MEM, 5, 0, 0, 0, 0, 0, 1, 3));
    ld_ac(20, 1, OP_NOP, 8'h00);

    run(0, cyc_a);
    check(cyc_a == 4 * 17 + 2, $sformatf("segment A took %0d cycles", cyc_a));
    check(stalls == 0, "no stall in segment A");
    @(negedge clk); ext_re = 1;
    for (int a = 2; a < 5; a++) begin
      ext_addr = MADDR_W'(a);
      @(negedge clk);
      for (int i = 0; i < NAU; i++) begin
        automatic word_t e;
        case (a)
          2: e = (i == 0) ? sum : p[i];
          3: e = ((i == NAU - 1) ? 0 : p[i + 1]) + ((i == 0) ? 0 : p[i - 1]);
          default: e = (8'hA5 >> i) & 1 ? x[i] - w[i] : m4[i];
        endcase
        check(ext_rdata[i] == e, $sformatf("unit %0d addr %0d: %h vs %h", i, a, ext_rdata[i], e));
      end
    end
    ext_re = 0;
    // segment B with a late inter-cluster word
    xin_v = word_t'($urandom) >>> 8;
    fork
      run(18, cyc_b);
      begin repeat (9) @(negedge clk); xin_valid = 1; xin_data = xin_v; @(negedge clk); xin_valid = 0; end
    join
    check(stalls > 0, "unit stalled on the empty bus FIFO");
    check(xouts == 1, "one inter-cluster send");
    check(xout_seen == sum + xin_v, "inter-cluster send data");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

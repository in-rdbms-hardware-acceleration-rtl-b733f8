// tb_dana_top: end-to-end, full-size test of the accelerator at its default
// parameters (4 threads of 2 clusters, 32 KB pages, 2048-word unit memories).
//
// Workload: linear regression trained with batched gradient descent. Each
// tuple holds the label y and 15 features (16 Q16.16 words; word 0 = y lands
// in lane 0, feature l in lane l). The host side of the testbench streams:
//   * the strider program (tuple walk over the page format: header fields,
//     tuple size from the first tuple pointer, bentr/bexit loop reading each
//     tuple and cleaning away its 8-byte tuple header) and its registers,
//   * the cluster and unit programs of the update rule and the post-merge
//     step, the initial model, learning rate and tolerance, the control
//     registers, then START,
//   * the pages (random tuple counts, random first-byte offsets), once per
//     epoch.
// Update rule (segment at PC 0, same in every thread): products x_l*w_l,
// per-cluster sum along the neighbour chain, cluster 1's partial sum over
// the inter-cluster bus, error e = dot - y, e*lr sent back to cluster 1 and
// passed along the neighbour chain, gradient g_l = e*lr*x_l. Merge: g summed
// over the threads of the round by the merge tree. Post-merge segment: model
// update w_l -= G_l (lane 0 masked off, selective SIMD), convergence
// variable (G_0^2 < tolerance) in unit 0.
//
// Reference: the testbench watches the tuple words entering each thread and
// the threads taking part in each round, and recomputes the model with the
// same fixed-point arithmetic; the final model read back must match exactly.
// Run 1: 2 epochs, convergence never met. Run 2: tolerance raised so the
// convergence variable stops training after 1 of 3 epochs.
// Mechanism counts, each must be non-zero: unit stalls (bus wait), partial
// rounds, merges (one per round), epochs, misaligned packets, page stalls
// (all buffers busy), tuple stalls (thread busy), convergence.
module tb_dana_top;
  import dana_pkg::*;
  localparam int NT = 4, LANES = 16, PB = 32768, F = 16, TSZ = 8 + 4 * F;
  localparam int NPAGES = 6;
  logic clk = 0, rst_n = 0;
  logic s_valid, s_ready, s_first, s_last, s_is_cfg, mr_re;
  beat_t s_data;
  logic [2:0] s_off;
  logic [MADDR_W-1:0] mr_addr;
  word_t mr_data [LANES];
  logic running, train_done, converged, page_stall;
  logic [31:0] pages_done, epochs_done, rounds, partial_rounds, merges, stall_cycles, tuple_stall_cycles;
  int checks = 0, failures = 0, misaligned = 0, page_stalls = 0, cyc = 0;

  dana_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin #200000000; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- reference model ----------------
  word_t w [LANES];
  logic [F-1:0][31:0] tq [NT][$];    // tuples received per thread
  logic [F-1:0][31:0] cur [NT];
  int    wi [NT];
  logic [31:0] last_rounds = 0;
  word_t lr;
  int model_rounds = 0;

  function automatic word_t qm(input word_t a, input word_t b);
    longint p = longint'(a) * longint'(b);
    return word_t'(p >>> 16);
  endfunction

  always @(negedge clk) if (rst_n) begin
    if (page_stall) page_stalls++;
    for (int t = 0; t < NT; t++) if (dut.t_valid[t] && dut.t_ready[t]) begin
      cur[t][wi[t]] = dut.t_data[t];
      wi[t]++;
      if (dut.t_last[t]) begin
        check(wi[t] == F, "tuple length at the thread");
        tq[t].push_back(cur[t]); wi[t] = 0;
      end
    end
    if (rounds != last_rounds) begin
      automatic logic [NT-1:0] part = dut.u_exec.part;
      automatic word_t g [LANES];
      last_rounds = rounds;
      model_rounds++;
      for (int l = 0; l < LANES; l++) g[l] = 0;
      for (int t = 0; t < NT; t++) if (part[t]) begin
        automatic logic [F-1:0][31:0] x;
        automatic word_t dot = 0, e;
        if (tq[t].size() == 0) begin check(0, "round uses a thread without a tuple"); continue; end
        x = tq[t].pop_front();
        for (int l = 0; l < LANES; l++) dot += qm(word_t'(x[l]), w[l]);
        e = qm(dot - word_t'(x[0]), lr);
        for (int l = 0; l < LANES; l++) g[l] += qm(e, word_t'(x[l]));
      end
      for (int l = 1; l < LANES; l++) w[l] -= g[l];
    end
  end

  // ---------------- host stream ----------------
  task automatic send_packet(input logic [7:0] bytes [$], input bit is_cfg);
    automatic int off = $urandom_range(0, 7);
    automatic logic [7:0] raw [$];
    automatic int nb;
    if (off != 0) misaligned++;
    for (int i = 0; i < off; i++) raw.push_back(8'($urandom));
    foreach (bytes[i]) raw.push_back(bytes[i]);
    while (raw.size() % 8 != 0) raw.push_back(8'($urandom));
    nb = raw.size() / 8;
    for (int k = 0; k < nb; k++) begin
      automatic bit hs;
      s_valid = 1; s_first = (k == 0); s_last = (k == nb - 1); s_off = 3'(off); s_is_cfg = is_cfg;
      for (int b = 0; b < 8; b++) s_data[8*b +: 8] = raw[8*k + b];
      do begin @(negedge clk); hs = s_ready; @(posedge clk); #1; end while (!hs);
      s_valid = 0;
    end
  endtask

  task automatic send_cfg(input cdest_e d, input int ac, input int au, input int addr,
                          input logic [63:0] words [$]);
    automatic cfg_hdr_t h = '0;
    automatic logic [7:0] bytes [$];
    h.dest = d; h.ac = 8'(ac); h.au = 8'(au); h.addr = 16'(addr); h.count = 16'(words.size());
    for (int b = 0; b < 8; b++) bytes.push_back(h[8*b +: 8]);
    foreach (words[i]) for (int b = 0; b < 8; b++) bytes.push_back(words[i][8*b +: 8]);
    send_packet(bytes, 1);
  endtask

  task automatic ctrl(input logic [15:0] r, input logic [63:0] v);
    send_cfg(CD_CTRL_REG, 0, 0, int'(r), '{v});
  endtask

  // ---------------- programs ----------------
  ac_inst_t acp [2][$];          // cluster programs
  au_inst_t aup [2][8][$];       // unit programs

  function automatic au_inst_t ai(input src_e t0, input int a0, input src_e t1, input int a1,
                                  input bit wm, input int d, input bit nb = 0,
                                  input bit xb = 0, input int xac = 0);
    au_inst_t u;
    u.s0_type = t0; u.s0_addr = MADDR_W'(a0); u.s1_type = t1; u.s1_addr = MADDR_W'(a1);
    u.wr_mem = wm; u.d_addr = MADDR_W'(d); u.wr_nbr = nb; u.wr_bus = 0; u.bus_au = 0;
    u.wr_xbus = xb; u.xbus_ac = 3'(xac);
    return u;
  endfunction

  // append one instruction to cluster a: op, mask, and the unit instruction
  // for every unit (units outside the mask get it too; it is not executed)
  function automatic void emit(input int a, input bit halt, input aop_e o, input logic [7:0] m,
                               input au_inst_t u);
    ac_inst_t c;
    c.halt = halt; c.op = o; c.mask = m;
    acp[a].push_back(c);
    for (int i = 0; i < 8; i++) aup[a][i].push_back(u);
  endfunction

  localparam int SEG_POST = 20;
  function automatic void build_programs();
    au_inst_t nop = '0;
    for (int a = 0; a < 2; a++) begin
      emit(a, 0, OP_MUL, 8'hFF, ai(SRC_MEM, 0, SRC_MEM, 1, 1, 2, 1));             // pc0
      for (int k = 1; k <= 7; k++)                                                // pc1..7
        emit(a, 0, OP_ADD, 8'hFF, ai(SRC_MEM, 2, SRC_LEFT, 0, k == 7, 3, 1));
    end
    emit(0, 0, OP_ADD, 8'h01, ai(SRC_MEM, 3, SRC_BUS, 0, 1, 4));                  // pc8
    emit(1, 0, OP_MOV, 8'h01, ai(SRC_MEM, 3, SRC_MEM, 3, 0, 0, 0, 1, 0));
    emit(0, 0, OP_SUB, 8'h01, ai(SRC_MEM, 4, SRC_MEM, 0, 1, 5));                  // pc9
    emit(1, 0, OP_NOP, 8'h00, nop);
    emit(0, 0, OP_MUL, 8'h01, ai(SRC_MEM, 5, SRC_MEM, 6, 1, 5, 1, 1, 1));         // pc10
    emit(1, 0, OP_MOV, 8'h01, ai(SRC_BUS, 0, SRC_BUS, 0, 1, 5, 1));
    for (int a = 0; a < 2; a++) begin
      for (int k = 11; k <= 17; k++)                                              // pc11..17
        emit(a, 0, OP_MOV, 8'hFE, ai(SRC_RIGHT, 0, SRC_RIGHT, 0, 1, 5, 1));
      emit(a, 0, OP_MUL, 8'hFF, ai(SRC_MEM, 5, SRC_MEM, 0, 1, 7));               // pc18
      emit(a, 1, OP_NOP, 8'h00, nop);                                             // pc19
      emit(a, 0, OP_SUB, (a == 0) ? 8'hFE : 8'hFF, ai(SRC_MEM, 1, SRC_MEM, 8, 1, 1)); // pc20
    end
    emit(0, 0, OP_MUL, 8'h01, ai(SRC_MEM, 8, SRC_MEM, 8, 1, 9));                  // pc21
    emit(1, 0, OP_NOP, 8'h00, nop);
    emit(0, 0, OP_LT, 8'h01, ai(SRC_MEM, 9, SRC_MEM, 10, 1, 12));                 // pc22
    emit(1, 0, OP_NOP, 8'h00, nop);
    for (int a = 0; a < 2; a++) emit(a, 1, OP_NOP, 8'h00, nop);                   // pc23
  endfunction

  // ---------------- pages ----------------
  logic [7:0] pages [NPAGES][$];
  int total_tuples = 0;

  function automatic void put16(ref logic [7:0] p [$], input int a, input int v);
    p[a] = 8'(v); p[a + 1] = 8'(v >> 8);
  endfunction

  function automatic void build_pages();
    for (int pg = 0; pg < NPAGES; pg++) begin
      automatic int special = PB - 16;
      automatic int t = (pg == 0) ? 3 : $urandom_range(20, 300);
      automatic int upper = special - t * TSZ;
      for (int i = 0; i < PB; i++) pages[pg].push_back(8'($urandom));
      put16(pages[pg], 0, 0); put16(pages[pg], 2, 0);
      put16(pages[pg], 4, 16 + 4 * t); put16(pages[pg], 6, upper); put16(pages[pg], 8, special);
      for (int i = 0; i < t; i++) begin
        put16(pages[pg], 16 + 4 * i, upper + i * TSZ); put16(pages[pg], 18 + 4 * i, TSZ);
        for (int k = 0; k < F; k++) begin
          automatic int a = upper + i * TSZ + 8 + 4 * k;
          automatic word_t v = (k == 0) ? word_t'($signed($urandom) >>> 13) : word_t'($signed($urandom) >>> 15);
          for (int b = 0; b < 4; b++) pages[pg][a + b] = v[8*b +: 8];
        end
      end
      total_tuples += t;
    end
  endfunction

  task automatic send_epoch();
    for (int pg = 0; pg < NPAGES; pg++) send_packet(pages[pg], 0);
  endtask

  task automatic wait_done();
    for (int k = 0; k < 3000000 && !train_done; k++) @(posedge clk);
    #1;
  endtask

  task automatic check_model(input string tag);
    @(negedge clk); mr_re = 1; mr_addr = MADDR_W'(1);
    @(negedge clk); mr_re = 0;
    for (int l = 0; l < LANES; l++)
      check(mr_data[l] == w[l], $sformatf("%s: w[%0d] = %h, expected %h", tag, l, mr_data[l], w[l]));
  endtask

  initial begin
    automatic logic [63:0] sprog [$];
    s_valid = 0; s_first = 0; s_last = 0; s_is_cfg = 0; s_off = 0; s_data = '0;
    mr_re = 0; mr_addr = '0;
    for (int t = 0; t < NT; t++) wi[t] = 0;
    lr = word_t'(32'sh0000_0400);        // 1/64
    build_programs();
    build_pages();
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    sprog = '{
      64'(sinst(S_READB, imm_f(6),  imm_f(2), 6'd5)),      // r5 = free-space end
      64'(sinst(S_READB, imm_f(8),  imm_f(2), 6'd6)),      // r6 = special space
      64'(sinst(S_READB, imm_f(16), imm_f(4), 6'd7)),      // first tuple pointer
      64'(sinst(S_EXTRB, imm_f(2),  imm_f(2), 6'd1)),      // r1 = tuple size
      64'(sinst(S_SUB,   6'd4, reg_f(4), 6'd0)),
      64'(sinst(S_AD,    6'd4, reg_f(5), 6'd0)),           // r4 = tuple offset
      64'(sinst(S_SUB,   6'd9, reg_f(9), 6'd0)),
      64'(sinst(S_AD,    6'd9, reg_f(1), 6'd0)),
      64'(sinst(S_SUB,   6'd9, imm_f(8), 6'd0)),           // r9 = data bytes
      64'(sinst(S_BENTR, 6'd0, 6'd0, 6'd0)),
      64'(sinst(S_READB, reg_f(4), reg_f(1), 6'd8)),
      64'(sinst(S_CLN,   imm_f(8), reg_f(9), 6'd0)),
      64'(sinst(S_AD,    6'd4, reg_f(1), 6'd0)),
      64'(sinst(S_BEXIT, C_GE, reg_f(4), reg_f(6)))
    };
    send_cfg(CD_STRIDER_IMEM, 0, 0, 0, sprog);
    send_cfg(CD_STRIDER_REG, 0, 0, SR_PROG_LEN, '{64'(sprog.size()), 64'h00, 64'(NT)});
    for (int a = 0; a < 2; a++) begin
      automatic logic [63:0] cw [$];
      foreach (acp[a][i]) cw.push_back(64'(acp[a][i]));
      send_cfg(CD_AC_IMEM, a, 0, 0, cw);
      for (int u = 0; u < 8; u++) begin
        automatic logic [63:0] uw [$];
        foreach (aup[a][u][i]) uw.push_back(64'(aup[a][u][i]));
        send_cfg(CD_AU_IMEM, a, u, 0, uw);
      end
    end
    // initial model (lane 0 holds the label, its weight stays 0)
    for (int l = 0; l < LANES; l++) begin
      w[l] = (l == 0) ? 0 : word_t'($signed($urandom) >>> 17);
      send_cfg(CD_AU_DMEM, l / 8, l % 8, 1, '{64'(w[l])});
    end
    send_cfg(CD_AU_DMEM, 0, 0, 6, '{64'(lr)});
    send_cfg(CD_AU_DMEM, 0, 0, 10, '{64'd0});             // tolerance 0: never met
    ctrl(XR_SEG_UPDATE, 0);  ctrl(XR_SEG_POST, SEG_POST);
    ctrl(XR_MERGE_SRC, 7);   ctrl(XR_MERGE_DST, 8);  ctrl(XR_MERGE_LEN, 1);  ctrl(XR_MERGE_OP, M_ADD);
    ctrl(XR_TUPLES, 64'(total_tuples)); ctrl(XR_EPOCHS, 2);
    ctrl(XR_CONV_ADDR, 12);  ctrl(XR_CONV_EN, 1);  ctrl(XR_IN_BASE, 0);  ctrl(XR_THREADS, NT);
    ctrl(XR_START, 1);

    // ---- run 1: two epochs ----
    send_epoch();
    send_epoch();
    wait_done();
    check(train_done, "run 1 finished");
    check(epochs_done == 2, $sformatf("run 1 epochs %0d", epochs_done));
    check(!converged, "run 1 did not converge");
    check(rounds == 32'(model_rounds), "rounds seen by the model");
    check(merges == rounds, "one merge per round");
    check(pages_done == 2 * NPAGES, $sformatf("pages_done %0d", pages_done));
    for (int t = 0; t < NT; t++) check(tq[t].size() == 0, "no tuple left in a thread");
    check_model("run 1");
    $display("run 1: %0d tuples/epoch, %0d rounds (%0d partial), %0d merges, %0d unit stall cycles, %0d page stall cycles, %0d tuple stall cycles, %0d cycles",
             total_tuples, rounds, partial_rounds, merges, stall_cycles, page_stalls, tuple_stall_cycles, cyc);

    // ---- run 2: convergence variable ends training after one epoch ----
    send_cfg(CD_AU_DMEM, 0, 0, 10, '{64'(32'h7FFF_FFFF)});
    ctrl(XR_EPOCHS, 3);
    ctrl(XR_START, 1);
    send_epoch();
    wait_done();
    check(train_done && converged, "run 2 converged");
    check(epochs_done == 1, $sformatf("run 2 stopped after %0d epochs", epochs_done));
    check_model("run 2");

    // ---- mechanism counts ----
    check(stall_cycles > 0, "unit stalls happened");
    check(partial_rounds > 0, "partial rounds happened");
    check(merges > 0, "merges happened");
    check(misaligned > 0, "misaligned packets sent");
    check(page_stalls > 0, "page stalls happened");
    check(tuple_stall_cycles > 0, "tuple stalls happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

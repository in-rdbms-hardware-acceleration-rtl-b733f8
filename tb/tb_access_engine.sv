// tb_access_engine: self-checking test of the access engine with 4 page
// buffers/striders and 256-byte pages. The testbench streams, each packet
// with a random first-byte offset (shifter alignment): the strider program
// (the tuple walk of the page format: header fields, first tuple pointer for
// the tuple size, bentr/bexit loop reading each tuple and cleaning away its
// 8-byte header), the strider control registers, a few execution-engine
// configuration words, then 24 random pages. Each feature word carries its
// page number, tuple number and index, so a thread's output can be matched
// with its page. Threads take words with random back-pressure.
// Checks: engine configuration words leave on cfg_* (strider ones do not);
// every page's tuples arrive complete, in order and on one thread, with last
// flags; pages_done counts all pages; page stalls (all buffers busy) occur.
module tb_access_engine;
  import dana_pkg::*;
  localparam int NBUF = 4, PB = 256, PW = PB / 8, NPAGES = 24;
  logic clk = 0, rst_n = 0;
  logic s_valid, s_ready, s_first, s_last, s_is_cfg, cfg_we, page_stall;
  beat_t s_data, cfg_data;
  logic [2:0] s_off;
  cdest_e cfg_dest;
  logic [7:0] cfg_ac, cfg_au;
  logic [15:0] cfg_addr;
  logic [NBUF-1:0] t_valid, t_ready, t_last;
  word_t t_data [NBUF];
  logic [31:0] pages_done;
  logic [NBUF-1:0] src_idle;
  int checks = 0, failures = 0, stalls = 0, cfg_out = 0, tuples_out = 0, tuples_exp = 0;
  word_t exp_w [NPAGES][$];
  bit    exp_l [NPAGES][$];
  int    cur_page [NBUF];

  access_engine #(.NBUF(NBUF), .PAGE_BYTES(PB), .SIMEM_DEPTH(64)) dut (.*);
  always #5 clk = ~clk;
  initial begin #20000000; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- thread side ----
  always @(posedge clk) for (int i = 0; i < NBUF; i++) t_ready[i] <= ($urandom_range(0, 9) < 3);
  always @(negedge clk) if (rst_n) begin
    if (page_stall) stalls++;
    if (cfg_we) begin
      cfg_out++;
      check(cfg_dest == CD_CTRL_REG && cfg_addr == 16'(cfg_out) && cfg_data == 64'(100 + cfg_out),
            "engine configuration word");
    end
    for (int i = 0; i < NBUF; i++) if (t_valid[i] && t_ready[i]) begin
      automatic int pg = int'(t_data[i][31:24]);
      if (cur_page[i] < 0) cur_page[i] = pg;
      check(pg == cur_page[i] && pg < NPAGES, $sformatf("thread %0d: word of page %0d inside page %0d", i, pg, cur_page[i]));
      if (pg < NPAGES && exp_w[pg].size() > 0) begin
        automatic word_t e = exp_w[pg].pop_front();
        automatic bit l = exp_l[pg].pop_front();
        check(t_data[i] == e, $sformatf("thread %0d: %h vs %h", i, t_data[i], e));
        check(t_last[i] == l, "last flag");
        if (l) tuples_out++;
        if (exp_w[pg].size() == 0) cur_page[i] = -1;
      end else check(0, "extra word");
    end
  end

  // ---- stream side ----
  task automatic send_packet(input logic [7:0] bytes [$], input bit is_cfg);
    automatic int off = $urandom_range(0, 7);
    automatic logic [7:0] raw [$];
    automatic int nb;
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

  task automatic send_cfg(input cdest_e d, input int addr, input logic [63:0] words [$]);
    automatic cfg_hdr_t h = '0;
    automatic logic [7:0] bytes [$];
    h.dest = d; h.addr = 16'(addr); h.count = 16'(words.size());
    for (int b = 0; b < 8; b++) bytes.push_back(h[8*b +: 8]);
    foreach (words[i]) for (int b = 0; b < 8; b++) bytes.push_back(words[i][8*b +: 8]);
    send_packet(bytes, 1);
  endtask

  function automatic void put16(ref logic [7:0] p [$], input int a, input int v);
    p[a] = 8'(v); p[a + 1] = 8'(v >> 8);
  endfunction

  initial begin
    automatic logic [63:0] prog [$];
    s_valid = 0; s_first = 0; s_last = 0; s_is_cfg = 0; s_off = 0; s_data = '0; t_ready = '0;
    for (int i = 0; i < NBUF; i++) cur_page[i] = -1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    prog = '{
      64'(sinst(S_READB, imm_f(6),  imm_f(2), 6'd5)),
      64'(sinst(S_READB, imm_f(8),  imm_f(2), 6'd6)),
      64'(sinst(S_READB, imm_f(16), imm_f(4), 6'd7)),
      64'(sinst(S_EXTRB, imm_f(2),  imm_f(2), 6'd1)),
      64'(sinst(S_SUB,   6'd4, reg_f(4), 6'd0)),
      64'(sinst(S_AD,    6'd4, reg_f(5), 6'd0)),
      64'(sinst(S_SUB,   6'd9, reg_f(9), 6'd0)),
      64'(sinst(S_AD,    6'd9, reg_f(1), 6'd0)),
      64'(sinst(S_SUB,   6'd9, imm_f(8), 6'd0)),
      64'(sinst(S_BENTR, 6'd0, 6'd0, 6'd0)),
      64'(sinst(S_READB, reg_f(4), reg_f(1), 6'd8)),
      64'(sinst(S_CLN,   imm_f(8), reg_f(9), 6'd0)),
      64'(sinst(S_AD,    6'd4, reg_f(1), 6'd0)),
      64'(sinst(S_BEXIT, C_GE, reg_f(4), reg_f(6)))
    };
    send_cfg(CD_STRIDER_IMEM, 0, prog);
    send_cfg(CD_STRIDER_REG, SR_PROG_LEN, '{64'(prog.size()), 64'h5A, 64'(NBUF)});
    send_cfg(CD_CTRL_REG, 1, '{64'd101, 64'd102, 64'd103});
    for (int pg = 0; pg < NPAGES; pg++) begin
      automatic logic [7:0] p [$];
      automatic int f = $urandom_range(1, 6), tsz = 8 + 4 * f;
      automatic int special = PB - 16, t = $urandom_range(1, (special - 32) / (tsz + 4));
      automatic int upper = special - t * tsz;
      for (int i = 0; i < PB; i++) p.push_back(8'($urandom));
      put16(p, 0, PB); put16(p, 2, 0); put16(p, 4, 16 + 4 * t); put16(p, 6, upper); put16(p, 8, special);
      for (int i = 0; i < t; i++) begin
        put16(p, 16 + 4 * i, upper + i * tsz); put16(p, 18 + 4 * i, tsz);
        for (int k = 0; k < f; k++) begin
          automatic int a = upper + i * tsz + 8 + 4 * k;
          p[a + 3] = 8'(pg); p[a + 2] = 8'(i); p[a + 1] = 8'(k);
          exp_w[pg].push_back(word_t'({p[a + 3], p[a + 2], p[a + 1], p[a]}));
          exp_l[pg].push_back(k == f - 1);
        end
      end
      tuples_exp += t;
      send_packet(p, 0);
    end
    for (int k = 0; k < 20000 && pages_done != NPAGES; k++) @(posedge clk);
    repeat (50) @(posedge clk);
    check(pages_done == NPAGES, $sformatf("pages_done %0d", pages_done));
    check(tuples_out == tuples_exp, $sformatf("tuples %0d of %0d", tuples_out, tuples_exp));
    check(cfg_out == 3, "three engine configuration words");
    check(stalls > 0, "page stalls happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

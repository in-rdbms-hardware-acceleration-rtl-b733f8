// tb_strider: self-checking test of one strider on a 1 KB page held in a
// page-buffer model of this testbench (one-cycle read, byte writes).
//
// Test 1, tuple walk: pages are laid out as in the page format the strider
// targets: page size (bytes 0..3), free-space start (4..5), free-space end
// (6..7), special-space offset (8..9), tuple pointers from byte 16 (offset,
// length; 2 bytes each), tuples packed from the free-space end up to the
// special space, each an 8-byte tuple header followed by F 4-byte features.
// Tuple count, feature count and page contents are random, so tuple offsets
// fall on any 4-byte position of an 8-byte word (alignment). The program
// reads the header fields, takes the tuple size from the first pointer,
// then loops (bentr/bexit) reading each tuple and cleaning away its header.
// The feature words and last flags must equal the page contents, under
// random back-pressure.
// Test 2 exercises ins, extrBi, writeB, ad/sub/mul and cln with a register
// length, checking the words sent and the bytes written back to the page.
module tb_strider;
  import dana_pkg::*;
  localparam int PB = 1024, IM = 64;
  logic clk = 0, rst_n = 0;
  logic imem_we, start, busy, done, pb_re, out_valid, out_ready, out_last;
  logic [5:0] imem_addr;
  logic [21:0] imem_wdata;
  logic [6:0] prog_len;
  logic [7:0] ins_const, num_threads;
  logic [6:0] pb_addr;
  logic [63:0] pb_rdata, pb_wdata;
  logic [7:0] pb_be;
  word_t out_data;
  logic [7:0] page [PB];
  int checks = 0, failures = 0;
  word_t exp_w [$];
  bit    exp_l [$];

  strider #(.PAGE_BYTES(PB), .IMEM_DEPTH(IM)) dut (.*);
  always #5 clk = ~clk;
  initial begin #5000000; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // page buffer model
  always @(posedge clk) begin
    if (pb_re) for (int b = 0; b < 8; b++) pb_rdata[8*b +: 8] <= page[{pb_addr, 3'(b)}];
    for (int b = 0; b < 8; b++) if (pb_be[b]) page[{pb_addr, 3'(b)}] <= pb_wdata[8*b +: 8];
  end

  // output checker with random back-pressure
  int words_out = 0;
  always @(posedge clk) out_ready <= ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    words_out++;
    if (exp_w.size() == 0) check(0, "unexpected output word");
    else begin
      automatic word_t e = exp_w.pop_front();
      automatic bit l = exp_l.pop_front();
      check(out_data == e, $sformatf("word %h vs %h", out_data, e));
      check(out_last == l, "last flag");
    end
  end

  task automatic load_prog(input sinst_t p [$]);
    foreach (p[i]) begin
      @(negedge clk); imem_we = 1; imem_addr = 6'(i); imem_wdata = p[i];
    end
    @(negedge clk); imem_we = 0; prog_len = 7'(p.size());
  endtask

  task automatic run_page();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  function automatic void put16(input int a, input int v);
    page[a] = 8'(v); page[a + 1] = 8'(v >> 8);
  endfunction

  initial begin
    automatic sinst_t walk [$];
    automatic sinst_t misc [$];
    imem_we = 0; start = 0; imem_addr = 0; imem_wdata = 0; prog_len = 0; ins_const = 8'hA7;
    num_threads = 8'd4; out_ready = 1; pb_rdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // ---- test 1: tuple walk ----
    walk = '{
      sinst(S_READB, imm_f(6),  imm_f(2), 6'd5),          // r5 = free-space end
      sinst(S_READB, imm_f(8),  imm_f(2), 6'd6),          // r6 = special-space offset
      sinst(S_READB, imm_f(16), imm_f(4), 6'd7),          // first tuple pointer
      sinst(S_EXTRB, imm_f(2),  imm_f(2), 6'd1),          // r1 = tuple size
      sinst(S_SUB,   6'd4, reg_f(4), 6'd0),               // r4 = 0
      sinst(S_AD,    6'd4, reg_f(5), 6'd0),               // r4 = tuple offset
      sinst(S_SUB,   6'd9, reg_f(9), 6'd0),
      sinst(S_AD,    6'd9, reg_f(1), 6'd0),
      sinst(S_SUB,   6'd9, imm_f(8), 6'd0),               // r9 = feature bytes
      sinst(S_BENTR, 6'd0, 6'd0, 6'd0),
      sinst(S_READB, reg_f(4), reg_f(1), 6'd8),           // stage <- tuple
      sinst(S_CLN,   imm_f(8), reg_f(9), 6'd0),           // send the features
      sinst(S_AD,    6'd4, reg_f(1), 6'd0),               // next tuple
      sinst(S_BEXIT, C_GE, reg_f(4), reg_f(6))            // until the special space
    };
    load_prog(walk);
    for (int pg = 0; pg < 12; pg++) begin
      automatic int f = $urandom_range(1, 9), tsz = 8 + 4 * f;
      automatic int special = PB - 16, t = $urandom_range(1, (special - 64) / tsz);
      automatic int upper = special - t * tsz;
      for (int i = 0; i < PB; i++) page[i] = 8'($urandom);
      page[0] = 8'(PB); page[1] = 8'(PB >> 8); page[2] = 0; page[3] = 0;
      put16(4, 16 + 4 * t); put16(6, upper); put16(8, special);
      for (int i = 0; i < t; i++) begin
        put16(16 + 4 * i, upper + i * tsz); put16(18 + 4 * i, tsz);
        for (int k = 0; k < f; k++) begin
          automatic int a = upper + i * tsz + 8 + 4 * k;
          exp_w.push_back(word_t'({page[a + 3], page[a + 2], page[a + 1], page[a]}));
          exp_l.push_back(k == f - 1);
        end
      end
      run_page();
      check(exp_w.size() == 0, $sformatf("page %0d: %0d words missing", pg, exp_w.size()));
      exp_w.delete(); exp_l.delete();
    end

    // ---- test 2: ins, extrBi, writeB, arithmetic ----
    for (int i = 0; i < PB; i++) page[i] = 8'($urandom);
    misc = '{
      sinst(S_READB, imm_f(24), imm_f(24), 6'd8),         // stage[0..24) = page[24..48)
      sinst(S_INS,   imm_f(4),  imm_f(3), 6'd0),          // stage[4..7) = constant
      sinst(S_EXTRBI, imm_f(1), imm_f(3), imm_f(5)),      // r15 = bits 3..7 of stage[1]
      sinst(S_SUB,   6'd11, reg_f(11), 6'd0),
      sinst(S_AD,    6'd11, imm_f(25), 6'd0),
      sinst(S_MUL,   6'd11, imm_f(8), 6'd0),              // r11 = 200
      sinst(S_WRITEB, imm_f(0), imm_f(8), reg_f(11)),     // page[200..208) = stage[0..8)
      sinst(S_SUB,   6'd12, reg_f(12), 6'd0),
      sinst(S_AD,    6'd12, imm_f(3), 6'd0),
      sinst(S_MUL,   6'd12, imm_f(5), 6'd1),              // r12 = 3*5+1 = 16
      sinst(S_CLN,   imm_f(0),  imm_f(8), 6'd0),          // 2 words
      sinst(S_CLN,   reg_f(12), imm_f(8), 6'd0),          // stage[16..24)
      sinst(S_CLN,   imm_f(2),  reg_f(15), 6'd0)          // ceil(r15/4) words
    };
    load_prog(misc);
    begin
      automatic logic [7:0] st [24];
      automatic int r15, nw;
      automatic logic [7:0] old_page [8];
      for (int i = 0; i < 24; i++) st[i] = page[24 + i];
      for (int i = 4; i < 7; i++) st[i] = ins_const;
      r15 = (st[1] >> 3) & 31;
      for (int k = 0; k < 2; k++) begin
        exp_w.push_back({st[4*k+3], st[4*k+2], st[4*k+1], st[4*k]}); exp_l.push_back(k == 1);
      end
      for (int k = 0; k < 2; k++) begin
        exp_w.push_back({st[16+4*k+3], st[16+4*k+2], st[16+4*k+1], st[16+4*k]}); exp_l.push_back(k == 1);
      end
      nw = (r15 + 3) / 4;
      for (int k = 0; k < nw; k++) begin
        exp_w.push_back({st[2+4*k+3], st[2+4*k+2], st[2+4*k+1], st[2+4*k]}); exp_l.push_back(k == nw - 1);
      end
      run_page();
      check(exp_w.size() == 0, "test 2: words missing");
      for (int i = 0; i < 8; i++) check(page[200 + i] == st[i], $sformatf("writeB byte %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

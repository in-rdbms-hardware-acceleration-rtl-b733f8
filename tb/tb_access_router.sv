// tb_access_router: self-checking test of the access-engine routing FSM with
// 4 page buffers of 64 bytes (8 words), 3 of them in use. A random mix of
// configuration packets (random destination, address, 0..5 payload words)
// and pages is streamed in with random gaps. Buffer "striders" in the
// testbench release a buffer a random 2..80 cycles after its page_start.
// Checks: every configuration payload word leaves on cfg_* with the header's
// destination/cluster/unit and consecutive addresses; every page lands
// complete in one buffer, in round-robin order over free buffers, never in a
// busy one and never in buffer 3; page_start follows the last word by one
// cycle; the stream stalls when all buffers are busy (and that happens).
module tb_access_router;
  import dana_pkg::*;
  localparam int NBUF = 4, PB = 64, PW = PB / 8, NUSE = 3;
  logic clk = 0, rst_n = 0;
  logic [7:0] num_bufs;
  logic in_valid, in_ready, in_is_cfg, cfg_we, page_stall;
  beat_t in_data, cfg_data, pb_wdata;
  cdest_e cfg_dest;
  logic [7:0] cfg_ac, cfg_au;
  logic [15:0] cfg_addr;
  logic [NBUF-1:0] pb_we, page_start, page_done, buf_busy;
  logic [2:0] pb_addr;
  int checks = 0, failures = 0, cyc = 0, stalls = 0, pages_in = 0, pages_started = 0;
  beat_t bufm [NBUF][PW];
  int last_word_cyc [NBUF];
  int release_at [NBUF];
  int rr = 0;
  typedef struct { cdest_e d; logic [7:0] ac, au; logic [15:0] a; beat_t v; } cw_t;
  cw_t cfg_q [$];
  logic [PW-1:0][63:0] page_q [$];
  bit my_busy [NBUF];

  access_router #(.NBUF(NBUF), .PAGE_BYTES(PB)) dut (.*);
  always #5 clk = ~clk;
  initial begin #5000000; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) cyc++;
  // monitor at the falling edge: sees the values the next rising edge takes
  always @(negedge clk) begin
    if (page_stall) stalls++;
    if (rst_n) begin
      if (cfg_we) begin
        automatic cw_t e = cfg_q.pop_front();
        check(cfg_dest == e.d && cfg_ac == e.ac && cfg_au == e.au && cfg_addr == e.a && cfg_data == e.v,
              "configuration word");
      end
      for (int b = 0; b < NBUF; b++) if (pb_we[b]) begin
        bufm[b][pb_addr] = pb_wdata;
        if (pb_addr == 3'(PW - 1)) last_word_cyc[b] = cyc;
        check(!my_busy[b] || pb_addr != 0, "page written into a busy buffer");
        if (pb_addr == 0) begin
          check(b == next_buf(), $sformatf("page into buffer %0d, expected %0d", b, next_buf()));
          rr = (b + 1) % NUSE;
          my_busy[b] = 1;
        end
      end
      for (int b = 0; b < NBUF; b++) if (page_start[b]) begin
        automatic logic [PW-1:0][63:0] e;
        e = page_q.pop_front();
        pages_started++;
        check(cyc - last_word_cyc[b] == 1, "page_start one cycle after the last word");
        for (int w = 0; w < PW; w++) check(bufm[b][w] == e[w], $sformatf("t=%0t buffer %0d word %0d: %h vs %h", $time, b, w, bufm[b][w], e[w]));
        release_at[b] = cyc + $urandom_range(2, 80);
      end
      // buffer release by the modelled striders
      page_done = '0;
      for (int b = 0; b < NBUF; b++) if (release_at[b] == cyc) begin page_done[b] = 1; my_busy[b] = 0; end
    end
  end

  // expected buffer of the next page: first free from the round-robin pointer
  function automatic int next_buf();
    for (int k = 0; k < NUSE; k++) if (!my_busy[(rr + k) % NUSE]) return (rr + k) % NUSE;
    return -1;
  endfunction

  task automatic send(input beat_t d, input bit c);
    automatic bit hs;
    in_valid = 1; in_data = d; in_is_cfg = c;
    do begin @(negedge clk); hs = in_ready; @(posedge clk); #1; end while (!hs);
    in_valid = 0;
  endtask

  initial begin
    num_bufs = 8'(NUSE); in_valid = 0; in_is_cfg = 0; in_data = '0; page_done = '0;
    for (int b = 0; b < NBUF; b++) begin release_at[b] = -1; my_busy[b] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int k = 0; k < 150; k++) begin
      while ($urandom_range(0, 2) == 0) @(posedge clk);
      if ($urandom_range(0, 3) == 0) repeat ($urandom_range(0, 120)) @(posedge clk);  // let buffers drain
      #1;
      if ($urandom_range(0, 2) == 0) begin
        automatic cfg_hdr_t h = '0;
        automatic beat_t pay [$];
        h.dest = cdest_e'($urandom_range(0, 5)); h.ac = 8'($urandom); h.au = 8'($urandom);
        h.addr = 16'($urandom); h.count = 16'($urandom_range(0, 5));
        for (int i = 0; i < h.count; i++) begin
          automatic cw_t e;
          e.d = h.dest; e.ac = h.ac; e.au = h.au; e.a = h.addr + 16'(i); e.v = {$urandom, $urandom};
          cfg_q.push_back(e); pay.push_back(e.v);
        end
        send(beat_t'(h), 1);
        for (int i = 0; i < h.count; i++) send(pay[i], 1);
      end else begin
        automatic logic [PW-1:0][63:0] pg;
        for (int w = 0; w < PW; w++) pg[w] = {$urandom, $urandom};
        page_q.push_back(pg);
        pages_in++;
        for (int w = 0; w < PW; w++) send(pg[w], 0);
      end
    end
    repeat (200) @(posedge clk);
    check(cfg_q.size() == 0, "all configuration words delivered");
    check(pages_started == pages_in, "all pages started");
    check(stalls > 0, "stream stalled on busy buffers");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_byte_aligner: self-checking test of the shifter. Random packets of
// 1..6 useful 8-byte words are sent with a random first-byte offset (0..7),
// random input gaps and random output back-pressure. The expected output is
// the packet's useful bytes in order, taken from a byte array built at the
// same time as the beats; the test also checks that an offset packet costs
// exactly one absorbed beat (no output) and that `out_last` marks the end.
module tb_byte_aligner;
  localparam int BYTES = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, in_first, in_last, out_valid, out_ready, out_last;
  logic [63:0] in_data, out_data;
  logic [2:0] in_off;
  int checks = 0, failures = 0;

  byte_aligner #(.BYTES(BYTES)) dut (.*);

  always #5 clk = ~clk;
  initial begin #2000000; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [7:0] exp_bytes [$];
  int outs_seen, absorbed;

  // output side: compare against the expected byte queue
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    automatic logic [63:0] e;
    for (int b = 0; b < 8; b++) e[8*b +: 8] = exp_bytes.pop_front();
    check(out_data == e, $sformatf("word %h expected %h", out_data, e));
    check(out_last == (exp_bytes.size() == 0), "out_last position");
    outs_seen++;
  end
  always @(posedge clk) out_ready <= ($urandom_range(0, 3) != 0);

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; in_data = '0; in_off = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 200; p++) begin
      automatic int n, off, nbeats, n_before;
      automatic logic [7:0] raw [$];
      n = $urandom_range(1, 6); off = $urandom_range(0, 7);
      for (int i = 0; i < off; i++) raw.push_back(8'($urandom));
      for (int i = 0; i < 8 * n; i++) begin
        automatic logic [7:0] v;
        v = 8'($urandom);
        raw.push_back(v); exp_bytes.push_back(v);
      end
      while (raw.size() % 8 != 0) raw.push_back(8'($urandom));
      nbeats = raw.size() / 8;
      check(nbeats == n + (off != 0 ? 1 : 0), "beat count");
      n_before = outs_seen;
      for (int k = 0; k < nbeats; k++) begin
        while ($urandom_range(0, 4) == 0) @(posedge clk);
        #1 in_valid = 1; in_first = (k == 0); in_last = (k == nbeats - 1); in_off = 3'(off);
        for (int b = 0; b < 8; b++) in_data[8*b +: 8] = raw[8*k + b];
        begin
          automatic bit hs;
          do begin @(negedge clk); hs = in_ready; @(posedge clk); end while (!hs);
        end
        #1 in_valid = 0;
      end
      repeat (2) @(posedge clk);
      check(outs_seen - n_before == n, $sformatf("packet %0d: %0d words out, expected %0d", p, outs_seen - n_before, n));
      if (off != 0) absorbed++;
    end
    check(exp_bytes.size() == 0, "all bytes delivered");
    check(absorbed > 0, "offset packets exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

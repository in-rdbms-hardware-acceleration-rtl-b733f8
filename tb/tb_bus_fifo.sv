// tb_bus_fifo: self-checking test of the bus-data FIFO (default depth 8).
// Random pushes and pops, never pushing when full or popping when empty,
// checked against a queue model: head word, empty and full flags every
// cycle, and that the FIFO reaches full and empty during the run.
module tb_bus_fifo;
  import dana_pkg::*;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0, push, pop, empty, full;
  word_t wdata, rdata;
  word_t q [$];
  int checks = 0, failures = 0, n_full = 0, n_empty = 0;

  bus_fifo #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin #1000000; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    push = 0; pop = 0; wdata = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 5000; k++) begin
      automatic int bias = (k / 500) % 2;   // alternate filling and draining phases
      @(negedge clk);
      check(empty == (q.size() == 0), "empty flag");
      check(full == (q.size() == DEPTH), "full flag");
      if (q.size() != 0) check(rdata == q[0], $sformatf("head %h vs %h", rdata, q[0]));
      if (full) n_full++;
      if (empty) n_empty++;
      push = !full && ($urandom_range(0, 9) < (bias ? 3 : 7));
      pop  = !empty && ($urandom_range(0, 9) < (bias ? 7 : 3));
      wdata = word_t'($urandom);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wdata);
    end
    @(negedge clk); push = 0; pop = 0;
    check(n_full > 0, "reached full");
    check(n_empty > 0, "reached empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_merge_tree: self-checking test of the merge tree bus with 4 threads of
// 4 lanes. Random vectors, random participation masks and all four merge
// operations enter back to back, one per cycle; each result must leave
// exactly LEVELS = 2 cycles later and equal the reference reduction over
// the participating threads (computed here with 64-bit arithmetic).
module tb_merge_tree;
  import dana_pkg::*;
  localparam int NT = 4, LANES = 4, LEVELS = 2;
  logic clk = 0, rst_n = 0, in_valid, out_valid;
  logic [NT-1:0] part;
  mop_e op;
  word_t in_data [NT][LANES];
  word_t out_data [LANES];
  logic [LANES-1:0][31:0] exp_q [$];
  int    t_in [$];
  int checks = 0, failures = 0, cyc = 0;

  merge_tree #(.NT(NT), .LANES(LANES)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin #1000000; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic word_t ref_op(input mop_e o, input word_t x, input word_t y);
    longint p;
    case (o)
      M_ADD: return x + y;
      M_MUL: begin p = (longint'(x) * longint'(y)) >>> 16; return word_t'(p); end
      M_MAX: return (x > y) ? x : y;
      default: return (x < y) ? x : y;
    endcase
  endfunction

  // output monitor
  always @(negedge clk) if (rst_n && out_valid) begin
    automatic logic [LANES-1:0][31:0] e;
    automatic int t0;
    e = exp_q.pop_front(); t0 = t_in.pop_front();
    check(cyc - t0 == LEVELS, $sformatf("latency %0d", cyc - t0));
    for (int l = 0; l < LANES; l++) check(out_data[l] == word_t'(e[l]), $sformatf("lane %0d: %h vs %h", l, out_data[l], e[l]));
  end

  initial begin
    in_valid = 0; part = '0; op = M_ADD;
    for (int t = 0; t < NT; t++) for (int l = 0; l < LANES; l++) in_data[t][l] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 1000; k++) begin
      automatic logic [LANES-1:0][31:0] e;
      automatic word_t v [NT];
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      op = mop_e'($urandom_range(0, 3));
      part = NT'($urandom_range(1, 15));
      for (int t = 0; t < NT; t++)
        for (int l = 0; l < LANES; l++)
          in_data[t][l] = (op == M_MUL) ? word_t'($signed($urandom) >>> 14) : word_t'($urandom);
      // pairwise in tree order, non-participants replaced by the identity
      for (int l = 0; l < LANES; l++) begin
        for (int t = 0; t < NT; t++)
          v[t] = part[t] ? in_data[t][l] :
                 (op == M_ADD) ? 32'sd0 : (op == M_MUL) ? 32'sh10000 :
                 (op == M_MAX) ? 32'sh8000_0000 : 32'sh7FFF_FFFF;
        e[l] = ref_op(op, ref_op(op, v[0], v[1]), ref_op(op, v[2], v[3]));
      end
      if (in_valid) begin exp_q.push_back(e); t_in.push_back(cyc); end
    end
    @(negedge clk); in_valid = 0;
    repeat (4) @(negedge clk);
    check(exp_q.size() == 0, "every input produced an output");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

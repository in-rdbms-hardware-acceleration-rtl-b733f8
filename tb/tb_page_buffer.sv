// tb_page_buffer: self-checking test of one page buffer at a reduced page
// size (1 KB). Fills the page through port A with random words, reads every
// word back through port B (checking the one-cycle read latency), then makes
// random byte-enabled writes through port B and random reads, comparing
// against a reference array kept by the testbench.
module tb_page_buffer;
  localparam int PB = 1024, WORDS = PB / 8;
  logic clk = 0;
  logic a_we, b_re;
  logic [6:0] a_addr, b_addr;
  logic [63:0] a_wdata, b_rdata, b_wdata;
  logic [7:0] b_be;
  logic [63:0] ref_m [WORDS];
  int checks = 0, failures = 0;

  page_buffer #(.PAGE_BYTES(PB), .BYTES(8)) dut (.*);
  always #5 clk = ~clk;
  initial begin #1000000; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    a_we = 0; b_re = 0; a_addr = 0; b_addr = 0; a_wdata = 0; b_wdata = 0; b_be = 0;
    @(negedge clk);
    for (int i = 0; i < WORDS; i++) begin
      a_we = 1; a_addr = 7'(i); a_wdata = {$urandom, $urandom}; ref_m[i] = a_wdata;
      @(negedge clk);
    end
    a_we = 0;
    for (int i = 0; i < WORDS; i++) begin
      b_re = 1; b_addr = 7'(i);
      @(negedge clk);
      b_re = 0;
      check(b_rdata == ref_m[i], $sformatf("fill read %0d: %h vs %h", i, b_rdata, ref_m[i]));
    end
    for (int k = 0; k < 2000; k++) begin
      automatic int a = $urandom_range(0, WORDS - 1);
      if ($urandom_range(0, 1)) begin
        b_be = 8'($urandom); b_addr = 7'(a); b_wdata = {$urandom, $urandom};
        for (int b = 0; b < 8; b++) if (b_be[b]) ref_m[a][8*b +: 8] = b_wdata[8*b +: 8];
        @(negedge clk); b_be = 0;
      end else begin
        b_re = 1; b_addr = 7'(a);
        @(negedge clk); b_re = 0;
        check(b_rdata == ref_m[a], $sformatf("read %0d", a));
        // data holds while no new read is issued
        @(negedge clk);
        check(b_rdata == ref_m[a], "read data held");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

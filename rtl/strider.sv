// strider: programmable page walker that turns one database page held in a
// page buffer into the raw training tuples of one execution thread.
//
// How it works. The strider runs a short program of 22-bit instructions
// (same program in every strider, one page per strider) from its instruction
// buffer. A program typically reads page-header fields into configuration
// registers, reads the first tuple pointer for the tuple size, and then loops
// over the tuples: read a tuple into the tuple stage, send the wanted byte
// window of it to the thread, advance the tuple offset, exit when the offset
// reaches the end of the tuple area. The datapath has a 16-entry register
// file (r0 page size, r1 tuple size, r2 tuples per page, r3 number of
// threads, r4 tuple offset, r5..r15 free, r15 also receives extrBi), a byte
// addressed tuple stage, the memory controller that issues page-buffer reads,
// and the same byte aligner as the access engine behind the page buffer.
//
// Instruction semantics (opnd(f) = register if bit 5 of the field is set,
// else the 5-bit immediate):
//   readB  A,N,d   stage[0..N) <- page[A..A+N); r[d] <- first min(N,4) bytes
//   extrB  O,N,d   r[d] <- stage[O..O+N), N <= 4, little endian
//   writeB O,N,W   page[opnd(W)..+N) <- stage[O..O+N), one byte per cycle
//   extrBi S,O,n   r15 <- n bits of stage starting at byte S, bit O
//   cln    S,L,-   send stage[S..S+L) to the thread as 32-bit words, last
//                  flag on the final word (one cleaned tuple)
//   ins    S,L,-   stage[S..S+L) <- insert constant byte
//   ad/sub/mul R,B,imm   r[R] <- (r[R] op opnd(B)) + imm (6-bit)
//   bentr          remember the next PC as loop start
//   bexit  c,A,B   if (opnd(A) c opnd(B)) fall through, else jump to loop start
// The program ends when the PC reaches the configured program length; the
// strider then releases its page buffer.
//
// Interface/timing: `start` (page buffer full) begins a page; `done` pulses
// when the program ends. readB moves 8 bytes per cycle after a 2-cycle start;
// cln sends one 32-bit word per cycle and stalls while `out_ready` is low;
// other instructions take one cycle per instruction (writeB, ins one per byte).
//
// Follows the paper: instruction width, opcode numbers and field positions,
// field names, the named configuration registers, branch pair for loops,
// insert constants. This design's own: operand encoding, the register file
// size, the tuple stage, the semantics where the paper's table leaves a field
// without a name (bexit's third field, extrBi's destination).
module strider
  import dana_pkg::*;
#(
  parameter int unsigned PAGE_BYTES = 32768,
  parameter int unsigned IMEM_DEPTH = 64,
  localparam int unsigned BYTES     = BEAT_BYTES,
  localparam int unsigned PWORDS    = PAGE_BYTES / BYTES,
  localparam int unsigned PAW       = $clog2(PWORDS),
  localparam int unsigned BAW       = $clog2(PAGE_BYTES),
  localparam int unsigned IAW       = $clog2(IMEM_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  // configuration
  input  logic               imem_we,
  input  logic [IAW-1:0]     imem_addr,
  input  logic [SINST_W-1:0] imem_wdata,
  input  logic [IAW:0]       prog_len,
  input  logic [7:0]         ins_const,
  input  logic [7:0]         num_threads,
  // page control
  input  logic               start,
  output logic               busy,
  output logic               done,
  // page buffer port B
  output logic               pb_re,
  output logic [PAW-1:0]     pb_addr,
  input  logic [BEAT_W-1:0]  pb_rdata,
  output logic [BYTES-1:0]   pb_be,
  output logic [BEAT_W-1:0]  pb_wdata,
  // cleaned tuple data to the thread
  output logic               out_valid,
  input  logic               out_ready,
  output word_t              out_data,
  output logic               out_last
);
  typedef enum logic [2:0] {ST_IDLE, ST_EXEC, ST_READ, ST_WRITE, ST_CLEAN, ST_INS} st_e;
  st_e st;

  sinst_t              imem [IMEM_DEPTH];
  logic [IAW:0]        pc, loop_pc;
  logic [31:0]         r [SREG_N];
  sinst_t              ci;

  always_ff @(posedge clk) if (imem_we) imem[imem_addr] <= sinst_t'(imem_wdata);
  assign ci = imem[pc[IAW-1:0]];

  function automatic logic [31:0] opnd(input logic [5:0] f, input logic [31:0] rv [SREG_N]);
    return f[5] ? rv[f[3:0]] : {27'd0, f[4:0]};
  endfunction

  // ---------- operands of the current instruction ----------
  logic [31:0] o1, o2, o3;
  assign o1 = opnd(ci.f1, r);
  assign o2 = opnd(ci.f2, r);
  assign o3 = opnd(ci.f3, r);

  // ---------- tuple stage: 8 byte banks, byte a in bank a mod 8 ----------
  // One read window of 8 bytes from any byte address (each bank reads the
  // row of the window's first byte or the row after it) and one write per
  // bank per cycle (an aligned 8-byte window from readB, or one ins byte).
  localparam int unsigned SROWS = PAGE_BYTES / BYTES;
  localparam int unsigned SRAW  = $clog2(SROWS);
  logic [BAW-1:0]    win_addr;     // byte address of the read window
  logic [7:0]        bank_q [BYTES];
  logic [BEAT_W-1:0] win;          // win[7:0] = stage[win_addr]
  logic [31:0]       cnt;          // bytes/words still to move
  logic [BAW-1:0]    src_ptr;
  logic [BAW-1:0]    dst_ptr;
  logic              rd_store;     // readB stores an aligned window this cycle
  logic [BAW-1:0]    rd_stage_ptr;
  logic [BEAT_W-1:0] al_out;

  assign win_addr = (st == ST_CLEAN || st == ST_WRITE) ? src_ptr : o1[BAW-1:0];

  for (genvar b = 0; b < BYTES; b++) begin : g_bank
    logic [7:0]      mem [SROWS];
    logic [SRAW-1:0] ra, wa;
    logic            we, nxt;
    logic [7:0]      wd;
    logic [3:0]      sum;
    // window starts past this bank's byte in the row: read the next row
    assign sum = {1'b0, win_addr[2:0]} + 4'(BYTES - 1 - b);
    assign nxt = sum[3];
    assign ra  = win_addr[BAW-1:3] + SRAW'(nxt);
    assign bank_q[b] = mem[ra];
    always_comb begin
      we = 1'b0;
      wa = rd_stage_ptr[BAW-1:3];
      wd = al_out[8*b +: 8];
      if (rd_store) begin
        we = 1'b1;
      end else if (st == ST_INS && dst_ptr[2:0] == 3'(b)) begin
        we = 1'b1; wa = dst_ptr[BAW-1:3]; wd = ins_const;
      end
    end
    always_ff @(posedge clk) if (we) mem[wa] <= wd;
  end

  always_comb begin
    for (int j = 0; j < BYTES; j++) win[8*j +: 8] = bank_q[3'(win_addr[2:0] + 3'(j))];
  end

  // ---------- readB: memory controller + aligner ----------
  logic [31:0]    rd_words_left;    // page words still to request
  logic [PAW-1:0] rd_waddr;
  logic           rd_pending;       // read issued last cycle
  logic           rd_first;         // next returned word is the first
  logic [2:0]     rd_off;
  logic [31:0]    rd_wins_left;     // aligned windows still to store
  logic [3:0]     rd_dst;
  logic [31:0]    rd_n;
  logic           al_valid, al_ready_unused, al_out_valid, al_out_last;

  assign al_valid = rd_pending;
  byte_aligner #(.BYTES(BYTES)) u_align (
    .clk, .rst_n,
    .in_valid (al_valid), .in_ready(al_ready_unused), .in_data(pb_rdata),
    .in_first (rd_first), .in_last(1'b0), .in_off(rd_off),
    .out_valid(al_out_valid), .out_ready(1'b1), .out_data(al_out), .out_last(al_out_last)
  );

  logic [BEAT_W-1:0] win_sh;        // extrBi: window shifted to the start bit
  assign win_sh = win >> o2[5:0];
  assign rd_store = (st == ST_READ) && al_out_valid && rd_pending && rd_wins_left != 0;

  // ---------- combinational decode of one-cycle results ----------
  logic [31:0] alu_res;
  logic        exit_cond;
  always_comb begin
    unique case (ci.op)
      S_AD:    alu_res = r[ci.f1[3:0]] + o2 + {26'd0, ci.f3};
      S_SUB:   alu_res = r[ci.f1[3:0]] - o2 + {26'd0, ci.f3};
      S_MUL:   alu_res = r[ci.f1[3:0]] * o2 + {26'd0, ci.f3};
      default: alu_res = '0;
    endcase
    unique case (ci.f1)
      C_EQ:    exit_cond = (o2 == o3);
      C_GE:    exit_cond = (o2 >= o3);
      C_LT:    exit_cond = (o2 <  o3);
      default: exit_cond = (o2 != o3);
    endcase
  end

  // ---------- outputs ----------
  assign busy      = (st != ST_IDLE);
  assign out_valid = (st == ST_CLEAN);
  assign out_data  = win[31:0];
  assign out_last  = (st == ST_CLEAN) && (cnt <= 32'd4);
  assign pb_re     = (st == ST_READ) && (rd_words_left != 0);
  always_comb begin
    pb_addr  = rd_waddr;
    pb_be    = '0;
    pb_wdata = '0;
    if (st == ST_WRITE) begin
      pb_addr = dst_ptr[BAW-1:3];
      pb_be   = BYTES'(1) << dst_ptr[2:0];
      pb_wdata = {BYTES{win[7:0]}};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= ST_IDLE; pc <= '0; loop_pc <= '0; done <= 1'b0;
      for (int i = 0; i < SREG_N; i++) r[i] <= '0;
      rd_words_left <= '0; rd_waddr <= '0; rd_pending <= 1'b0; rd_first <= 1'b0;
      rd_off <= '0; rd_wins_left <= '0; rd_stage_ptr <= '0; rd_dst <= '0; rd_n <= '0;
      cnt <= '0; src_ptr <= '0; dst_ptr <= '0;
    end else begin
      done <= 1'b0;
      r[R_NUM_THREADS] <= {24'd0, num_threads};
      unique case (st)
        ST_IDLE: if (start) begin
          pc <= '0; loop_pc <= '0; st <= ST_EXEC;
        end
        ST_EXEC: begin
          if (pc >= prog_len) begin
            st <= ST_IDLE; done <= 1'b1;
          end else begin
            pc <= pc + 1'b1;
            unique case (ci.op)
              S_READB: begin
                rd_n          <= o2;
                rd_dst        <= ci.f3[3:0];
                rd_off        <= o1[2:0];
                rd_waddr      <= o1[BAW-1:3];
                rd_words_left <= ((o2 + 32'd7) >> 3) + ((o1[2:0] != 0) ? 32'd1 : 32'd0);
                rd_wins_left  <= (o2 + 32'd7) >> 3;
                rd_stage_ptr  <= '0;
                rd_first      <= 1'b1;
                st            <= (o2 == 0) ? ST_EXEC : ST_READ;
              end
              S_EXTRB: begin
                unique case (o2)
                  32'd1:   r[ci.f3[3:0]] <= {24'd0, win[7:0]};
                  32'd2:   r[ci.f3[3:0]] <= {16'd0, win[15:0]};
                  32'd3:   r[ci.f3[3:0]] <= {8'd0, win[23:0]};
                  default: r[ci.f3[3:0]] <= win[31:0];
                endcase
              end
              S_WRITEB: begin
                src_ptr <= o1[BAW-1:0]; cnt <= o2; dst_ptr <= o3[BAW-1:0];
                if (o2 != 0) st <= ST_WRITE;
              end
              S_EXTRBI: begin
                r[R_BITS] <= win_sh[31:0] & ((o3 >= 32) ? 32'hFFFF_FFFF : ((32'd1 << o3[4:0]) - 1));
              end
              S_CLN: begin
                src_ptr <= o1[BAW-1:0]; cnt <= o2;
                if (o2 != 0) st <= ST_CLEAN;
              end
              S_INS: begin
                dst_ptr <= o1[BAW-1:0]; cnt <= o2;
                if (o2 != 0) st <= ST_INS;
              end
              S_AD, S_SUB, S_MUL: r[ci.f1[3:0]] <= alu_res;
              S_BENTR: loop_pc <= pc + 1'b1;
              S_BEXIT: if (!exit_cond) pc <= loop_pc;
              default: ;
            endcase
          end
        end
        ST_READ: begin
          // memory controller: one page-buffer word per cycle
          rd_pending <= pb_re;
          if (pb_re) begin
            rd_waddr      <= rd_waddr + 1'b1;
            rd_words_left <= rd_words_left - 1;
          end
          if (rd_pending) rd_first <= 1'b0;
          if (rd_store) begin
            if (rd_stage_ptr == 0) begin
              unique case (rd_n)
                32'd1:   r[rd_dst] <= {24'd0, al_out[7:0]};
                32'd2:   r[rd_dst] <= {16'd0, al_out[15:0]};
                32'd3:   r[rd_dst] <= {8'd0, al_out[23:0]};
                default: r[rd_dst] <= al_out[31:0];
              endcase
            end
            rd_stage_ptr <= rd_stage_ptr + BAW'(BYTES);
            rd_wins_left <= rd_wins_left - 1;
            if (rd_wins_left == 1) begin
              st <= ST_EXEC; rd_pending <= 1'b0;
            end
          end
        end
        ST_WRITE: begin
          src_ptr <= src_ptr + 1'b1; dst_ptr <= dst_ptr + 1'b1; cnt <= cnt - 1;
          if (cnt == 1) st <= ST_EXEC;
        end
        ST_INS: begin
          dst_ptr <= dst_ptr + 1'b1; cnt <= cnt - 1;
          if (cnt == 1) st <= ST_EXEC;
        end
        ST_CLEAN: if (out_ready) begin
          src_ptr <= src_ptr + BAW'(4);
          cnt     <= (cnt > 4) ? cnt - 4 : 32'd0;
          if (cnt <= 4) st <= ST_EXEC;
        end
        default: st <= ST_IDLE;
      endcase
    end
  end

  // a program may not start a page while the strider is still busy
  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
endmodule

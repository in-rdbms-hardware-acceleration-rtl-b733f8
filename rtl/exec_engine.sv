// exec_engine: the multi-threaded execution engine: NT identical threads, the
// merge tree, and the controller that sequences training.
//
// Training proceeds in rounds. A round starts when every thread in use holds
// a tuple, when all tuples left in the epoch are held, or when some threads
// hold a tuple and each other thread's page buffer is empty (`src_idle`:
// no tuple can come soon); the last two give partial rounds.
// The threads holding a tuple run the update-rule segment (cluster PC
// XR_SEG_UPDATE). Then, for each of MERGE_LEN words, the controller reads
// address MERGE_SRC+w from every lane of every thread, passes the vectors
// through the merge tree (non-participants as identity) and writes the
// combined vector to MERGE_DST+w in every thread in use, so all threads keep
// the same merged values. Every thread in use then runs the post-merge
// segment (XR_SEG_POST), e.g. the model update. After TUPLES tuples an epoch
// ends; training stops after EPOCHS epochs, or earlier when XR_CONV_EN is set
// and the word at XR_CONV_ADDR of unit 0, cluster 0, thread 0 is non-zero
// (the convergence variable computed by the program).
//
// Configuration (cfg_*): CD_CTRL_REG writes the control registers above
// (XR_START starts training); cluster and unit programs and data-memory
// initial values are broadcast to all threads. Model read-out: `mr_re` with
// `mr_addr` returns one word per lane of thread 0 on `mr_data` a cycle later;
// use it while the engine is not running.
//
// Paper: threads running parallel update rules, merge via the tree bus,
// merge before the optimizer step (Fig. 5), epochs or a convergence variable
// as terminator. Own: the round/epoch controller, register map, and that the
// convergence test is made at the end of each epoch (the paper: "The merge
// function and convergence criteria are performed once per epoch"; here the
// merge is made once per round of NT tuples, following the batch meaning of
// the merge coefficient).
module exec_engine
  import dana_pkg::*;
#(
  parameter int unsigned NT         = 4,
  parameter int unsigned NAC        = 2,
  parameter int unsigned DMEM_DEPTH = 2048,
  parameter int unsigned IMEM_DEPTH = 256,
  parameter int unsigned FIFO_DEPTH = 8,
  localparam int unsigned LANES     = NAC * 8,
  localparam int unsigned IAW       = $clog2(IMEM_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cfg_we,
  input  cdest_e             cfg_dest,
  input  logic [7:0]         cfg_ac,
  input  logic [7:0]         cfg_au,
  input  logic [15:0]        cfg_addr,
  input  beat_t              cfg_data,
  input  logic [NT-1:0]      t_valid,
  output logic [NT-1:0]      t_ready,
  input  word_t              t_data [NT],
  input  logic [NT-1:0]      t_last,
  input  logic [NT-1:0]      src_idle,
  input  logic               mr_re,
  input  logic [MADDR_W-1:0] mr_addr,
  output word_t              mr_data [LANES],
  output logic               running,
  output logic               train_done,
  output logic               converged,
  output logic [31:0]        epochs_done,
  output logic [31:0]        rounds,
  output logic [31:0]        partial_rounds,
  output logic [31:0]        merges,
  output logic [31:0]        stall_cycles
);
  typedef enum logic [3:0] {E_IDLE, E_WAIT, E_RUN0, E_MRD, E_MTREE, E_MWAIT,
                            E_RUN1, E_CONV_RD, E_CONV, E_DONE} est_e;
  est_e st;

  // control registers
  logic [IAW-1:0]     seg_update, seg_post;
  logic [MADDR_W-1:0] merge_src, merge_dst, conv_addr, in_base;
  logic [15:0]        merge_len;
  mop_e               merge_op;
  logic [31:0]        tuples, epochs;
  logic               conv_en;
  logic [7:0]         nthreads;
  logic               start_req;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seg_update <= '0; seg_post <= '0; merge_src <= '0; merge_dst <= '0; conv_addr <= '0;
      in_base <= '0; merge_len <= '0; merge_op <= M_ADD; tuples <= '0; epochs <= 32'd1;
      conv_en <= 1'b0; nthreads <= 8'(NT); start_req <= 1'b0;
    end else begin
      start_req <= 1'b0;
      if (cfg_we && cfg_dest == CD_CTRL_REG) begin
        unique case (cfg_addr)
          XR_SEG_UPDATE: seg_update <= cfg_data[IAW-1:0];
          XR_SEG_POST:   seg_post   <= cfg_data[IAW-1:0];
          XR_MERGE_SRC:  merge_src  <= cfg_data[MADDR_W-1:0];
          XR_MERGE_DST:  merge_dst  <= cfg_data[MADDR_W-1:0];
          XR_MERGE_LEN:  merge_len  <= cfg_data[15:0];
          XR_MERGE_OP:   merge_op   <= mop_e'(cfg_data[1:0]);
          XR_TUPLES:     tuples     <= cfg_data[31:0];
          XR_EPOCHS:     epochs     <= cfg_data[31:0];
          XR_CONV_ADDR:  conv_addr  <= cfg_data[MADDR_W-1:0];
          XR_CONV_EN:    conv_en    <= cfg_data[0];
          XR_IN_BASE:    in_base    <= cfg_data[MADDR_W-1:0];
          XR_START:      start_req  <= 1'b1;
          XR_THREADS:    nthreads   <= cfg_data[7:0];
          default: ;
        endcase
      end
    end
  end

  // threads
  logic [NT-1:0]      active, tup_rdy, th_busy, th_done, th_stall, th_start, th_take, part, done_seen;
  logic [IAW-1:0]     th_pc;
  logic               mx_re, mx_we, hold;
  logic [MADDR_W-1:0] mx_addr;
  word_t              mx_rdata [NT][LANES];
  word_t              tree_out [LANES];
  word_t              mx_wdata [LANES];
  logic               tree_in_v, tree_out_v;
  logic [15:0]        w;
  logic [31:0]        consumed, remaining, want, nrdy;
  logic [NT-1:0]      rdy, pend, sel;

  for (genvar t = 0; t < NT; t++) begin : g_act
    assign active[t] = (32'(t) < 32'(nthreads)) || (nthreads == 0);
  end

  assign remaining = tuples - consumed;
  assign want      = (remaining < 32'($countones(active))) ? remaining : 32'($countones(active));
  // round membership: threads holding a tuple, lowest first, at most the
  // tuples left in the epoch; `pend`: threads that may still get one soon
  assign rdy  = tup_rdy & active;
  assign pend = active & ~tup_rdy & ~src_idle;
  assign nrdy = 32'($countones(rdy));
  always_comb begin
    int unsigned n;
    sel = '0;
    n   = 0;
    for (int t = 0; t < NT; t++)
      if (rdy[t] && n < remaining) begin sel[t] = 1'b1; n++; end
  end

  assign hold      = (st != E_IDLE && st != E_WAIT && st != E_DONE);
  assign running   = (st != E_IDLE && st != E_DONE);
  assign train_done = (st == E_DONE);

  always_comb begin
    mx_re   = 1'b0;
    mx_addr = mr_addr;
    if (st == E_MRD)     begin mx_re = 1'b1; mx_addr = merge_src + MADDR_W'(w); end
    else if (st == E_MWAIT) mx_addr = merge_dst + MADDR_W'(w);
    else if (st == E_CONV_RD) begin mx_re = 1'b1; mx_addr = conv_addr; end
    else if (!running && mr_re) mx_re = 1'b1;
  end
  assign mx_we     = (st == E_MWAIT) && tree_out_v;
  assign mx_wdata  = tree_out;
  assign tree_in_v = (st == E_MTREE);

  for (genvar t = 0; t < NT; t++) begin : g_th
    exec_thread #(.NAC(NAC), .DMEM_DEPTH(DMEM_DEPTH), .IMEM_DEPTH(IMEM_DEPTH),
                  .FIFO_DEPTH(FIFO_DEPTH)) u_thread (
      .clk, .rst_n,
      .cfg_we, .cfg_dest, .cfg_ac, .cfg_au, .cfg_addr, .cfg_data,
      .t_valid(t_valid[t]), .t_ready(t_ready[t]), .t_data(t_data[t]), .t_last(t_last[t]),
      .in_base, .hold, .tuple_ready(tup_rdy[t]),
      .start(th_start[t]), .take(th_take[t]), .start_pc(th_pc), .busy(th_busy[t]), .done(th_done[t]),
      .stall(th_stall[t]),
      .mx_re, .mx_we(mx_we && active[t]), .mx_addr, .mx_wdata, .mx_rdata(mx_rdata[t])
    );
  end
  assign mr_data = mx_rdata[0];

  merge_tree #(.NT(NT), .LANES(LANES)) u_merge (
    .clk, .rst_n, .op(merge_op), .in_valid(tree_in_v), .part,
    .in_data(mx_rdata), .out_valid(tree_out_v), .out_data(tree_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= E_IDLE; part <= '0; th_start <= '0; th_take <= '0; th_pc <= '0; done_seen <= '0; w <= '0;
      consumed <= '0; epochs_done <= '0; rounds <= '0; partial_rounds <= '0; merges <= '0;
      stall_cycles <= '0; converged <= 1'b0;
    end else begin
      th_start <= '0;
      th_take  <= '0;
      if (|th_stall) stall_cycles <= stall_cycles + 1;
      unique case (st)
        E_IDLE, E_DONE: if (start_req) begin
          consumed <= '0; epochs_done <= '0; converged <= 1'b0; st <= E_WAIT;
        end
        E_WAIT: begin
          if (remaining == 0) begin
            st <= E_DONE;                       // nothing to train on
          end else if (rdy != '0 && (nrdy >= want || pend == '0)) begin
            part      <= sel;
            th_start  <= sel;
            th_take   <= sel;
            th_pc     <= seg_update;
            done_seen <= '0;
            rounds    <= rounds + 1;
            if ($countones(sel) < $countones(active)) partial_rounds <= partial_rounds + 1;
            st        <= E_RUN0;
          end
        end
        E_RUN0: begin
          done_seen <= done_seen | th_done;
          if (((done_seen | th_done) & part) == part && th_start == '0) begin
            consumed <= consumed + 32'($countones(part));
            w <= '0;
            st <= (merge_len == 0) ? E_RUN1 : E_MRD;
            if (merge_len == 0) begin
              th_start <= active; th_pc <= seg_post; done_seen <= '0;
            end
          end
        end
        E_MRD:   st <= E_MTREE;
        E_MTREE: st <= E_MWAIT;
        E_MWAIT: if (tree_out_v) begin
          merges <= merges + 1;
          if (w + 1 == merge_len) begin
            th_start <= active; th_pc <= seg_post; done_seen <= '0;
            st <= E_RUN1;
          end else begin
            w <= w + 1; st <= E_MRD;
          end
        end
        E_RUN1: begin
          done_seen <= done_seen | th_done;
          if (((done_seen | th_done) & active) == active && th_start == '0) begin
            if (consumed >= tuples) begin
              epochs_done <= epochs_done + 1;
              consumed <= '0;
              st <= E_CONV_RD;
            end else begin
              st <= E_WAIT;
            end
          end
        end
        E_CONV_RD: st <= E_CONV;
        E_CONV: begin
          if (conv_en && mx_rdata[0][0] != 0) begin
            converged <= 1'b1; st <= E_DONE;
          end else if (epochs_done >= epochs) begin
            st <= E_DONE;
          end else begin
            st <= E_WAIT;
          end
        end
        default: st <= E_IDLE;
      endcase
    end
  end
endmodule

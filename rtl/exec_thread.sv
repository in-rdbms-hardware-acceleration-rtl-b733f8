// exec_thread: one thread of the execution engine, i.e. one instance of the
// update rule. It is a group of NAC analytic clusters joined by the thread's
// inter-cluster bus, plus the loader that writes an incoming tuple into the
// units' data memories.
//
// Tuple loading: the thread's strider sends the tuple as 32-bit words, the
// last one flagged. Word k goes to lane k mod LANES (lane = cluster*8 + unit)
// at data-memory address in_base + k div LANES, so that an element-wise
// operation over the tuple is spread over all units. The thread accepts
// words only while it is idle, holds no unconsumed tuple and the engine does
// not `hold` it (merge traffic uses the same memory port). `tuple_ready`
// stays high from the last word until the next `start`.
//
// Run: `start` with `start_pc` starts every cluster at that PC; `done`
// pulses when all of them have halted. `take` with `start` marks a run of
// the update rule, which consumes the held tuple (`tuple_ready` falls). Inter-cluster bus: a word sent by
// unit 0 of cluster a to cluster b enters the bus FIFO of unit 0 of cluster
// b in the next cycle; two senders in one cycle are a schedule error
// (assertion). Merge port `mx_*`: read or write one word per lane at one
// address, for the merge tree; configuration writes go to one cluster/unit.
//
// Paper: threads of identical structure built from several ACs, inter-AC
// bus. Own: the lane-interleaved tuple placement and the loader handshake.
module exec_thread
  import dana_pkg::*;
#(
  parameter int unsigned NAC        = 2,
  parameter int unsigned DMEM_DEPTH = 2048,
  parameter int unsigned IMEM_DEPTH = 256,
  parameter int unsigned FIFO_DEPTH = 8,
  localparam int unsigned NAU       = 8,
  localparam int unsigned LANES     = NAC * NAU,
  localparam int unsigned IAW       = $clog2(IMEM_DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  // configuration (broadcast by the engine)
  input  logic               cfg_we,
  input  cdest_e             cfg_dest,
  input  logic [7:0]         cfg_ac,
  input  logic [7:0]         cfg_au,
  input  logic [15:0]        cfg_addr,
  input  beat_t              cfg_data,
  // tuple input
  input  logic               t_valid,
  output logic               t_ready,
  input  word_t              t_data,
  input  logic               t_last,
  input  logic [MADDR_W-1:0] in_base,
  input  logic               hold,
  output logic               tuple_ready,
  // run control
  input  logic               start,
  input  logic               take,        // with start: this run consumes the held tuple
  input  logic [IAW-1:0]     start_pc,
  output logic               busy,
  output logic               done,
  output logic               stall,
  // merge port
  input  logic               mx_re,
  input  logic               mx_we,
  input  logic [MADDR_W-1:0] mx_addr,
  input  word_t              mx_wdata [LANES],
  output word_t              mx_rdata [LANES]
);
  logic [NAC-1:0] ac_busy, ac_done, ac_stall, xin_v, xout_v;
  logic [2:0]     xout_ac [NAC];
  word_t          xout_d [NAC];
  word_t          xin_d;
  logic [NAC-1:0] done_seen;
  logic           running;
  logic [31:0]    widx;       // tuple word index

  assign busy  = running;
  assign stall = |ac_stall;
  assign t_ready = !tuple_ready && !running && !hold && !cfg_we;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; done_seen <= '0; done <= 1'b0; tuple_ready <= 1'b0; widx <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        running <= 1'b1; done_seen <= '0;
        if (take) tuple_ready <= 1'b0;
      end else if (running) begin
        if ((done_seen | ac_done) == '1) begin
          running <= 1'b0; done <= 1'b1;
        end
        done_seen <= done_seen | ac_done;
      end
      if (t_valid && t_ready) begin
        widx <= t_last ? '0 : widx + 1;
        if (t_last) tuple_ready <= 1'b1;
      end
    end
  end

  // inter-cluster bus
  always_comb begin
    xin_v = '0;
    xin_d = '0;
    for (int a = NAC - 1; a >= 0; a--) begin
      if (xout_v[a]) begin
        xin_v = '0;
        xin_v[32'(xout_ac[a]) % NAC] = 1'b1;
        xin_d = xout_d[a];
      end
    end
  end
  logic [NAC-1:0] xin_v_q;
  word_t          xin_d_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin xin_v_q <= '0; xin_d_q <= '0; end
    else begin xin_v_q <= xin_v; xin_d_q <= xin_d; end
  end

  for (genvar a = 0; a < NAC; a++) begin : g_ac
    logic [NAU-1:0]     ext_we;
    logic [MADDR_W-1:0] ext_addr;
    word_t              ext_wdata [NAU];
    word_t              ext_rdata [NAU];
    logic [NAU-1:0]     ui_we;

    always_comb begin
      ext_we   = '0;
      ext_addr = mx_addr;
      for (int u = 0; u < NAU; u++) ext_wdata[u] = mx_wdata[a * NAU + u];
      for (int u = 0; u < NAU; u++)
        ui_we[u] = cfg_we && cfg_dest == CD_AU_IMEM && cfg_ac == 8'(a) && cfg_au == 8'(u);
      if (cfg_we && cfg_dest == CD_AU_DMEM && cfg_ac == 8'(a)) begin
        ext_addr = cfg_addr[MADDR_W-1:0];
        for (int u = 0; u < NAU; u++) begin
          ext_we[u]    = (cfg_au == 8'(u));
          ext_wdata[u] = word_t'(cfg_data[DATA_W-1:0]);
        end
      end else if (t_valid && t_ready) begin
        ext_addr = in_base + MADDR_W'(widx / LANES);
        for (int u = 0; u < NAU; u++) begin
          ext_we[u]    = ((widx % LANES) == 32'(a * NAU + u));
          ext_wdata[u] = t_data;
        end
      end else if (mx_we) begin
        ext_we = '1;
      end
    end

    analytic_cluster #(.NAU(NAU), .DMEM_DEPTH(DMEM_DEPTH), .IMEM_DEPTH(IMEM_DEPTH),
                       .FIFO_DEPTH(FIFO_DEPTH)) u_ac (
      .clk, .rst_n,
      .ci_we(cfg_we && cfg_dest == CD_AC_IMEM && cfg_ac == 8'(a)),
      .ci_addr(cfg_addr[IAW-1:0]), .ci_wdata(ac_inst_t'(cfg_data[$bits(ac_inst_t)-1:0])),
      .ui_we, .ui_addr(cfg_addr[IAW-1:0]), .ui_wdata(au_inst_t'(cfg_data[$bits(au_inst_t)-1:0])),
      .ext_we, .ext_re(mx_re), .ext_addr, .ext_wdata, .ext_rdata,
      .start, .start_pc, .busy(ac_busy[a]), .done(ac_done[a]), .stall(ac_stall[a]),
      .xin_valid(xin_v_q[a]), .xin_data(xin_d_q),
      .xout_valid(xout_v[a]), .xout_ac(xout_ac[a]), .xout_data(xout_d[a])
    );

    for (genvar u = 0; u < NAU; u++) begin : g_rd
      assign mx_rdata[a * NAU + u] = ext_rdata[u];
    end
  end

  a_one_xbus_sender: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(xout_v));
  a_no_start_busy:   assert property (@(posedge clk) disable iff (!rst_n) start |-> !running);
endmodule

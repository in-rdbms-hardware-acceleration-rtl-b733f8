// access_engine: the multi-threaded access engine. Pages from the database
// buffer pool and configuration data enter on one stream, pass through the
// shifter (byte_aligner), and the routing FSM (access_router) sends
// configuration words to their destinations and each page to a free page
// buffer. Each page buffer has its own strider, which unpacks the page and
// sends cleaned tuple words to its execution thread (strider i feeds
// thread i).
//
// Configuration words addressed to the striders (instruction buffer and the
// strider control registers: program length, insert constant, number of
// buffers in use) are consumed here; all other configuration words leave on
// the cfg_* port for the execution engine.
//
// Interface: input stream s_* (s_first with s_off gives the byte offset of
// the packet's first useful byte, s_is_cfg tells configuration from page
// data); per-thread tuple streams t_*; `pages_done` counts pages whose
// strider program has finished; `src_idle[i]` is high while buffer i holds
// no page, so thread i can expect no tuple until another page arrives. Follows the paper's access engine (shifter,
// FSM, page buffers, striders); stream and configuration formats are this
// design's.
module access_engine
  import dana_pkg::*;
#(
  parameter int unsigned NBUF        = 4,
  parameter int unsigned PAGE_BYTES  = 32768,
  parameter int unsigned SIMEM_DEPTH = 64,
  localparam int unsigned PWORDS     = PAGE_BYTES / BEAT_BYTES,
  localparam int unsigned PAW        = $clog2(PWORDS),
  localparam int unsigned SIAW       = $clog2(SIMEM_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // buffer-pool / configuration stream
  input  logic              s_valid,
  output logic              s_ready,
  input  beat_t             s_data,
  input  logic              s_first,
  input  logic              s_last,
  input  logic [2:0]        s_off,
  input  logic              s_is_cfg,
  // configuration for the execution engine
  output logic              cfg_we,
  output cdest_e            cfg_dest,
  output logic [7:0]        cfg_ac,
  output logic [7:0]        cfg_au,
  output logic [15:0]       cfg_addr,
  output beat_t             cfg_data,
  // tuple streams, one per strider/thread
  output logic [NBUF-1:0]   t_valid,
  input  logic [NBUF-1:0]   t_ready,
  output word_t             t_data [NBUF],
  output logic [NBUF-1:0]   t_last,
  // status
  output logic [31:0]       pages_done,
  output logic              page_stall,
  output logic [NBUF-1:0]   src_idle      // buffer i holds no page: strider i sends nothing
);
  logic  a_valid, a_ready, a_last;
  beat_t a_data;

  byte_aligner #(.BYTES(BEAT_BYTES)) u_shifter (
    .clk, .rst_n,
    .in_valid(s_valid), .in_ready(s_ready), .in_data(s_data),
    .in_first(s_first), .in_last(s_last), .in_off(s_off),
    .out_valid(a_valid), .out_ready(a_ready), .out_data(a_data), .out_last(a_last)
  );

  logic              r_cfg_we;
  cdest_e            r_cfg_dest;
  logic [7:0]        r_cfg_ac, r_cfg_au;
  logic [15:0]       r_cfg_addr;
  beat_t             r_cfg_data;
  logic [NBUF-1:0]   pb_we, page_start, page_done, buf_busy;
  logic [PAW-1:0]    pb_addr;
  beat_t             pb_wdata;
  logic [7:0]        num_bufs;
  logic [SIAW:0]     prog_len;
  logic [7:0]        ins_const;

  access_router #(.NBUF(NBUF), .PAGE_BYTES(PAGE_BYTES)) u_router (
    .clk, .rst_n, .num_bufs,
    .in_valid(a_valid), .in_ready(a_ready), .in_data(a_data), .in_is_cfg(s_is_cfg),
    .cfg_we(r_cfg_we), .cfg_dest(r_cfg_dest), .cfg_ac(r_cfg_ac), .cfg_au(r_cfg_au),
    .cfg_addr(r_cfg_addr), .cfg_data(r_cfg_data),
    .pb_we, .pb_addr, .pb_wdata, .page_start, .page_done, .buf_busy, .page_stall
  );

  // strider control registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      num_bufs <= 8'(NBUF); prog_len <= '0; ins_const <= '0;
    end else if (r_cfg_we && r_cfg_dest == CD_STRIDER_REG) begin
      unique case (r_cfg_addr)
        SR_PROG_LEN:  prog_len  <= r_cfg_data[SIAW:0];
        SR_INS_CONST: ins_const <= r_cfg_data[7:0];
        SR_THREADS:   num_bufs  <= r_cfg_data[7:0];
        default: ;
      endcase
    end
  end

  assign src_idle = ~buf_busy;

  assign cfg_we   = r_cfg_we && (r_cfg_dest != CD_STRIDER_IMEM) && (r_cfg_dest != CD_STRIDER_REG);
  assign cfg_dest = r_cfg_dest;
  assign cfg_ac   = r_cfg_ac;
  assign cfg_au   = r_cfg_au;
  assign cfg_addr = r_cfg_addr;
  assign cfg_data = r_cfg_data;

  for (genvar i = 0; i < NBUF; i++) begin : g_lane
    logic              sb_re;
    logic [PAW-1:0]    sb_addr;
    beat_t             sb_rdata, sb_wdata;
    logic [BEAT_BYTES-1:0] sb_be;
    logic              s_busy;

    page_buffer #(.PAGE_BYTES(PAGE_BYTES), .BYTES(BEAT_BYTES)) u_pb (
      .clk,
      .a_we(pb_we[i]), .a_addr(pb_addr), .a_wdata(pb_wdata),
      .b_re(sb_re), .b_addr(sb_addr), .b_rdata(sb_rdata), .b_be(sb_be), .b_wdata(sb_wdata)
    );

    strider #(.PAGE_BYTES(PAGE_BYTES), .IMEM_DEPTH(SIMEM_DEPTH)) u_strider (
      .clk, .rst_n,
      .imem_we(r_cfg_we && r_cfg_dest == CD_STRIDER_IMEM),
      .imem_addr(r_cfg_addr[SIAW-1:0]), .imem_wdata(r_cfg_data[SINST_W-1:0]),
      .prog_len, .ins_const, .num_threads(num_bufs),
      .start(page_start[i]), .busy(s_busy), .done(page_done[i]),
      .pb_re(sb_re), .pb_addr(sb_addr), .pb_rdata(sb_rdata), .pb_be(sb_be), .pb_wdata(sb_wdata),
      .out_valid(t_valid[i]), .out_ready(t_ready[i]), .out_data(t_data[i]), .out_last(t_last[i])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pages_done <= '0;
    else        pages_done <= pages_done + 32'($countones(page_done));
  end
endmodule

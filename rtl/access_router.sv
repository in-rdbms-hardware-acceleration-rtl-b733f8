// access_router: the finite state machine of the access engine that decides
// where each aligned word from the shifter goes.
//
// Two kinds of packets share the input stream, told apart by `in_is_cfg`:
//  * configuration packets: a header beat (dana_pkg::cfg_hdr_t: destination,
//    cluster, unit, start address, word count) followed by `count` payload
//    beats, which leave on the cfg_* write port one per cycle with the address
//    counting up from `addr`;
//  * page packets: PAGE_BYTES of one database page, written into the next free
//    page buffer (round robin over the first `num_bufs` buffers). When the
//    page is complete the router pulses `page_start` for that buffer's strider;
//    the buffer stays busy until the strider reports `page_done`. While every
//    buffer is busy, a new page is held off (`in_ready` low).
//
// Timing: one beat per cycle, no added latency. The paper gives the FSM's
// role (route and destination of configuration data) and the page-level
// transfer into per-strider page buffers; the packet formats and round-robin
// buffer choice are this design's.
module access_router
  import dana_pkg::*;
#(
  parameter int unsigned NBUF       = 4,
  parameter int unsigned PAGE_BYTES = 32768,
  localparam int unsigned PWORDS    = PAGE_BYTES / BEAT_BYTES,
  localparam int unsigned PAW       = $clog2(PWORDS),
  localparam int unsigned BW        = (NBUF > 1) ? $clog2(NBUF) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [7:0]        num_bufs,     // buffers (striders/threads) in use
  // aligned input
  input  logic              in_valid,
  output logic              in_ready,
  input  beat_t             in_data,
  input  logic              in_is_cfg,
  // configuration write port
  output logic              cfg_we,
  output cdest_e            cfg_dest,
  output logic [7:0]        cfg_ac,
  output logic [7:0]        cfg_au,
  output logic [15:0]       cfg_addr,
  output beat_t             cfg_data,
  // page buffer fill
  output logic [NBUF-1:0]   pb_we,
  output logic [PAW-1:0]    pb_addr,
  output beat_t             pb_wdata,
  output logic [NBUF-1:0]   page_start,
  input  logic [NBUF-1:0]   page_done,
  output logic [NBUF-1:0]   buf_busy,
  output logic              page_stall     // a page waits for a free buffer
);
  typedef enum logic [1:0] {R_IDLE, R_CFG, R_PAGE} rst_e;
  rst_e st;

  cfg_hdr_t        hdr_q;
  logic [15:0]     cnt_q, addr_q;
  logic [PAW-1:0]  waddr_q;
  logic [BW-1:0]   sel_q, rr_q;
  logic [BW-1:0]   free_idx;
  logic            free_found;
  logic [7:0]      nb;
  cfg_hdr_t        in_hdr;

  assign in_hdr = cfg_hdr_t'(in_data);

  assign nb = (num_bufs == 0 || num_bufs > 8'(NBUF)) ? 8'(NBUF) : num_bufs;

  // first free buffer at or after the round-robin pointer
  always_comb begin
    free_found = 1'b0;
    free_idx   = '0;
    for (int k = NBUF - 1; k >= 0; k--) begin
      int unsigned j;
      j = (32'(rr_q) + 32'(k)) % 32'(nb);
      if (!buf_busy[j]) begin
        free_found = 1'b1;
        free_idx   = BW'(j);
      end
    end
  end

  assign page_stall = (st == R_IDLE) && in_valid && !in_is_cfg && !free_found;
  assign in_ready   = !page_stall;

  always_comb begin
    cfg_we   = (st == R_CFG) && in_valid;
    cfg_dest = hdr_q.dest;
    cfg_ac   = hdr_q.ac;
    cfg_au   = hdr_q.au;
    cfg_addr = addr_q;
    cfg_data = in_data;
    pb_we    = '0;
    pb_wdata = in_data;
    pb_addr  = waddr_q;
    if (st == R_IDLE && in_valid && !in_is_cfg && free_found) begin
      pb_we[free_idx] = 1'b1;
      pb_addr         = '0;
    end else if (st == R_PAGE && in_valid) begin
      pb_we[sel_q] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= R_IDLE; hdr_q <= '0; cnt_q <= '0; addr_q <= '0; waddr_q <= '0;
      sel_q <= '0; rr_q <= '0; buf_busy <= '0; page_start <= '0;
    end else begin
      page_start <= '0;
      buf_busy   <= buf_busy & ~page_done;
      unique case (st)
        R_IDLE: if (in_valid && in_ready) begin
          if (in_is_cfg) begin
            hdr_q  <= in_hdr;
            cnt_q  <= in_hdr.count;
            addr_q <= in_hdr.addr;
            if (in_hdr.count != 0) st <= R_CFG;
          end else begin
            sel_q   <= free_idx;
            waddr_q <= PAW'(1);
            buf_busy[free_idx] <= 1'b1;
            rr_q    <= BW'((32'(free_idx) + 1) % 32'(nb));
            st      <= R_PAGE;
          end
        end
        R_CFG: if (in_valid) begin
          addr_q <= addr_q + 1'b1;
          cnt_q  <= cnt_q - 1'b1;
          if (cnt_q == 16'd1) st <= R_IDLE;
        end
        R_PAGE: if (in_valid) begin
          waddr_q <= waddr_q + 1'b1;
          if (waddr_q == PAW'(PWORDS - 1)) begin
            page_start[sel_q] <= 1'b1;
            st <= R_IDLE;
          end
        end
        default: st <= R_IDLE;
      endcase
    end
  end

  a_cfg_no_page_collide: assert property (@(posedge clk) disable iff (!rst_n)
    (page_start != 0) |-> ((page_start & page_done) == 0));
endmodule

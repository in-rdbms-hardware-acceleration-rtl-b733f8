// dana_top: the complete accelerator. The access engine takes database pages
// (as they sit in the RDBMS buffer pool) and configuration data from one
// stream, stores each page in an on-chip page buffer and lets the page's
// strider extract the training tuples; strider i feeds execution thread i.
// The execution engine runs the update rule in every thread, merges the
// threads' results through the merge tree, applies the post-merge step and
// repeats until the epoch count or the convergence variable ends training.
// The trained model is read back through the mr_* port.
//
// Interface: s_* is the host stream (the paper moves it over AXI; here a
// plain valid/ready stream with s_first/s_off for the first useful byte of
// each packet, s_is_cfg to mark configuration packets). Status outputs count
// pages, rounds, merges, epochs and stall cycles.
//
// Default sizes: 32 KB pages and 8 units per cluster follow the paper; four
// threads (and four page buffers/striders) of two clusters each, 2048-word
// unit memories and 256-entry instruction buffers are this design's choice
// (the paper sizes them per workload and FPGA).
module dana_top
  import dana_pkg::*;
#(
  parameter int unsigned NT          = 4,
  parameter int unsigned NAC         = 2,
  parameter int unsigned PAGE_BYTES  = 32768,
  parameter int unsigned DMEM_DEPTH  = 2048,
  parameter int unsigned IMEM_DEPTH  = 256,
  parameter int unsigned SIMEM_DEPTH = 64,
  parameter int unsigned FIFO_DEPTH  = 8,
  localparam int unsigned LANES      = NAC * 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               s_valid,
  output logic               s_ready,
  input  beat_t              s_data,
  input  logic               s_first,
  input  logic               s_last,
  input  logic [2:0]         s_off,
  input  logic               s_is_cfg,
  input  logic               mr_re,
  input  logic [MADDR_W-1:0] mr_addr,
  output word_t              mr_data [LANES],
  output logic               running,
  output logic               train_done,
  output logic               converged,
  output logic [31:0]        pages_done,
  output logic               page_stall,
  output logic [31:0]        epochs_done,
  output logic [31:0]        rounds,
  output logic [31:0]        partial_rounds,
  output logic [31:0]        merges,
  output logic [31:0]        stall_cycles,
  output logic [31:0]        tuple_stall_cycles
);
  logic          cfg_we;
  cdest_e        cfg_dest;
  logic [7:0]    cfg_ac, cfg_au;
  logic [15:0]   cfg_addr;
  beat_t         cfg_data;
  logic [NT-1:0] t_valid, t_ready, t_last, src_idle;
  word_t         t_data [NT];

  access_engine #(.NBUF(NT), .PAGE_BYTES(PAGE_BYTES), .SIMEM_DEPTH(SIMEM_DEPTH)) u_access (
    .clk, .rst_n,
    .s_valid, .s_ready, .s_data, .s_first, .s_last, .s_off, .s_is_cfg,
    .cfg_we, .cfg_dest, .cfg_ac, .cfg_au, .cfg_addr, .cfg_data,
    .t_valid, .t_ready, .t_data, .t_last,
    .pages_done, .page_stall, .src_idle
  );

  exec_engine #(.NT(NT), .NAC(NAC), .DMEM_DEPTH(DMEM_DEPTH), .IMEM_DEPTH(IMEM_DEPTH),
                .FIFO_DEPTH(FIFO_DEPTH)) u_exec (
    .clk, .rst_n,
    .cfg_we, .cfg_dest, .cfg_ac, .cfg_au, .cfg_addr, .cfg_data,
    .t_valid, .t_ready, .t_data, .t_last, .src_idle,
    .mr_re, .mr_addr, .mr_data,
    .running, .train_done, .converged, .epochs_done, .rounds, .partial_rounds, .merges,
    .stall_cycles
  );

  // cycles in which a strider holds a tuple word its thread cannot yet take
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tuple_stall_cycles <= '0;
    else if ((t_valid & ~t_ready) != '0) tuple_stall_cycles <= tuple_stall_cycles + 1;
  end
endmodule

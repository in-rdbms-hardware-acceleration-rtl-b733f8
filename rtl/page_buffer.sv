// page_buffer: on-chip block-RAM store for one uncompressed database page.
//
// Port A is written by the access engine's routing FSM as pages stream in
// (one aligned word per cycle). Port B belongs to the page's strider: a
// synchronous read (data one cycle after the address) and a byte-enabled
// write used by the strider's writeB instruction for write-back.
// Both ports follow the true-dual-port block RAM of the target FPGA.
//
// Paper: one page per buffer, one strider per buffer, 32 KB pages by default.
// Own choices: 8-byte words and the port arrangement.
module page_buffer #(
  parameter int unsigned PAGE_BYTES = 32768,
  parameter int unsigned BYTES      = 8,
  localparam int unsigned WORDS     = PAGE_BYTES / BYTES,
  localparam int unsigned AW        = $clog2(WORDS)
) (
  input  logic                clk,
  // port A: fill
  input  logic                a_we,
  input  logic [AW-1:0]       a_addr,
  input  logic [8*BYTES-1:0]  a_wdata,
  // port B: strider
  input  logic                b_re,
  input  logic [AW-1:0]       b_addr,
  output logic [8*BYTES-1:0]  b_rdata,
  input  logic [BYTES-1:0]    b_be,
  input  logic [8*BYTES-1:0]  b_wdata
);
  logic [8*BYTES-1:0] mem [WORDS];

  // both ports in one process; a port-B byte write wins a same-cycle collision
  always_ff @(posedge clk) begin
    if (a_we) mem[a_addr] <= a_wdata;
    for (int b = 0; b < BYTES; b++)
      if (b_be[b]) mem[b_addr][8*b +: 8] <= b_wdata[8*b +: 8];
    if (b_re) b_rdata <= mem[b_addr];
  end
endmodule

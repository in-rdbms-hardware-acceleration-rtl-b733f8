// byte_aligner: the shifter of the access engine.
//
// Pages and configuration data arrive as a stream of BYTES-wide beats, but the
// first useful byte of a packet need not sit at byte 0 of the first beat.
// The aligner shifts the stream so that useful byte 0 lands at byte 0 of the
// first output word, i.e. on the read width of the block RAM behind it. It
// keeps the previous beat and forms each output word from the upper bytes of
// that beat and the lower bytes of the current one, as a barrel shift by
// `off` bytes of the two-beat window.
//
// Interface: valid/ready stream in and out. `in_first` marks the first beat
// of a packet and qualifies `in_off` (byte offset, 0..BYTES-1). The packet
// must carry a multiple of BYTES useful bytes; with off != 0 it therefore has
// one more input beat than output words. Timing: combinational from input
// to output (no added latency); the first beat of an offset packet is
// absorbed into the holding register without producing an output.
//
// The paper names the shifter and its purpose (alignment to the BRAM read
// width); the two-beat window structure is this design's choice.
module byte_aligner #(
  parameter int unsigned BYTES = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [8*BYTES-1:0]   in_data,
  input  logic                 in_first,
  input  logic                 in_last,
  input  logic [$clog2(BYTES)-1:0] in_off,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [8*BYTES-1:0]   out_data,
  output logic                 out_last
);
  localparam int unsigned W = 8 * BYTES;

  logic [W-1:0]               prev_q;
  logic [$clog2(BYTES)-1:0]   off_q;
  logic [$clog2(BYTES)-1:0]   off_cur;
  logic                       absorb;     // first beat of an offset packet
  logic [2*W-1:0]             window;

  assign off_cur   = in_first ? in_off : off_q;
  assign absorb    = in_first && (in_off != '0);
  assign window    = {in_data, (off_cur == '0) ? in_data : prev_q};
  assign out_data  = (off_cur == '0) ? in_data : window[8*off_cur +: W];
  assign out_valid = in_valid && !absorb;
  assign out_last  = in_last;
  assign in_ready  = absorb ? 1'b1 : out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_q <= '0;
      off_q  <= '0;
    end else if (in_valid && in_ready) begin
      prev_q <= in_data;
      if (in_first) off_q <= in_off;
    end
  end
endmodule

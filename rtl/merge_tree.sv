// merge_tree: the computationally-enabled tree bus that combines the results
// of the execution threads according to the merge function.
//
// Each of the NT threads presents a vector of LANES words (one per analytic
// unit). The tree combines the threads lane by lane with one operation (add,
// multiply, max or min, Q16.16) in ceil(log2 NT) levels, with a register after
// every level, so a result leaves LEVELS cycles after it enters and a new
// vector may enter every cycle. Threads whose bit in `part` is clear did not
// take part in this round; they enter as the operation's identity element.
//
// Paper: results across threads are combined via a tree bus with attached
// ALUs, according to the merge function (e.g. merge(grad, 8, "+")). Own:
// the set of operations beyond "+", the pipelining and the identity padding.
module merge_tree
  import dana_pkg::*;
#(
  parameter int unsigned NT    = 4,
  parameter int unsigned LANES = 16,
  localparam int unsigned LEVELS = (NT > 1) ? $clog2(NT) : 1,
  localparam int unsigned NP     = 1 << LEVELS
) (
  input  logic           clk,
  input  logic           rst_n,
  input  mop_e           op,
  input  logic           in_valid,
  input  logic [NT-1:0]  part,
  input  word_t          in_data [NT][LANES],
  output logic           out_valid,
  output word_t          out_data [LANES]
);
  localparam word_t ONE = word_t'(32'sd1 <<< FRAC_W);

  function automatic word_t ident(input mop_e o);
    unique case (o)
      M_ADD:   return '0;
      M_MUL:   return ONE;
      M_MAX:   return word_t'(32'sh8000_0000);
      default: return word_t'(32'sh7FFF_FFFF);
    endcase
  endfunction

  function automatic word_t comb2(input mop_e o, input word_t x, input word_t y);
    unique case (o)
      M_ADD:   return x + y;
      M_MUL:   return q_mul(x, y);
      M_MAX:   return (x > y) ? x : y;
      default: return (x < y) ? x : y;
    endcase
  endfunction

  // lvl0: tree inputs after identity padding; lvq[s]: registered output of level s
  word_t lvl0 [NP][LANES];
  word_t lvq  [LEVELS][NP][LANES];
  logic  vq   [LEVELS];
  mop_e  opq  [LEVELS];

  always_comb begin
    for (int t = 0; t < NP; t++)
      for (int l = 0; l < LANES; l++)
        lvl0[t][l] = (t < NT && part[t % NT]) ? in_data[t % NT][l] : ident(op);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < LEVELS; s++) begin
        vq[s] <= 1'b0; opq[s] <= M_ADD;
        for (int t = 0; t < NP; t++)
          for (int l = 0; l < LANES; l++) lvq[s][t][l] <= '0;
      end
    end else begin
      vq[0]  <= in_valid;
      opq[0] <= op;
      for (int t = 0; t < NP / 2; t++)
        for (int l = 0; l < LANES; l++)
          lvq[0][t][l] <= comb2(op, lvl0[2*t][l], lvl0[2*t+1][l]);
      for (int s = 1; s < LEVELS; s++) begin
        vq[s]  <= vq[s-1];
        opq[s] <= opq[s-1];
        for (int t = 0; t < (NP >> (s + 1)); t++)
          for (int l = 0; l < LANES; l++)
            lvq[s][t][l] <= comb2(opq[s-1], lvq[s-1][2*t][l], lvq[s-1][2*t+1][l]);
      end
    end
  end

  assign out_valid = vq[LEVELS-1];
  assign out_data  = lvq[LEVELS-1][0];
endmodule

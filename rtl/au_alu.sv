// au_alu: arithmetic logic unit of an analytic unit.
//
// Combinational; operands and result are signed Q16.16 fixed point.
//   ADD, SUB, MUL (product rounded toward minus infinity), DIV (a/b; b = 0
//   gives the largest value of a's sign), GT/LT (1.0 if true, else 0),
//   SIGM  sigmoid by the PLAN piecewise-linear approximation:
//         |x|>=5: 1; 2.375<=|x|<5: |x|/32+0.84375; 1<=|x|<2.375: |x|/8+0.625;
//         |x|<1: |x|/4+0.5; negative x gives 1-y,
//   GAUS  gaussian exp(-x^2), linear interpolation between samples of
//         exp(-(k/4)^2), k = 0..16 (a 17-entry table), 0 for |x| >= 4,
//   SQRT  square root (0 for negative input), exact integer root of x*2^16,
//   MOV   a.
// The paper lists the operations (+ - * / > < sigmoid gaussian sqrt) and says
// the ALU holds those the program needs; the number format and the
// approximations of the non-linear functions are this design's choice.
module au_alu
  import dana_pkg::*;
(
  input  aop_e  op,
  input  word_t a,
  input  word_t b,
  output word_t y
);
  localparam word_t ONE = word_t'(32'sd1 <<< FRAC_W);

  // exp(-(k/4)^2) * 2^16, rounded
  localparam logic [16:0] GTAB [17] = '{17'd65536, 17'd61565, 17'd51039, 17'd37341,
    17'd24109, 17'd13737, 17'd6907, 17'd3065, 17'd1200, 17'd415, 17'd127, 17'd34,
    17'd8, 17'd2, 17'd0, 17'd0, 17'd0};

  function automatic word_t f_sigmoid(input word_t x);
    word_t ax, r;
    ax = (x < 0) ? -x : x;
    if (ax >= word_t'(5 <<< FRAC_W))          r = ONE;
    else if (ax >= word_t'(32'h0002_6000))    r = (ax >>> 5) + word_t'(32'h0000_D800);
    else if (ax >= ONE)                       r = (ax >>> 3) + word_t'(32'h0000_A000);
    else                                      r = (ax >>> 2) + word_t'(32'h0000_8000);
    return (x < 0) ? ONE - r : r;
  endfunction

  function automatic word_t f_gauss(input word_t x);
    word_t       ax;
    logic [3:0]  k;
    logic [13:0] fr;     // position between samples, 14 fractional bits
    logic signed [18:0] y0, y1;
    logic signed [33:0] t;
    ax = (x < 0) ? -x : x;
    if (ax >= word_t'(4 <<< FRAC_W)) return '0;
    k  = ax[17:14];                               // integer part of 4|x|
    fr = ax[13:0];
    y0 = 19'(GTAB[5'(k)]);
    y1 = 19'(GTAB[5'(k) + 5'd1]);
    t  = (34'(y1 - y0) * $signed({1'b0, fr})) >>> 14;
    return word_t'(34'(y0) + t);
  endfunction

  function automatic word_t f_sqrt(input word_t x);
    logic [47:0] v;
    logic [47:0] res, bitv;
    if (x <= 0) return '0;
    v    = {x, 16'd0};
    res  = '0;
    bitv = 48'd1 << 46;
    for (int i = 0; i < 24; i++) begin
      if (v >= res + bitv) begin
        v   = v - (res + bitv);
        res = (res >> 1) + bitv;
      end else begin
        res = res >> 1;
      end
      bitv = bitv >> 2;
    end
    return word_t'(res[31:0]);
  endfunction

  function automatic word_t f_div(input word_t n, input word_t d);
    logic signed [63:0] q;
    if (d == 0) return (n < 0) ? word_t'(32'sh8000_0000) : word_t'(32'sh7FFF_FFFF);
    q = (64'(n) <<< FRAC_W) / 64'(d);
    return word_t'(q);
  endfunction

  always_comb begin
    unique case (op)
      OP_ADD:  y = a + b;
      OP_SUB:  y = a - b;
      OP_MUL:  y = q_mul(a, b);
      OP_DIV:  y = f_div(a, b);
      OP_GT:   y = (a > b) ? ONE : '0;
      OP_LT:   y = (a < b) ? ONE : '0;
      OP_SIGM: y = f_sigmoid(a);
      OP_GAUS: y = f_gauss(a);
      OP_SQRT: y = f_sqrt(a);
      OP_MOV:  y = a;
      default: y = '0;
    endcase
  end
endmodule

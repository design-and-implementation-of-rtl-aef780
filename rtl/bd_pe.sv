// Processing element of the SC/SCL decoder.
//
// Takes two LLRs a = alpha_i and b = alpha_{i+2^(s-1)} of a node at stage s
// and computes both child messages at once:
//   alpha_l = sgn(a) sgn(b) min(|a|,|b|)            (min-sum f)
//   alpha_r = b + (1 - 2 beta_l) a                  (g, saturated)
// and outputs the one picked by sel_g, which the decoder controller drives
// from the index of the leaf being estimated. Purely combinational.
// Both the f/g equations and the "compute both, select one" structure follow
// the paper; the symmetric saturation to +-(2^(W-1)-1), which keeps |y|
// representable in W-1 bits, is this design's choice.
module bd_pe #(
  parameter int unsigned W = bd_pkg::W_D
) (
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  input  logic                beta_l,
  input  logic                sel_g,
  output logic signed [W-1:0] y
);

  localparam logic signed [W:0] MAXV = (W+1)'((1 << (W-1)) - 1);

  logic [W-1:0]        abs_a, abs_b, abs_min;
  logic signed [W-1:0] f_out, g_out;
  logic signed [W:0]   g_sum;

  always_comb begin
    abs_a   = a[W-1] ? W'(-a) : W'(a);
    abs_b   = b[W-1] ? W'(-b) : W'(b);
    abs_min = (abs_a < abs_b) ? abs_a : abs_b;
    f_out   = (a[W-1] ^ b[W-1]) ? -$signed(abs_min) : $signed(abs_min);

    g_sum = beta_l ? ($signed({b[W-1], b}) - $signed({a[W-1], a}))
                   : ($signed({b[W-1], b}) + $signed({a[W-1], a}));
    if (g_sum > MAXV)       g_out = W'(MAXV);
    else if (g_sum < -MAXV) g_out = W'(-MAXV);
    else                    g_out = g_sum[W-1:0];

    y = sel_g ? g_out : f_out;
  end

endmodule

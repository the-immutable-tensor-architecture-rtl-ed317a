// swiglu_gate: the gated activation of the SwiGLU feed-forward network,
//     g = sigma(h1) * h3   (element by element),
// where h1 = W1 x and h3 = W3 x are INT8 vectors with 4 fractional bits.
//
// sigma is the Swish/SiLU of SwiGLU. Here it is the hard-Swish approximation
//     sigma(a) = a * clamp(a + 3, 0, 6) / 6,
// which needs only an add, a clamp, one small multiply and a divide by a
// constant: in Q4 units s = (a * clamp(a + 48, 0, 96)) / 96 (quotient
// rounded toward zero). The product s * h3 has 8 fractional bits. It is
// shifted right by 4 (floor) and saturated to INT8.
//
// Following the paper: the FFN form W2 (sigma(W1 x) (.) (W3 x)). Own choices:
// the hard-Swish approximation and the fixed-point rounding. Combinational.
module swiglu_gate
  import ita_pkg::*;
#(
  parameter int N = 86   // vector length (d_ffn)
) (
  input  logic signed [ACT_W-1:0] h1 [N],
  input  logic signed [ACT_W-1:0] h3 [N],
  output logic signed [ACT_W-1:0] g  [N]
);

  localparam int ONE  = 1 << ACT_FRAC;   // 1.0 in Q4
  localparam int THREE = 3 * ONE;
  localparam int SIX  = 6 * ONE;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic signed [10:0] t;     // a + 3, clamped to [0, 6]
      logic signed [18:0] st;    // a * t
      logic signed [18:0] s;     // sigma(a), Q4
      logic signed [26:0] gs;    // s * h3, Q8
      t = 11'(h1[i]) + 11'(THREE);
      if (t < 0)        t = '0;
      else if (t > 11'(SIX)) t = 11'(SIX);
      st = 19'(h1[i]) * 19'(t);
      s  = st / 19'(SIX);
      gs = 27'(s) * 27'(h3[i]);
      g[i] = sat_act(32'(gs >>> ACT_FRAC));
    end
  end

endmodule

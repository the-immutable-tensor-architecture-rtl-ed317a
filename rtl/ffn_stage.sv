// ffn_stage: the SwiGLU feed-forward network of one layer,
//     FFN(x) = W2 ( sigma(W1 x) (.) (W3 x) ),
// with W1, W3 (d_ffn x d_model) and W2 (d_model x d_ffn) hardwired.
//
// Stage 1: W1 x and W3 x in two parallel hardwired_matvec units (INT8 out).
// Between the stages swiglu_gate forms sigma(h1) (.) h3 combinationally.
// Stage 2: W2 applied to the gated vector (INT8 out).
//
// Timing: in_valid at edge n gives out_valid (one cycle) and y from edge
// n+2 on; y holds until the next result. A new vector may enter every cycle.
//
// Following the paper: the three-matrix FFN with hardwired W1, W2, W3 and
// pipeline registers. Own choices: two pipeline stages, INT8 between them.
module ffn_stage
  import ita_pkg::*;
#(
  parameter int D_MODEL = 32,   // model width
  parameter int D_FFN   = 86,   // hidden width of the FFN
  parameter int LAYER   = 0     // selects this layer's weights
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [ACT_W-1:0]  x [D_MODEL],
  output logic                     out_valid,
  output logic signed [ACT_W-1:0]  y [D_MODEL]
);

  logic                    v1, v3;
  logic signed [ACT_W-1:0] h1 [D_FFN];
  logic signed [ACT_W-1:0] h3 [D_FFN];
  logic signed [ACT_W-1:0] g  [D_FFN];

  hardwired_matvec #(.N_IN(D_MODEL), .N_OUT(D_FFN), .IN_W(ACT_W), .OUT_W(ACT_W),
                     .LAYER(LAYER), .MAT(int'(MAT_W1)))
    u_w1 (.clk, .rst_n, .in_valid, .x, .out_valid(v1), .y(h1));
  hardwired_matvec #(.N_IN(D_MODEL), .N_OUT(D_FFN), .IN_W(ACT_W), .OUT_W(ACT_W),
                     .LAYER(LAYER), .MAT(int'(MAT_W3)))
    u_w3 (.clk, .rst_n, .in_valid, .x, .out_valid(v3), .y(h3));

  swiglu_gate #(.N(D_FFN)) u_gate (.h1, .h3, .g);

  hardwired_matvec #(.N_IN(D_FFN), .N_OUT(D_MODEL), .IN_W(ACT_W), .OUT_W(ACT_W),
                     .LAYER(LAYER), .MAT(int'(MAT_W2)))
    u_w2 (.clk, .rst_n, .in_valid(v1 & v3), .x(g), .out_valid, .y);

endmodule

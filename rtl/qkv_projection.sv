// qkv_projection: the three attention projections of one layer,
//     Q = Wq x,  K = Wk x,  V = Wv x,
// computed by three hardwired_matvec units side by side from the same INT8
// input vector. Results are INT16 with 4 fractional bits, the element format
// in which they are sent to the host.
//
// Timing: in_valid at a rising edge gives out_valid (one cycle) and Q, K, V
// from the next cycle on; the outputs hold until the next in_valid.
//
// Following the paper: three parallel matrix-vector units with hardwired
// Wq, Wk, Wv. Own choice: INT16 output saturation.
module qkv_projection
  import ita_pkg::*;
#(
  parameter int D_MODEL = 32,   // model width
  parameter int LAYER   = 0     // selects this layer's weights
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic signed [ACT_W-1:0]   x [D_MODEL],
  output logic                      out_valid,
  output logic signed [ELEM_W-1:0]  q [D_MODEL],
  output logic signed [ELEM_W-1:0]  k [D_MODEL],
  output logic signed [ELEM_W-1:0]  v [D_MODEL]
);

  logic vq, vk, vv;

  hardwired_matvec #(.N_IN(D_MODEL), .N_OUT(D_MODEL), .IN_W(ACT_W), .OUT_W(ELEM_W),
                     .LAYER(LAYER), .MAT(int'(MAT_WQ)))
    u_wq (.clk, .rst_n, .in_valid, .x, .out_valid(vq), .y(q));
  hardwired_matvec #(.N_IN(D_MODEL), .N_OUT(D_MODEL), .IN_W(ACT_W), .OUT_W(ELEM_W),
                     .LAYER(LAYER), .MAT(int'(MAT_WK)))
    u_wk (.clk, .rst_n, .in_valid, .x, .out_valid(vk), .y(k));
  hardwired_matvec #(.N_IN(D_MODEL), .N_OUT(D_MODEL), .IN_W(ACT_W), .OUT_W(ELEM_W),
                     .LAYER(LAYER), .MAT(int'(MAT_WV)))
    u_wv (.clk, .rst_n, .in_valid, .x, .out_valid(vv), .y(v));

  // The three units share one input strobe, so their valids are identical.
  assign out_valid = vq & vk & vv;

endmodule

// ita_chiplet: a chain of LAYERS consecutive transformer layers, the unit the
// paper places on one die of the multi-chiplet package (4 layers per chiplet
// for the 32-layer model on 8 chiplets).
//
// Layer i's output handshake feeds layer i+1's input handshake directly; the
// first layer's input and the last layer's output are the chiplet's x and y
// ports, which in a package cross the interposer to the neighbouring
// chiplets. Each layer's Q/K/V and attention ports are brought out as arrays
// indexed by local layer number, for the host link logic.
//
// Following the paper: layers chained L0 -> L1 -> ... and grouped per
// chiplet. Own choice: chiplet-to-chiplet links are plain valid/ready buses.
module ita_chiplet
  import ita_pkg::*;
#(
  parameter int D_MODEL     = 32,  // model width
  parameter int D_FFN       = 86,  // FFN hidden width
  parameter int LAYERS      = 4,   // layers on this chiplet
  parameter int FIRST_LAYER = 0    // global index of the first layer
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      x_valid,
  output logic                      x_ready,
  input  logic signed [ACT_W-1:0]   x [D_MODEL],
  output logic                      qkv_valid [LAYERS],
  input  logic                      qkv_ready [LAYERS],
  output logic signed [ELEM_W-1:0]  q [LAYERS][D_MODEL],
  output logic signed [ELEM_W-1:0]  k [LAYERS][D_MODEL],
  output logic signed [ELEM_W-1:0]  v [LAYERS][D_MODEL],
  input  logic                      attn_valid [LAYERS],
  output logic                      attn_ready [LAYERS],
  input  logic signed [ELEM_W-1:0]  attn [D_MODEL],
  output logic                      y_valid,
  input  logic                      y_ready,
  output logic signed [ACT_W-1:0]   y [D_MODEL]
);

  // link i is the input of local layer i; link LAYERS is the chiplet output
  logic                    lv [LAYERS+1];
  logic                    lr [LAYERS+1];
  logic signed [ACT_W-1:0] lx [LAYERS+1][D_MODEL];

  assign lv[0]   = x_valid;
  assign x_ready = lr[0];
  assign lx[0]   = x;
  assign y_valid = lv[LAYERS];
  assign lr[LAYERS] = y_ready;
  assign y       = lx[LAYERS];

  for (genvar i = 0; i < LAYERS; i++) begin : g_layer
    ita_layer #(.D_MODEL(D_MODEL), .D_FFN(D_FFN), .LAYER(FIRST_LAYER + i)) u_layer (
      .clk, .rst_n,
      .x_valid(lv[i]), .x_ready(lr[i]), .x(lx[i]),
      .qkv_valid(qkv_valid[i]), .qkv_ready(qkv_ready[i]),
      .q(q[i]), .k(k[i]), .v(v[i]),
      .attn_valid(attn_valid[i]), .attn_ready(attn_ready[i]), .attn(attn),
      .y_valid(lv[i+1]), .y_ready(lr[i+1]), .y(lx[i+1])
    );
  end

endmodule

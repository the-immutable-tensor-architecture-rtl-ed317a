// ita_device: the Immutable Tensor Architecture inference device (top level).
//
// The device computes every weight-bearing linear step of a decoder-only
// transformer with the weights built into the logic, while a host computer
// keeps the KV cache and computes attention ("split-brain" operation). Per
// token:
//   host  -> device  token input vector (VK_EMBED)             -> layer 0
//   layer l -> host  Q, K, V of layer l (VK_Q/VK_K/VK_V)
//   host  -> device  attention output of layer l (VK_ATTN, l)  -> layer l
//   layer l -> layer l+1 FFN output, on chip
//   last layer -> logits head -> host  logits (VK_LOGITS)
// All N_CHIPLETS x LAYERS_PER_CHIPLET layers are instantiated; nothing is
// loaded or switched. Layers only hold the token they are working on, so
// several tokens (for example of independent sequences) can be in different
// layers at once; host_tx arbitrates their Q/K/V transfers.
//
// Host link: two element streams (valid/ready, INT16 data, tag = kind, layer,
// last) standing in for the PCIe/Thunderbolt/USB link and its PHY, which are
// not part of this RTL. rx_error flags a malformed host-to-device vector.
//
// Default sizes keep the paper's 32 layers on 8 chiplets of 4 layers but use
// d_model 32, d_ffn 86 and a vocabulary of 250 instead of 4096, 11008 and
// 32000: each weight is a separate circuit here, and the full model's
// 7 x 10^9 of them cannot be elaborated by simulation or lint tools.
module ita_device
  import ita_pkg::*;
#(
  parameter int D_MODEL            = 32,   // model width (paper: 4096)
  parameter int D_FFN              = 86,   // FFN hidden width (paper: 11008)
  parameter int N_CHIPLETS         = 8,    // chiplets (paper: 8)
  parameter int LAYERS_PER_CHIPLET = 4,    // layers per chiplet (paper: 4)
  parameter int VOCAB              = 250   // vocabulary (paper: 32000)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // host -> device element stream
  input  logic                      rx_valid,
  output logic                      rx_ready,
  input  logic signed [ELEM_W-1:0]  rx_data,
  input  link_tag_t                 rx_tag,
  // device -> host element stream
  output logic                      tx_valid,
  input  logic                      tx_ready,
  output logic signed [ELEM_W-1:0]  tx_data,
  output link_tag_t                 tx_tag,
  // sticky framing error on the host -> device stream
  output logic                      rx_error
);

  localparam int N_LAYERS = N_CHIPLETS * LAYERS_PER_CHIPLET;

  // per-layer link to the host side
  logic                     qkv_valid  [N_LAYERS];
  logic                     qkv_ready  [N_LAYERS];
  logic signed [ELEM_W-1:0] q [N_LAYERS][D_MODEL];
  logic signed [ELEM_W-1:0] k [N_LAYERS][D_MODEL];
  logic signed [ELEM_W-1:0] v [N_LAYERS][D_MODEL];
  logic                     attn_valid [N_LAYERS];
  logic                     attn_ready [N_LAYERS];
  logic signed [ELEM_W-1:0] attn [D_MODEL];

  // chain between chiplets: link c is the input of chiplet c,
  // link N_CHIPLETS goes to the logits head
  logic                     cv [N_CHIPLETS+1];
  logic                     cr [N_CHIPLETS+1];
  logic signed [ACT_W-1:0]  cx [N_CHIPLETS+1][D_MODEL];

  logic                     logits_valid, logits_ready;
  logic signed [ELEM_W-1:0] logits [VOCAB];

  host_rx #(.D_MODEL(D_MODEL), .N_LAYERS(N_LAYERS)) u_rx (
    .clk, .rst_n,
    .in_valid(rx_valid), .in_ready(rx_ready), .in_data(rx_data), .in_tag(rx_tag),
    .embed_valid(cv[0]), .embed_ready(cr[0]), .embed(cx[0]),
    .attn_valid, .attn_ready, .attn,
    .rx_error
  );

  for (genvar c = 0; c < N_CHIPLETS; c++) begin : g_chiplet
    logic                     l_qkv_valid  [LAYERS_PER_CHIPLET];
    logic                     l_qkv_ready  [LAYERS_PER_CHIPLET];
    logic signed [ELEM_W-1:0] l_q [LAYERS_PER_CHIPLET][D_MODEL];
    logic signed [ELEM_W-1:0] l_k [LAYERS_PER_CHIPLET][D_MODEL];
    logic signed [ELEM_W-1:0] l_v [LAYERS_PER_CHIPLET][D_MODEL];
    logic                     l_attn_valid [LAYERS_PER_CHIPLET];
    logic                     l_attn_ready [LAYERS_PER_CHIPLET];

    for (genvar i = 0; i < LAYERS_PER_CHIPLET; i++) begin : g_map
      localparam int L = c * LAYERS_PER_CHIPLET + i;
      assign qkv_valid[L]    = l_qkv_valid[i];
      assign l_qkv_ready[i]  = qkv_ready[L];
      assign q[L]            = l_q[i];
      assign k[L]            = l_k[i];
      assign v[L]            = l_v[i];
      assign l_attn_valid[i] = attn_valid[L];
      assign attn_ready[L]   = l_attn_ready[i];
    end

    ita_chiplet #(.D_MODEL(D_MODEL), .D_FFN(D_FFN), .LAYERS(LAYERS_PER_CHIPLET),
                  .FIRST_LAYER(c * LAYERS_PER_CHIPLET)) u_chiplet (
      .clk, .rst_n,
      .x_valid(cv[c]), .x_ready(cr[c]), .x(cx[c]),
      .qkv_valid(l_qkv_valid), .qkv_ready(l_qkv_ready), .q(l_q), .k(l_k), .v(l_v),
      .attn_valid(l_attn_valid), .attn_ready(l_attn_ready), .attn(attn),
      .y_valid(cv[c+1]), .y_ready(cr[c+1]), .y(cx[c+1])
    );
  end

  lm_head #(.D_MODEL(D_MODEL), .VOCAB(VOCAB), .LAYER(N_LAYERS)) u_lm_head (
    .clk, .rst_n,
    .in_valid(cv[N_CHIPLETS]), .in_ready(cr[N_CHIPLETS]), .x(cx[N_CHIPLETS]),
    .logits_valid, .logits_ready, .logits
  );

  host_tx #(.D_MODEL(D_MODEL), .N_LAYERS(N_LAYERS), .VOCAB(VOCAB)) u_tx (
    .clk, .rst_n,
    .qkv_valid, .qkv_ready, .q, .k, .v,
    .logits_valid, .logits_ready, .logits,
    .out_valid(tx_valid), .out_ready(tx_ready), .out_data(tx_data), .out_tag(tx_tag)
  );

endmodule

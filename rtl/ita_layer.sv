// ita_layer: one transformer layer of the device, a fixed pipeline with no
// program, instruction or weight memory.
//
// Stages, in the order the paper lists them:
//   1. input      accept the INT8 input vector x (valid/ready)
//   2. QKV        Q, K, V = Wq x, Wk x, Wv x              (1 cycle)
//   3. send       offer Q, K, V (INT16) to the host link  (qkv_valid/ready)
//   4. attention  wait for the host's attention output    (attn_valid/ready)
//   5. FFN        W2 (sigma(W1 a) (.) (W3 a)), a = INT8 attention output
//                                                         (2 cycles)
//   6. output     offer the INT8 result to the next layer (y_valid/ready)
// A small state machine steps through them. The layer holds one token at a
// time and keeps nothing once the token has left (no KV cache, no state
// between tokens). Every handshake is valid/ready: data moves on a cycle in
// which both are high. A stage whose consumer is not ready stalls the layer
// in that state.
//
// Cycle budget per token with all partners ready: 1 (accept) + 1 (QKV) +
// send + attention wait + 2 (FFN) + 1 (output).
//
// Following the paper: the six stages and the hardwired matrices. Own
// choices: the handshakes, sending Q along with K and V (the host's attention
// needs Q; the paper's byte count lists only K and V), using the attention
// output directly as FFN input (the paper names no output projection,
// normalisation or residual), and the INT16-to-INT8 saturation.
module ita_layer
  import ita_pkg::*;
#(
  parameter int D_MODEL = 32,   // model width
  parameter int D_FFN   = 86,   // FFN hidden width
  parameter int LAYER   = 0     // layer index: selects the weights
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // stage 1: input from the previous layer (or the host for layer 0)
  input  logic                      x_valid,
  output logic                      x_ready,
  input  logic signed [ACT_W-1:0]   x [D_MODEL],
  // stage 3: Q, K, V towards the host
  output logic                      qkv_valid,
  input  logic                      qkv_ready,
  output logic signed [ELEM_W-1:0]  q [D_MODEL],
  output logic signed [ELEM_W-1:0]  k [D_MODEL],
  output logic signed [ELEM_W-1:0]  v [D_MODEL],
  // stage 4: attention output from the host
  input  logic                      attn_valid,
  output logic                      attn_ready,
  input  logic signed [ELEM_W-1:0]  attn [D_MODEL],
  // stage 6: result towards the next layer (or the logits head)
  output logic                      y_valid,
  input  logic                      y_ready,
  output logic signed [ACT_W-1:0]   y [D_MODEL]
);

  typedef enum logic [2:0] {
    S_IDLE, S_QKV, S_SEND, S_WAIT_ATTN, S_FFN, S_OUT
  } state_e;

  state_e state;

  logic                    qkv_start, qkv_done;
  logic                    ffn_start, ffn_done;
  logic signed [ACT_W-1:0] a [D_MODEL];

  assign x_ready    = (state == S_IDLE);
  assign qkv_start  = x_valid & x_ready;
  assign qkv_valid  = (state == S_SEND);
  assign attn_ready = (state == S_WAIT_ATTN);
  assign ffn_start  = attn_valid & attn_ready;
  assign y_valid    = (state == S_OUT);

  always_comb
    for (int i = 0; i < D_MODEL; i++) a[i] = sat_act(32'(attn[i]));

  qkv_projection #(.D_MODEL(D_MODEL), .LAYER(LAYER)) u_qkv (
    .clk, .rst_n, .in_valid(qkv_start), .x, .out_valid(qkv_done), .q, .k, .v
  );

  ffn_stage #(.D_MODEL(D_MODEL), .D_FFN(D_FFN), .LAYER(LAYER)) u_ffn (
    .clk, .rst_n, .in_valid(ffn_start), .x(a), .out_valid(ffn_done), .y
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= S_IDLE;
    else begin
      unique case (state)
        S_IDLE:      if (qkv_start)             state <= S_QKV;
        S_QKV:       if (qkv_done)              state <= S_SEND;
        S_SEND:      if (qkv_ready)             state <= S_WAIT_ATTN;
        S_WAIT_ATTN: if (ffn_start)             state <= S_FFN;
        S_FFN:       if (ffn_done)              state <= S_OUT;
        S_OUT:       if (y_ready)               state <= S_IDLE;
        default:                                state <= S_IDLE;
      endcase
    end
  end

endmodule

// lm_head: the final projection from the last layer's output to vocabulary
// logits, logits = W_lm y, with W_lm (VOCAB x d_model) hardwired like every
// other matrix. Logits are INT16 with 4 fractional bits, the element format
// of the host link.
//
// Handshakes: the input is accepted (valid/ready) only while no result is
// waiting. The product is registered at the accepting edge, so logits_valid
// rises in the next cycle and the logits hold until logits_ready.
//
// Following the paper: the device returns final output logits (VOCAB x 2
// bytes). The paper only names this output; the matrix-vector structure is
// taken over from the other projections.
//
// The handshake assertions are disabled during reset with 'disable iff
// (!rst_n)'. A linter may therefore report rst_n as used both as an
// asynchronous reset and as a synchronous signal; the second use is only
// in the assertions and produces no logic.
module lm_head
  import ita_pkg::*;
#(
  parameter int D_MODEL = 32,   // model width
  parameter int VOCAB   = 250,  // vocabulary size
  parameter int LAYER   = 32    // weight set selector (one past the last layer)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic signed [ACT_W-1:0]   x [D_MODEL],
  output logic                      logits_valid,
  input  logic                      logits_ready,
  output logic signed [ELEM_W-1:0]  logits [VOCAB]
);

  logic start, done, busy;

  // The matvec register loads on the same edge that sets busy, so the logits
  // are valid for exactly as long as busy is high.
  assign in_ready     = ~busy;
  assign start        = in_valid & in_ready;
  assign logits_valid = busy;

  hardwired_matvec #(.N_IN(D_MODEL), .N_OUT(VOCAB), .IN_W(ACT_W), .OUT_W(ELEM_W),
                     .LAYER(LAYER), .MAT(int'(MAT_LM)))
    u_lm (.clk, .rst_n, .in_valid(start), .x, .out_valid(done), .y(logits));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                             busy <= 1'b0;
    else if (start)                         busy <= 1'b1;
    else if (logits_valid && logits_ready)  busy <= 1'b0;
  end

  // The matvec result arrives together with busy.
  a_result_with_busy: assert property (@(posedge clk) disable iff (!rst_n) start |=> done);

endmodule

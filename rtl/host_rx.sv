// host_rx: device side of the host-to-device direction of the link.
//
// The host sends vectors as a stream of INT16 elements, one element per beat
// (valid/ready), each beat carrying a tag: the vector kind, a layer number
// and a flag on the last element. Two kinds are accepted:
//   VK_EMBED  the token's input vector, delivered to layer 0 (saturated to
//             INT8, the activation format)
//   VK_ATTN   the attention output for layer `layer`, delivered to that layer
// The block collects D_MODEL elements into a vector register (deserialiser)
// and offers the vector to its destination until the destination takes it.
// Token inputs and attention outputs have separate registers: a token input
// waiting for a busy layer 0 must not hold up the attention output that
// layer 0 needs in order to finish. A beat whose register is still occupied
// is stalled (in_ready low). Host rule that follows: send a new token input
// only when the previous one has been taken; attention outputs can always be
// sent, since the layer they are for is already waiting.
//
// Framing errors (a vector with more or fewer than D_MODEL elements, a kind
// the device does not accept, a layer number past the last layer) drop the
// vector and set the sticky rx_error flag; reception re-aligns at the next
// element marked last.
//
// Timing: one element per cycle while in_ready is high; the vector is offered
// in the cycle after its last element. in_ready depends on the beat's kind.
//
// Following the paper: input stage and attention receive of the layer
// pipeline, vectors over a serial host link. Own choices: the tagged element
// stream, the handshakes and the error rule.
//
// The handshake assertions are disabled during reset with 'disable iff
// (!rst_n)'. A linter may therefore report rst_n as used both as an
// asynchronous reset and as a synchronous signal; the second use is only
// in the assertions and produces no logic.
module host_rx
  import ita_pkg::*;
#(
  parameter int D_MODEL  = 32,   // elements per vector
  parameter int N_LAYERS = 32    // layers that can receive attention outputs
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // element stream from the host
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic signed [ELEM_W-1:0]  in_data,
  input  link_tag_t                 in_tag,
  // token input for layer 0
  output logic                      embed_valid,
  input  logic                      embed_ready,
  output logic signed [ACT_W-1:0]   embed [D_MODEL],
  // attention outputs, one handshake per layer, shared data
  output logic                      attn_valid [N_LAYERS],
  input  logic                      attn_ready [N_LAYERS],
  output logic signed [ELEM_W-1:0]  attn [D_MODEL],
  // sticky framing error
  output logic                      rx_error
);

  localparam int CNT_W = $clog2(D_MODEL + 1);

  logic signed [ELEM_W-1:0] ebuf [D_MODEL];   // token input register
  logic signed [ELEM_W-1:0] abuf [D_MODEL];   // attention output register
  logic                     efull, afull;     // register holds a complete vector
  logic [LAYER_ID_W-1:0]    alayer;           // destination of abuf
  logic [CNT_W-1:0]         cnt;              // elements of the current vector so far
  // buffer index: cnt stays below D_MODEL whenever an element is stored
  localparam int IDX_W = (D_MODEL > 1) ? $clog2(D_MODEL) : 1;
  logic [IDX_W-1:0]         idx;
  assign idx = IDX_W'(cnt);
  logic                     dropping;         // discarding until the next last
  vec_kind_e                kind;             // kind of the current vector
  logic [LAYER_ID_W-1:0]    layer;            // layer of the current vector
  logic                     kind_ok;          // its kind and layer are acceptable
  vec_kind_e                cur_kind;
  logic                     cur_ok, beat, etaken, ataken, tag_ok;

  assign tag_ok   = (in_tag.kind == VK_EMBED) ||
                    (in_tag.kind == VK_ATTN && int'(in_tag.layer) < N_LAYERS);
  assign cur_kind = (cnt == '0) ? in_tag.kind : kind;
  assign cur_ok   = (cnt == '0) ? tag_ok : kind_ok;
  assign in_ready = dropping || !cur_ok ||
                    (cur_kind == VK_EMBED ? !efull : !afull);
  assign beat     = in_valid & in_ready;

  assign attn = abuf;
  always_comb begin
    for (int i = 0; i < D_MODEL; i++) embed[i] = sat_act(32'(ebuf[i]));
    embed_valid = efull;
    etaken      = efull && embed_ready;
    ataken      = 1'b0;
    for (int l = 0; l < N_LAYERS; l++) begin
      attn_valid[l] = afull && int'(alayer) == l;
      if (attn_valid[l] && attn_ready[l]) ataken = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt      <= '0;
      efull    <= 1'b0;
      afull    <= 1'b0;
      alayer   <= '0;
      dropping <= 1'b0;
      kind     <= VK_EMBED;
      layer    <= '0;
      kind_ok  <= 1'b0;
      rx_error <= 1'b0;
      for (int i = 0; i < D_MODEL; i++) begin
        ebuf[i] <= '0;
        abuf[i] <= '0;
      end
    end else begin
      if (etaken) efull <= 1'b0;
      if (ataken) afull <= 1'b0;
      if (beat) begin
        if (dropping) begin
          if (in_tag.last) dropping <= 1'b0;
        end else begin
          if (cur_ok) begin
            if (cur_kind == VK_EMBED) ebuf[idx] <= in_data;
            else                      abuf[idx] <= in_data;
          end
          if (cnt == '0) begin
            kind    <= in_tag.kind;
            layer   <= in_tag.layer;
            kind_ok <= tag_ok;
          end
          if (in_tag.last) begin
            cnt <= '0;
            if (int'(cnt) == D_MODEL - 1 && cur_ok) begin
              if (cur_kind == VK_EMBED) efull <= 1'b1;
              else begin
                afull  <= 1'b1;
                alayer <= (cnt == '0) ? in_tag.layer : layer;
              end
            end else
              rx_error <= 1'b1;
          end else if (int'(cnt) == D_MODEL - 1) begin
            cnt      <= '0;
            dropping <= 1'b1;
            rx_error <= 1'b1;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
      end
    end
  end

  a_embed_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                 embed_valid && !embed_ready |=> embed_valid);
  a_attn_hold:  assert property (@(posedge clk) disable iff (!rst_n)
                                 afull && !ataken |=> afull);

endmodule

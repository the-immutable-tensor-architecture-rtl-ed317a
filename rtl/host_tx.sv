// host_tx: device side of the device-to-host direction of the link.
//
// Sources: every layer's Q/K/V triple (qkv_valid/qkv_ready per layer) and the
// logits head (logits_valid/logits_ready). When idle, a round-robin arbiter
// picks one waiting source, copies its vectors into the send buffer in one
// cycle and acknowledges it, so the layer can move on to waiting for its
// attention output at once. The buffer is then sent as INT16 elements, one
// per beat (valid/ready), tagged with kind (Q, K, V or logits), layer and a
// last flag on the final element of each vector. A layer's three vectors go
// out back to back as Q, K, V; logits carry layer = N_LAYERS.
//
// Timing: one cycle to grant and load, then one element per cycle while
// out_ready is high: 3*D_MODEL + 1 cycles per layer, VOCAB + 1 for logits.
// The data and tag of a beat hold while out_valid is high and out_ready low.
//
// Following the paper: the output SerDes sending K, V (and here Q) and the
// final logits to the host. Own choices: round-robin arbitration, the send
// buffer, the tagged stream.
//
// The handshake assertions are disabled during reset with 'disable iff
// (!rst_n)'. A linter may therefore report rst_n as used both as an
// asynchronous reset and as a synchronous signal; the second use is only
// in the assertions and produces no logic.
module host_tx
  import ita_pkg::*;
#(
  parameter int D_MODEL  = 32,   // elements per Q, K or V vector
  parameter int N_LAYERS = 32,   // layers
  parameter int VOCAB    = 250   // elements of the logits vector
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      qkv_valid [N_LAYERS],
  output logic                      qkv_ready [N_LAYERS],
  input  logic signed [ELEM_W-1:0]  q [N_LAYERS][D_MODEL],
  input  logic signed [ELEM_W-1:0]  k [N_LAYERS][D_MODEL],
  input  logic signed [ELEM_W-1:0]  v [N_LAYERS][D_MODEL],
  input  logic                      logits_valid,
  output logic                      logits_ready,
  input  logic signed [ELEM_W-1:0]  logits [VOCAB],
  // element stream to the host
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic signed [ELEM_W-1:0]  out_data,
  output link_tag_t                 out_tag
);

  localparam int NSRC  = N_LAYERS + 1;              // source N_LAYERS = logits
  localparam int BUF   = (3 * D_MODEL > VOCAB) ? 3 * D_MODEL : VOCAB;
  localparam int CNT_W = $clog2(BUF + 1);
  localparam int SRC_W = $clog2(NSRC + 1);

  logic signed [ELEM_W-1:0] sbuf [BUF];
  logic [CNT_W-1:0]         cnt;
  logic [CNT_W-1:0]         total;
  logic [SRC_W-1:0]         src;        // source being sent
  logic [SRC_W-1:0]         last_src;   // round-robin pointer
  logic                     sending;

  logic                     any_req;
  logic [SRC_W-1:0]         gnt;
  logic                     req [NSRC];
  // layer number of the granted source (unused when the logits are granted)
  localparam int LSEL_W = (N_LAYERS > 1) ? $clog2(N_LAYERS) : 1;
  logic [LSEL_W-1:0]        lsel;
  assign lsel = LSEL_W'(gnt);

  always_comb begin
    for (int s = 0; s < N_LAYERS; s++) req[s] = qkv_valid[s];
    req[N_LAYERS] = logits_valid;
  end

  // round robin: first requesting source after the one granted last
  always_comb begin
    any_req = 1'b0;
    gnt     = '0;
    for (int o = 1; o <= NSRC; o++) begin
      logic [SRC_W-1:0] s;
      s = SRC_W'((int'(last_src) + o) % NSRC);
      if (!any_req && req[s]) begin
        any_req = 1'b1;
        gnt     = SRC_W'(s);
      end
    end
  end

  always_comb begin
    for (int s = 0; s < N_LAYERS; s++)
      qkv_ready[s] = !sending && any_req && int'(gnt) == s;
    logits_ready = !sending && any_req && int'(gnt) == N_LAYERS;
  end

  // element output and its tag
  assign out_valid = sending;
  assign out_data  = sbuf[cnt];
  always_comb begin
    out_tag.layer = LAYER_ID_W'(src);
    if (int'(src) == N_LAYERS) begin
      out_tag.kind = VK_LOGITS;
      out_tag.last = (int'(cnt) == VOCAB - 1);
    end else if (int'(cnt) < D_MODEL) begin
      out_tag.kind = VK_Q;
      out_tag.last = (int'(cnt) == D_MODEL - 1);
    end else if (int'(cnt) < 2 * D_MODEL) begin
      out_tag.kind = VK_K;
      out_tag.last = (int'(cnt) == 2 * D_MODEL - 1);
    end else begin
      out_tag.kind = VK_V;
      out_tag.last = (int'(cnt) == 3 * D_MODEL - 1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sending  <= 1'b0;
      cnt      <= '0;
      total    <= '0;
      src      <= '0;
      last_src <= SRC_W'(NSRC - 1);
      for (int i = 0; i < BUF; i++) sbuf[i] <= '0;
    end else if (!sending) begin
      if (any_req) begin
        sending  <= 1'b1;
        cnt      <= '0;
        src      <= gnt;
        last_src <= gnt;
        if (int'(gnt) == N_LAYERS) begin
          total <= CNT_W'(VOCAB);
          for (int i = 0; i < VOCAB; i++) sbuf[i] <= logits[i];
        end else begin
          total <= CNT_W'(3 * D_MODEL);
          for (int i = 0; i < D_MODEL; i++) begin
            sbuf[i]               <= q[lsel][i];
            sbuf[D_MODEL + i]     <= k[lsel][i];
            sbuf[2 * D_MODEL + i] <= v[lsel][i];
          end
        end
      end
    end else if (out_ready) begin
      if (cnt == total - 1'b1) sending <= 1'b0;
      else                     cnt     <= cnt + 1'b1;
    end
  end

  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
                             out_valid && !out_ready |=> out_valid && $stable(out_data)
                                                         && $stable(out_tag));

endmodule

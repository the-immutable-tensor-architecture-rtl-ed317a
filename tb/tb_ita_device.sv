// tb_ita_device: end-to-end test of the whole device (32 layers on 8
// chiplets, d_model 4, d_ffn 11, vocabulary 16) with a behavioural host.
//
// The host does what the split-brain scheme gives it: it keeps a KV cache per
// sequence and layer, computes softmax attention from each layer's Q, K, V
// (in floating point, rounded back to INT16), returns the attention output
// after a random delay, takes the argmax of the logits as the next token and
// sends that token's input vector. Two sequences of three tokens run at the
// same time, so two tokens are inside the device together.
//
// A reference model follows every token through the same layers with plain
// integer arithmetic; each Q, K, V vector and each logits vector from the
// device is compared with it. The host also drops tx_ready at random.
// Mechanisms counted, each of which must occur: link backpressure on both
// streams, two layers requesting the transmitter at once, a token waiting
// in front of a busy layer, a layer waiting for the host's attention output,
// and a malformed vector raising rx_error (sent at the end).
module tb_ita_device;
  import ita_pkg::*;
  import tb_ref_pkg::*;

  localparam int D = 4, F = 11, NC = 8, LPC = 4, V = 16;
  localparam int NL = NC * LPC, NSEQ = 2, NTOK = 3;

  logic clk = 0, rst_n = 0;
  logic rx_valid = 0, rx_ready, tx_valid, tx_ready = 1, rx_error;
  logic signed [15:0] rx_data = 0, tx_data;
  link_tag_t rx_tag, tx_tag;

  ita_device #(.D_MODEL(D), .D_FFN(F), .N_CHIPLETS(NC), .LAYERS_PER_CHIPLET(LPC), .VOCAB(V))
    u_dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycle = 0;
  int n_tx_bp = 0, n_rx_stall = 0, n_contend = 0, n_layer_block = 0, n_attn_wait = 0;
  int n_logits = 0, n_qkv = 0;

  // ---------------- host state ----------------
  typedef struct { int kind; int layer; vec_t data; int not_before; } msg_t;
  msg_t  send_q [$];
  int    layer_fifo [NL+1][$];        // sequence ids in the order they reach each layer
  vec_t  ref_x [NSEQ];               // reference input of the sequence's current layer
  vec_t  kcache [NSEQ][NL][$], vcache [NSEQ][NL][$];
  int    tokens_done [NSEQ];
  vec_t  cur_q, cur_k;
  vec_t  rxv;                          // vector being received from the device

  function automatic vec_t embedding(int tok);
    vec_t e;
    e = new[D];
    foreach (e[i]) e[i] = int'((tok * 97 + i * 31 + 7) % 401) - 200;  // beyond INT8 at times
    return e;
  endfunction

  function automatic vec_t attention(int s, int l, vec_t qv);
    real sc [$], mx, sum, acc;
    vec_t o;
    o = new[D];
    for (int j = 0; j < kcache[s][l].size(); j++) begin
      real dot;
      dot = 0.0;
      for (int i = 0; i < D; i++) dot += real'(qv[i]) * real'(kcache[s][l][j][i]) / 256.0;
      sc.push_back(dot / $sqrt(real'(D)));
    end
    mx = sc[0];
    foreach (sc[j]) if (sc[j] > mx) mx = sc[j];
    sum = 0.0;
    foreach (sc[j]) begin sc[j] = $exp(sc[j] - mx); sum += sc[j]; end
    for (int i = 0; i < D; i++) begin
      acc = 0.0;
      foreach (sc[j]) acc += sc[j] / sum * real'(vcache[s][l][j][i]);
      o[i] = sat(int'($floor(acc + 0.5)), 16);
    end
    return o;
  endfunction

  function automatic void start_token(int s, int tok);
    vec_t e;
    msg_t m;
    e = embedding(tok);
    ref_x[s] = new[D];
    foreach (e[i]) ref_x[s][i] = sat(e[i], 8);
    layer_fifo[0].push_back(s);
    m.kind = int'(VK_EMBED); m.layer = 0; m.data = e; m.not_before = cycle;
    send_q.push_back(m);
  endfunction

  task automatic cmp(string what, vec_t got, vec_t want);
    for (int i = 0; i < want.size(); i++) begin
      checks++;
      if (got[i] != want[i]) begin
        failures++;
        if (failures < 12) $display("FAIL %s[%0d] got %0d want %0d", what, i, got[i], want[i]);
      end
    end
  endtask

  // ---------------- device -> host ----------------
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (tx_valid && !tx_ready) n_tx_bp++;
    if (rx_valid && !rx_ready) n_rx_stall++;
    begin
      int nreq, nwait;
      nreq = 0; nwait = 0;
      for (int l = 0; l < NL; l++) begin
        if (u_dut.qkv_valid[l]) nreq++;
        if (u_dut.attn_ready[l]) nwait++;
      end
      if (nreq > 1) n_contend++;
      if (nwait > 0) n_attn_wait++;
      for (int c = 0; c <= NC; c++) if (u_dut.cv[c] && !u_dut.cr[c]) n_layer_block++;
    end
    if (rst_n && tx_valid && tx_ready) begin
      rxv = new[rxv.size() + 1](rxv);
      rxv[rxv.size() - 1] = int'(tx_data);
      if (tx_tag.last) begin
        int l, s;
        l = int'(tx_tag.layer);
        case (tx_tag.kind)
          VK_Q: cur_q = rxv;
          VK_K: cur_k = rxv;
          VK_V: begin
            msg_t m;
            vec_t av;
            n_qkv++;
            s = layer_fifo[l].pop_front();
            cmp($sformatf("Q s%0d l%0d", s, l), cur_q, qkv(l, int'(MAT_WQ), ref_x[s], D));
            cmp($sformatf("K s%0d l%0d", s, l), cur_k, qkv(l, int'(MAT_WK), ref_x[s], D));
            cmp($sformatf("V s%0d l%0d", s, l), rxv,   qkv(l, int'(MAT_WV), ref_x[s], D));
            kcache[s][l].push_back(cur_k);
            vcache[s][l].push_back(rxv);
            av = attention(s, l, cur_q);
            ref_x[s] = ffn(l, av, D, F);
            layer_fifo[l + 1].push_back(s);
            m.kind = int'(VK_ATTN); m.layer = l; m.data = av;
            m.not_before = cycle + int'($urandom_range(12));
            send_q.push_back(m);
          end
          VK_LOGITS: begin
            vec_t want;
            int best;
            n_logits++;
            s = layer_fifo[NL].pop_front();
            want = matvec(NL, int'(MAT_LM), ref_x[s], V, 16);
            checks++;
            if (l != NL) begin failures++; $display("FAIL logits tag layer %0d", l); end
            cmp($sformatf("logits s%0d", s), rxv, want);
            best = 0;
            foreach (want[i]) if (want[i] > want[best]) best = i;
            tokens_done[s]++;
            if (tokens_done[s] < NTOK) start_token(s, best + 100 * s);
          end
          default: begin failures++; $display("FAIL unexpected kind from device"); end
        endcase
        rxv.delete();
      end
    end
  end

  always @(negedge clk) tx_ready = ($urandom_range(3) != 0);

  // ---------------- host -> device ----------------
  // one beat per cycle while the device is ready; called at a falling edge
  task automatic send_vec(msg_t m, int nbeats);
    for (int i = 0; i < nbeats; i++) begin
      rx_valid     = 1;
      rx_data      = 16'(m.data[i % D]);
      rx_tag.kind  = vec_kind_e'(m.kind);
      rx_tag.layer = LAYER_ID_W'(m.layer);
      rx_tag.last  = (i == nbeats - 1);
      @(posedge clk);
      while (!rx_ready) @(posedge clk);
      @(negedge clk);
    end
    rx_valid = 0;
  endtask

  initial begin
    msg_t m;
    int all_done, zeros;
    rx_tag = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < NSEQ; s++) start_token(s, 1 + 5 * s);
    @(negedge clk);
    forever begin
      all_done = 1;
      for (int s = 0; s < NSEQ; s++) if (tokens_done[s] < NTOK) all_done = 0;
      if (all_done) break;
      if (send_q.size() > 0 && send_q[0].not_before <= cycle) begin
        m = send_q.pop_front();
        send_vec(m, D);
      end else @(negedge clk);
    end
    // malformed vector: one element short
    checks++;
    if (rx_error) begin failures++; $display("FAIL rx_error before malformed vector"); end
    m.kind = int'(VK_ATTN); m.layer = 0; m.data = embedding(0);
    @(negedge clk);
    send_vec(m, D - 1);
    repeat (3) @(negedge clk);
    checks++;
    if (!rx_error) begin failures++; $display("FAIL malformed vector not flagged"); end
    zeros = 0;
    for (int r = 0; r < F; r++) for (int c = 0; c < D; c++) if (weight(0, int'(MAT_W1), r, c) == 0) zeros++;
    $display("tokens %0d in %0d cycles, QKV transfers %0d, pruned W1 weights in layer 0: %0d of %0d",
             n_logits, cycle, n_qkv, zeros, F * D);
    $display("tx backpressure %0d, rx stalls %0d, transmitter contention %0d, blocked layer inputs %0d, attention waits %0d",
             n_tx_bp, n_rx_stall, n_contend, n_layer_block, n_attn_wait);
    checks++;
    if (n_logits != NSEQ * NTOK || n_qkv != NSEQ * NTOK * NL) begin failures++; $display("FAIL token count"); end
    checks++;
    if (n_tx_bp == 0) begin failures++; $display("FAIL no tx backpressure"); end
    checks++;
    if (n_rx_stall == 0) begin failures++; $display("FAIL no rx stall"); end
    checks++;
    if (n_contend == 0) begin failures++; $display("FAIL no transmitter contention"); end
    checks++;
    if (n_layer_block == 0) begin failures++; $display("FAIL no blocked layer input"); end
    checks++;
    if (n_attn_wait == 0) begin failures++; $display("FAIL no attention wait"); end
    checks++;
    if (zeros == 0) begin failures++; $display("FAIL no pruned weights"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog: tokens %0d", n_logits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

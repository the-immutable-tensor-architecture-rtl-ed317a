// tb_ita_chiplet: a chiplet of 4 layers (global layers 4..7, d_model 4,
// d_ffn 11) with a behavioural host that answers every layer's Q, K, V with
// single-token attention (softmax over one key is 1, so the attention output
// equals V) after a random delay. Two tokens enter back to back, so layers
// hold different tokens at once and the second token waits in front of a
// busy layer. Every Q, K, V and the chiplet output are compared with the
// reference chain; the output consumer stalls at random.
module tb_ita_chiplet;
  import ita_pkg::*;
  import tb_ref_pkg::*;

  localparam int D = 4, F = 11, L = 4, FIRST = 4, NTOK = 8;

  logic clk = 0, rst_n = 0;
  logic x_valid = 0, x_ready, y_valid, y_ready = 0;
  logic signed [7:0]  x [D], y [D];
  logic qkv_valid [L], qkv_ready [L], attn_valid [L], attn_ready [L];
  logic signed [15:0] q [L][D], k [L][D], v [L][D], attn [D];
  int checks = 0, failures = 0, cycle = 0, n_block = 0, n_out = 0;
  vec_t ref_in [L+1][$];   // reference input vector of each token at each layer

  ita_chiplet #(.D_MODEL(D), .D_FFN(F), .LAYERS(L), .FIRST_LAYER(FIRST)) u_dut (.*);
  always #5 clk = ~clk;

  task automatic cmp(string what, vec_t got, vec_t want);
    for (int i = 0; i < D; i++) begin
      checks++;
      if (got[i] != want[i]) begin
        failures++;
        if (failures < 10) $display("FAIL %s[%0d] got %0d want %0d", what, i, got[i], want[i]);
      end
    end
  endtask

  function automatic vec_t tov(logic signed [15:0] a [D]);
    vec_t r;
    r = new[D];
    foreach (r[i]) r[i] = int'(a[i]);
    return r;
  endfunction

  // host: serve one layer request at a time
  initial begin
    foreach (qkv_ready[i]) qkv_ready[i] = 0;
    foreach (attn_valid[i]) attn_valid[i] = 0;
    foreach (attn[i]) attn[i] = '0;
    forever begin
      @(negedge clk);
      for (int l = 0; l < L; l++) if (qkv_valid[l]) begin
        vec_t xin, vv;
        xin = ref_in[l].pop_front();
        cmp($sformatf("q l%0d", l), tov(q[l]), qkv(FIRST + l, int'(MAT_WQ), xin, D));
        cmp($sformatf("k l%0d", l), tov(k[l]), qkv(FIRST + l, int'(MAT_WK), xin, D));
        vv = tov(v[l]);
        cmp($sformatf("v l%0d", l), vv, qkv(FIRST + l, int'(MAT_WV), xin, D));
        qkv_ready[l] = 1;
        @(negedge clk);
        qkv_ready[l] = 0;
        repeat ($urandom_range(3)) @(negedge clk);
        foreach (attn[i]) attn[i] = 16'(vv[i]);
        attn_valid[l] = 1;
        while (!attn_ready[l]) @(negedge clk);
        @(negedge clk);
        attn_valid[l] = 0;
        ref_in[l + 1].push_back(ffn(FIRST + l, vv, D, F));
        break;
      end
    end
  end

  // output consumer
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (x_valid && !x_ready) n_block++;
    if (y_valid && y_ready) begin
      vec_t yy;
      yy = new[D];
      foreach (yy[i]) yy[i] = int'(y[i]);
      cmp("y", yy, ref_in[L].pop_front());
      n_out++;
    end
  end
  always @(negedge clk) y_ready = ($urandom_range(2) == 0);

  initial begin
    foreach (x[i]) x[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < NTOK; t++) begin
      vec_t xv;
      xv = new[D];
      foreach (xv[i]) xv[i] = rnd8();
      @(negedge clk);
      foreach (x[i]) x[i] = 8'(xv[i]);
      ref_in[0].push_back(xv);
      x_valid = 1;
      @(posedge clk);
      while (!x_ready) @(posedge clk);
      @(negedge clk);
      x_valid = 0;
    end
    while (n_out < NTOK) @(negedge clk);
    checks++;
    if (n_block == 0) begin failures++; $display("FAIL no token waited for a busy layer"); end
    $display("tokens %0d, cycles a token waited at the chiplet input %0d", n_out, n_block);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

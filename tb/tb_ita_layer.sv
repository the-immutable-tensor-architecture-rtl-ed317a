// tb_ita_layer: one layer (layer 5, d_model 8, d_ffn 22) taken through many
// tokens with a behavioural host and a behavioural next layer:
//  - Q, K, V offered after the input must match the reference projections;
//    the host accepts them after a random delay (send-stage stall);
//  - the host answers with a random INT16 attention vector after a random
//    delay, which the layer must accept only in its attention stage;
//  - the output must match the reference FFN of that attention vector; the
//    next layer takes it after a random delay (output stall).
// Checks that the layer keeps offering Q/K/V until accepted, refuses a new
// input while it holds a token, and the
// cycle count of the uncontended path: QKV offered 2 cycles after the input
// handshake, output 3 cycles after the attention handshake.
module tb_ita_layer;
  import ita_pkg::*;
  import tb_ref_pkg::*;

  localparam int D = 8, F = 22, LAYER = 5, NTOK = 30;

  logic clk = 0, rst_n = 0;
  logic x_valid = 0, x_ready, qkv_valid, qkv_ready = 0, attn_valid = 0, attn_ready;
  logic y_valid, y_ready = 0;
  logic signed [7:0]  x [D], y [D];
  logic signed [15:0] q [D], k [D], v [D], attn [D];
  int checks = 0, failures = 0, cycle = 0;
  int send_stalls = 0, out_stalls = 0, busy_refusals = 0;

  ita_layer #(.D_MODEL(D), .D_FFN(F), .LAYER(LAYER)) u_dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (qkv_valid && !qkv_ready) send_stalls++;
    if (y_valid && !y_ready) out_stalls++;
  end

  task automatic cmp16(string name, logic signed [15:0] got [D], vec_t want);
    for (int i = 0; i < D; i++) begin
      checks++;
      if (int'(got[i]) != want[i]) begin
        failures++;
        if (failures < 10) $display("FAIL %s[%0d] got %0d want %0d", name, i, got[i], want[i]);
      end
    end
  endtask

  initial begin
    foreach (x[i]) x[i] = '0;
    foreach (attn[i]) attn[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < NTOK; t++) begin
      vec_t xv, av, want;
      int t0, t1, dly;
      xv = new[D];
      av = new[D];
      foreach (xv[i]) xv[i] = rnd8();
      foreach (av[i]) av[i] = (t % 4 == 0) ? int'($urandom_range(4000)) - 2000 : rnd8();
      // input handshake
      @(negedge clk);
      foreach (x[i]) x[i] = 8'(xv[i]);
      x_valid = 1;
      checks++;
      if (!x_ready) begin failures++; $display("FAIL layer not ready when idle"); end
      @(posedge clk);
      t0 = cycle;
      @(negedge clk);
      x_valid = 1;          // keep offering: the layer must refuse while busy
      // Q/K/V
      while (!qkv_valid) begin
        if (x_ready) begin failures++; $display("FAIL accepted input while busy"); end
        else busy_refusals++;
        @(negedge clk);
      end
      x_valid = 0;
      if (t % 3 == 0) begin
        checks++;
        if (cycle - t0 != 2) begin failures++; $display("FAIL QKV latency %0d", cycle - t0); end
      end
      cmp16("q", q, qkv(LAYER, int'(MAT_WQ), xv, D));
      cmp16("k", k, qkv(LAYER, int'(MAT_WK), xv, D));
      cmp16("v", v, qkv(LAYER, int'(MAT_WV), xv, D));
      dly = (t % 3 == 0) ? 0 : int'($urandom_range(4));
      repeat (dly) begin
        @(negedge clk);
        checks++;
        if (!qkv_valid) begin failures++; $display("FAIL Q/K/V withdrawn before accepted"); end
      end
      qkv_ready = 1;
      @(negedge clk);
      qkv_ready = 0;
      // attention from the host
      repeat ($urandom_range(5)) begin
        checks++;
        if (!attn_ready || qkv_valid) begin failures++; $display("FAIL not waiting for attention"); end
        @(negedge clk);
      end
      foreach (attn[i]) attn[i] = 16'(av[i]);
      attn_valid = 1;
      @(posedge clk);
      t1 = cycle;
      @(negedge clk);
      attn_valid = 0;
      foreach (attn[i]) attn[i] = 16'(rnd8());
      while (!y_valid) @(negedge clk);
      if (t % 3 == 0) begin
        checks++;
        if (cycle - t1 != 3) begin failures++; $display("FAIL FFN latency %0d", cycle - t1); end
      end
      want = ffn(LAYER, av, D, F);
      for (int i = 0; i < D; i++) begin
        checks++;
        if (int'(y[i]) != want[i]) begin
          failures++;
          if (failures < 10) $display("FAIL y[%0d] got %0d want %0d", i, y[i], want[i]);
        end
      end
      repeat ((t % 3 == 0) ? 0 : $urandom_range(4)) @(negedge clk);
      y_ready = 1;
      @(negedge clk);
      y_ready = 0;
    end
    checks++;
    if (send_stalls == 0 || out_stalls == 0 || busy_refusals == 0) begin
      failures++;
      $display("FAIL mechanism not exercised");
    end
    $display("send stalls %0d, output stalls %0d, refused inputs %0d", send_stalls, out_stalls,
             busy_refusals);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

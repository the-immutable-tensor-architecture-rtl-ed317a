// tb_host_tx: transmitter with 4 layer sources (d_model 4) and a 10-entry
// logits source. Behavioural sources raise their requests at random times
// with random vectors and hold them until acknowledged; the behavioural host
// drops out_ready at random (backpressure). Checks: every beat's data and
// tag (kind, layer, last) against the vector of the source being sent,
// Q-K-V order, round-robin order when all sources request at once, that the
// beat holds under backpressure, and the cycle count of an uncontended
// transfer (3*d_model + 1 cycles for a layer).
module tb_host_tx;
  import ita_pkg::*;
  import tb_ref_pkg::*;

  localparam int D = 4, NL = 4, V = 10, NSRC = NL + 1;

  logic clk = 0, rst_n = 0;
  logic qkv_valid [NL], qkv_ready [NL];
  logic signed [15:0] q [NL][D], k [NL][D], v [NL][D];
  logic logits_valid = 0, logits_ready;
  logic signed [15:0] logits [V];
  logic out_valid, out_ready = 1;
  logic signed [15:0] out_data;
  link_tag_t out_tag;
  int checks = 0, failures = 0, cycle = 0, bp_cycles = 0;

  host_tx #(.D_MODEL(D), .N_LAYERS(NL), .VOCAB(V)) u_dut (.*);
  always #5 clk = ~clk;

  // expected beats, pushed when a source is acknowledged
  int exp_data [$], exp_kind [$], exp_layer [$], exp_last [$];
  int grants [$];
  logic bp_on = 0;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      for (int s = 0; s < NL; s++)
        if (qkv_valid[s] && qkv_ready[s]) begin
          grants.push_back(s);
          for (int i = 0; i < 3 * D; i++) begin
            exp_data.push_back(i < D ? int'(q[s][i]) : i < 2 * D ? int'(k[s][i - D])
                                                                 : int'(v[s][i - 2 * D]));
            exp_kind.push_back(i < D ? int'(VK_Q) : i < 2 * D ? int'(VK_K) : int'(VK_V));
            exp_layer.push_back(s);
            exp_last.push_back((i % D) == D - 1);
          end
        end
      if (logits_valid && logits_ready) begin
        grants.push_back(NL);
        for (int i = 0; i < V; i++) begin
          exp_data.push_back(int'(logits[i]));
          exp_kind.push_back(int'(VK_LOGITS));
          exp_layer.push_back(NL);
          exp_last.push_back(i == V - 1);
        end
      end
      if (out_valid && !out_ready) bp_cycles++;
      if (out_valid && out_ready) begin
        checks++;
        if (exp_data.size() == 0) begin
          failures++; $display("FAIL unexpected beat");
        end else if (int'(out_data) != exp_data.pop_front() || int'(out_tag.kind) != exp_kind.pop_front()
                     || int'(out_tag.layer) != exp_layer.pop_front()
                     || int'(out_tag.last) != exp_last.pop_front()) begin
          failures++;
          if (failures < 10) $display("FAIL beat data/tag mismatch at cycle %0d", cycle);
        end
      end
    end
  end

  // backpressure with stability check
  logic signed [15:0] held_d;
  link_tag_t          held_tag;
  logic               held = 0;
  always @(negedge clk) begin
    if (held) begin
      checks++;
      if (!out_valid || out_data != held_d || out_tag != held_tag) begin
        failures++;
        $display("FAIL beat changed under stall");
      end
    end
    out_ready = bp_on ? ($urandom_range(2) != 0) : 1'b1;
    held      = out_valid && !out_ready;
    held_d    = out_data;
    held_tag  = out_tag;
  end

  task automatic raise_layer(int s);
    foreach (q[s][i]) begin
      q[s][i] = 16'($urandom);
      k[s][i] = 16'($urandom);
      v[s][i] = 16'($urandom);
    end
    qkv_valid[s] = 1;
  endtask

  task automatic raise_logits();
    foreach (logits[i]) logits[i] = 16'($urandom);
    logits_valid = 1;
  endtask

  // drop requests that were acknowledged
  always @(posedge clk) begin
    for (int s = 0; s < NL; s++) if (qkv_valid[s] && qkv_ready[s]) qkv_valid[s] <= 0;
    if (logits_valid && logits_ready) logits_valid <= 0;
  end

  function automatic logic idle();
    logic any;
    any = logits_valid;
    foreach (qkv_valid[s]) any |= qkv_valid[s];
    return !any && !out_valid;
  endfunction

  initial begin
    int t0;
    foreach (qkv_valid[s]) qkv_valid[s] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // 1: single uncontended transfer, timing
    @(negedge clk);
    raise_layer(2);
    t0 = cycle;
    @(negedge clk);
    while (out_valid) @(negedge clk);
    checks++;
    if (cycle - t0 != 3 * D + 1) begin failures++; $display("FAIL transfer took %0d cycles", cycle - t0); end
    // 2: all sources at once, round robin after layer 2: 3, 4(logits), 0, 1, 2
    @(negedge clk);
    grants.delete();
    for (int s = 0; s < NL; s++) raise_layer(s);
    raise_logits();
    while (!idle()) @(negedge clk);
    checks++;
    if (grants.size() != 5 || grants[0] != 3 || grants[1] != 4 || grants[2] != 0
        || grants[3] != 1 || grants[4] != 2) begin
      failures++;
      $display("FAIL round robin order %p", grants);
    end
    // 3: random traffic with backpressure
    bp_on = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      for (int s = 0; s < NL; s++) if (!qkv_valid[s] && $urandom_range(15) == 0) raise_layer(s);
      if (!logits_valid && $urandom_range(30) == 0) raise_logits();
    end
    while (!idle()) @(negedge clk);
    checks++;
    if (exp_data.size() != 0 || bp_cycles == 0) begin failures++; $display("FAIL leftover or no backpressure"); end
    $display("backpressure cycles %0d", bp_cycles);
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

// tb_lm_head: last-layer outputs (d_model 8) through a 20-entry hardwired
// vocabulary projection. Logits must match the reference, appear in the
// cycle after the input handshake, and hold (with in_ready low) until the
// consumer takes them after a random delay.
module tb_lm_head;
  import ita_pkg::*;
  import tb_ref_pkg::*;

  localparam int D = 8, V = 20, LAYER = 32;

  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, logits_valid, logits_ready = 0;
  logic signed [7:0]  x [D];
  logic signed [15:0] logits [V];
  int checks = 0, failures = 0;

  lm_head #(.D_MODEL(D), .VOCAB(V), .LAYER(LAYER)) u_dut (.*);
  always #5 clk = ~clk;

  initial begin
    foreach (x[i]) x[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      vec_t xv, want;
      int dly;
      xv = new[D];
      foreach (xv[i]) xv[i] = rnd8();
      want = matvec(LAYER, int'(MAT_LM), xv, V, 16);
      @(negedge clk);
      checks++;
      if (!in_ready || logits_valid) begin failures++; $display("FAIL not idle"); end
      foreach (x[i]) x[i] = 8'(xv[i]);
      in_valid = 1;
      @(negedge clk);
      foreach (x[i]) x[i] = 8'(rnd8());
      checks++;
      if (!logits_valid) begin failures++; $display("FAIL logits not valid after one cycle"); end
      dly = int'($urandom_range(3));
      for (int c = 0; c <= dly; c++) begin
        checks++;
        if (in_ready) begin failures++; $display("FAIL accepts input while holding logits"); end
        for (int i = 0; i < V; i++) begin
          checks++;
          if (int'(logits[i]) != want[i]) begin
            failures++;
            if (failures < 10) $display("FAIL logit %0d got %0d want %0d", i, logits[i], want[i]);
          end
        end
        if (c < dly) @(negedge clk);
      end
      in_valid = 0;
      logits_ready = 1;
      @(negedge clk);
      logits_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

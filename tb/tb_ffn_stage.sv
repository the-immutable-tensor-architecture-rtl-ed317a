// tb_ffn_stage: random INT8 vectors streamed into the FFN of layer 2
// (d_model 8, d_ffn 22) one per cycle, with gaps. Each result must appear
// exactly two cycles after its input and match the reference FFN.
module tb_ffn_stage;
  import ita_pkg::*;
  import tb_ref_pkg::*;

  localparam int D = 8, F = 22, LAYER = 2, NVEC = 50;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [7:0] x [D], y [D];
  int checks = 0, failures = 0, cycle = 0;
  vec_t sent [$];
  int   sent_cycle [$];
  int   got = 0;

  ffn_stage #(.D_MODEL(D), .D_FFN(F), .LAYER(LAYER)) u_dut (.clk, .rst_n, .in_valid, .x,
                                                           .out_valid, .y);
  always #5 clk = ~clk;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && out_valid) begin
      vec_t want;
      want = ffn(LAYER, sent.pop_front(), D, F);
      checks++;
      if (cycle - sent_cycle.pop_front() != 2) begin
        failures++;
        $display("FAIL latency");
      end
      for (int i = 0; i < D; i++) begin
        checks++;
        if (int'(y[i]) != want[i]) begin
          failures++;
          if (failures < 10) $display("FAIL y[%0d] got %0d want %0d", i, y[i], want[i]);
        end
      end
      got++;
    end
  end

  initial begin
    foreach (x[i]) x[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < NVEC; t++) begin
      vec_t xv;
      xv = new[D];
      // the FFN input is an attention output: use the INT16 reference path
      foreach (xv[i]) xv[i] = rnd8();
      @(negedge clk);
      foreach (x[i]) x[i] = 8'(xv[i]);
      in_valid = ($urandom_range(3) != 0) || t == 0 ? 1'b1 : 1'b0;
      if (in_valid) begin
        sent.push_back(xv);
        sent_cycle.push_back(cycle);
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (sent.size() != 0 || got == 0) begin failures++; $display("FAIL missing results"); end
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

// tb_qkv_projection: random INT8 inputs through the three hardwired
// projections of layer 3 (d_model 8); Q, K and V compared with the reference
// products, with the one-cycle latency checked.
module tb_qkv_projection;
  import ita_pkg::*;
  import tb_ref_pkg::*;

  localparam int D = 8, LAYER = 3;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [7:0]  x [D];
  logic signed [15:0] q [D], k [D], v [D];
  int checks = 0, failures = 0;

  qkv_projection #(.D_MODEL(D), .LAYER(LAYER)) u_dut (.clk, .rst_n, .in_valid, .x, .out_valid,
                                                       .q, .k, .v);
  always #5 clk = ~clk;

  task automatic cmp(string name, logic signed [15:0] got [D], vec_t want);
    for (int i = 0; i < D; i++) begin
      checks++;
      if (int'(got[i]) != want[i]) begin
        failures++;
        if (failures < 10) $display("FAIL %s[%0d] got %0d want %0d", name, i, got[i], want[i]);
      end
    end
  endtask

  initial begin
    vec_t xv;
    xv = new[D];
    foreach (x[i]) x[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      foreach (xv[i]) xv[i] = rnd8();
      @(negedge clk);
      foreach (x[i]) x[i] = 8'(xv[i]);
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL no out_valid after one cycle"); end
      cmp("q", q, qkv(LAYER, int'(MAT_WQ), xv, D));
      cmp("k", k, qkv(LAYER, int'(MAT_WK), xv, D));
      cmp("v", v, qkv(LAYER, int'(MAT_WV), xv, D));
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

// tb_csd_const_mult: every INT4 weight code (-8..7) times every INT8
// activation, checked against the plain product. Also checks that the
// hardwired weight set prunes roughly the share of weights the design
// intends (15-30 % zero codes over a sample of 4096 entries).
module tb_csd_const_mult;
  import ita_pkg::*;

  int checks = 0, failures = 0;
  logic signed [ACT_W-1:0]       x;
  logic signed [ACT_W+WGT_W-1:0] p [16];

  for (genvar w = 0; w < 16; w++) begin : g_w
    csd_const_mult #(.W(WGT_W'(w - 8))) u_dut (.x(x), .p(p[w]));
  end

  initial begin
    int zeros;
    for (int xv = -128; xv < 128; xv++) begin
      x = ACT_W'(xv);
      #1;
      for (int w = 0; w < 16; w++) begin
        checks++;
        if (int'(p[w]) != xv * (w - 8)) begin
          failures++;
          if (failures < 10) $display("FAIL x=%0d w=%0d p=%0d", xv, w - 8, p[w]);
        end
      end
    end
    zeros = 0;
    for (int r = 0; r < 64; r++)
      for (int c = 0; c < 64; c++)
        if (weight(1, int'(MAT_W1), r, c) == 0) zeros++;
    checks++;
    if (zeros < 614 || zeros > 1229) begin
      failures++;
      $display("FAIL pruned share %0d / 4096", zeros);
    end
    $display("pruned weights: %0d of 4096", zeros);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

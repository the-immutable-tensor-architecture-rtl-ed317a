// tb_swiglu_gate: every INT8 value of h1 (256 lanes) against random and
// extreme h3 values; the gate output is compared with the reference formula.
// Also checks two properties of the hard-Swish: sigma(a) = a for a >= 3.0
// (with h3 = 1.0) and sigma(a) = 0 for a <= -3.0.
module tb_swiglu_gate;
  import ita_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 256;

  logic signed [7:0] h1 [N], h3 [N], g [N];
  int checks = 0, failures = 0;

  swiglu_gate #(.N(N)) u_dut (.h1, .h3, .g);

  initial begin
    for (int round = 0; round < 20; round++) begin
      for (int i = 0; i < N; i++) begin
        h1[i] = 8'(i - 128);
        h3[i] = (round == 0) ? 8'sd16 : (round == 1) ? 8'sd127 : (round == 2) ? -8'sd128
                : 8'(rnd8());
      end
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (int'(g[i]) != gate1(i - 128, int'(h3[i]))) begin
          failures++;
          if (failures < 10)
            $display("FAIL h1=%0d h3=%0d got %0d want %0d", i - 128, h3[i], g[i],
                     gate1(i - 128, int'(h3[i])));
        end
        if (round == 0 && (i - 128 >= 48)) begin
          checks++;
          if (int'(g[i]) != i - 128) begin failures++; $display("FAIL identity at %0d", i - 128); end
        end
        if (round == 0 && (i - 128 <= -48)) begin
          checks++;
          if (g[i] != 0) begin failures++; $display("FAIL zero at %0d", i - 128); end
        end
      end
    end
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

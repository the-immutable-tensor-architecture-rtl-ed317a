// tb_hardwired_matvec: random INT8 vectors through a 20-input, 12-output
// hardwired matrix; outputs compared with the reference product. Checks the
// one-cycle latency (out_valid exactly one cycle after in_valid) and that the
// result holds while no new input arrives. Extreme inputs exercise the
// saturation.
module tb_hardwired_matvec;
  import ita_pkg::*;
  import tb_ref_pkg::*;

  localparam int NI = 20, NO = 12, OW = 8, LAYER = 7, MAT = 4;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [7:0]    x [NI];
  logic signed [OW-1:0] y [NO];
  int checks = 0, failures = 0, cycle = 0;

  hardwired_matvec #(.N_IN(NI), .N_OUT(NO), .IN_W(8), .OUT_W(OW), .LAYER(LAYER), .MAT(MAT))
    u_dut (.clk, .rst_n, .in_valid, .x, .out_valid, .y);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check_y(vec_t xin);
    vec_t ref_y;
    ref_y = matvec(LAYER, MAT, xin, NO, OW);
    for (int r = 0; r < NO; r++) begin
      checks++;
      if (int'(y[r]) != ref_y[r]) begin
        failures++;
        if (failures < 10) $display("FAIL row %0d got %0d want %0d", r, y[r], ref_y[r]);
      end
    end
  endtask

  initial begin
    vec_t xv;
    xv = new[NI];
    foreach (x[i]) x[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int t = 0; t < 60; t++) begin
      int sent;
      foreach (xv[i]) xv[i] = (t < 4) ? ((t % 2 == 1) ? 127 : -128) : rnd8();
      @(negedge clk);
      foreach (x[i]) x[i] = 8'(xv[i]);
      in_valid = 1;
      @(posedge clk);
      sent = cycle;
      @(negedge clk);
      in_valid = 0;
      foreach (x[i]) x[i] = 8'(rnd8());   // inputs change, output must hold
      checks++;
      if (!out_valid) begin failures++; $display("FAIL out_valid missing"); end
      check_y(xv);
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("FAIL out_valid longer than one cycle"); end
      check_y(xv);
    end
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

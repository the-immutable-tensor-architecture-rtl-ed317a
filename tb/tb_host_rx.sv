// tb_host_rx: element stream into the receiver (d_model 4, 4 layers).
// Sends token-input and attention vectors with random gaps, and checks that
// each arrives complete at the right destination (INT8-saturated for the
// token input), that the receiver stalls the stream (in_ready low) while a
// vector waits for its destination, and that malformed vectors (too short,
// too long, wrong kind, layer out of range) raise rx_error and are dropped
// while the next good vector still gets through.
module tb_host_rx;
  import ita_pkg::*;
  import tb_ref_pkg::*;

  localparam int D = 4, NL = 4;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  logic signed [15:0] in_data = 0;
  link_tag_t in_tag;
  logic embed_valid, embed_ready = 0;
  logic signed [7:0] embed [D];
  logic attn_valid [NL], attn_ready [NL];
  logic signed [15:0] attn [D];
  logic rx_error;
  int checks = 0, failures = 0, stalls = 0, delivered = 0;

  host_rx #(.D_MODEL(D), .N_LAYERS(NL)) u_dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (in_valid && !in_ready) stalls++;

  task automatic send(vec_kind_e kind, int layer, vec_t data);
    for (int i = 0; i < data.size(); i++) begin
      @(negedge clk);
      in_valid     = 1;
      in_data      = 16'(data[i]);
      in_tag.kind  = kind;
      in_tag.layer = LAYER_ID_W'(layer);
      in_tag.last  = (i == data.size() - 1);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
      in_valid = 0;
      repeat ($urandom_range(1)) @(negedge clk);
    end
  endtask

  // wait for a delivery and check it; dest = -1 for the token input
  task automatic expect_vec(int dest, vec_t data);
    int n, dly;
    n = 0;
    while (!(dest < 0 ? embed_valid : attn_valid[dest])) begin
      @(negedge clk);
      if (++n > 50) begin failures++; $display("FAIL no delivery to %0d", dest); return; end
    end
    checks++;
    if (dest >= 0 && embed_valid) begin failures++; $display("FAIL wrong destination"); end
    for (int l = 0; l < NL; l++) begin
      checks++;
      if (attn_valid[l] && l != dest) begin failures++; $display("FAIL attn to wrong layer %0d", l); end
    end
    for (int i = 0; i < D; i++) begin
      checks++;
      if (dest < 0 ? int'(embed[i]) != sat(data[i], 8) : int'(attn[i]) != data[i]) begin
        failures++;
        $display("FAIL element %0d of vector to %0d", i, dest);
      end
    end
    dly = int'($urandom_range(3));
    repeat (dly) @(negedge clk);
    if (dest < 0) embed_ready = 1; else attn_ready[dest] = 1;
    @(negedge clk);
    embed_ready = 0;
    foreach (attn_ready[l]) attn_ready[l] = 0;
    delivered++;
  endtask

  function automatic vec_t rvec(int n);
    vec_t r;
    r = new[n];
    foreach (r[i]) r[i] = int'($urandom_range(1000)) - 500;
    return r;
  endfunction

  initial begin
    vec_t a, b;
    in_tag = '0;
    foreach (attn_ready[l]) attn_ready[l] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      a = rvec(D);
      if (t % 3 == 0) begin
        fork
          send(VK_EMBED, 0, a);
          expect_vec(-1, a);
        join
      end else begin
        fork
          send(VK_ATTN, t % NL, a);
          expect_vec(t % NL, a);
        join
      end
      checks++;
      if (rx_error) begin failures++; $display("FAIL error on good vector"); end
    end
    // back to back: second vector must wait (stall) until the first is taken
    a = rvec(D);
    b = rvec(D);
    fork
      begin send(VK_ATTN, 1, a); send(VK_ATTN, 2, b); end
      begin
        repeat (3 * D + 6) @(negedge clk);
        expect_vec(1, a);
        expect_vec(2, b);
      end
    join
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no stall seen"); end
    // malformed: too short
    send(VK_ATTN, 0, rvec(D - 1));
    repeat (3) @(negedge clk);
    checks++;
    if (!rx_error || attn_valid[0]) begin failures++; $display("FAIL short vector not flagged"); end
    // reset clears the flag; then too long, wrong kind, bad layer
    rst_n = 0; @(negedge clk); rst_n = 1;
    send(VK_ATTN, 0, rvec(D + 2));
    checks++;
    if (!rx_error) begin failures++; $display("FAIL long vector not flagged"); end
    rst_n = 0; @(negedge clk); rst_n = 1;
    send(VK_K, 0, rvec(D));
    repeat (2) @(negedge clk);
    checks++;
    if (!rx_error || attn_valid[0] || embed_valid) begin failures++; $display("FAIL bad kind"); end
    rst_n = 0; @(negedge clk); rst_n = 1;
    send(VK_ATTN, NL, rvec(D));
    repeat (2) @(negedge clk);
    checks++;
    if (!rx_error) begin failures++; $display("FAIL bad layer not flagged"); end
    // still works afterwards
    a = rvec(D);
    fork send(VK_ATTN, 3, a); expect_vec(3, a); join
    $display("delivered %0d, stall cycles %0d", delivered, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// hardwired_matvec: y = W x for a weight matrix W fixed in the logic.
//
// Every weight W[r][c] = ita_pkg::weight(LAYER, MAT, r, c) gets its own
// csd_const_mult, so the matrix exists only as wiring and adders: there is no
// weight memory, address or fetch. Each output row sums its N_IN products in
// an adder tree (the accumulator of one neuron), then the sum is scaled back
// by the weight's 3 fractional bits (arithmetic shift right), saturated to
// OUT_W bits and captured in a pipeline register. All N_OUT rows work in
// parallel, so a whole matrix-vector product takes one clock.
//
// Timing: when in_valid is high at a rising edge, y holds W x from the next
// cycle on and out_valid is high for exactly that one cycle. y keeps its value
// until the next in_valid. Reset clears out_valid and y.
//
// Following the paper: constant-coefficient multipliers, shift-add trees, an
// accumulator and a pipeline register per neuron, parallel matrix-vector
// units. Own choices: single-cycle adder tree, floor scaling, saturation.
module hardwired_matvec
  import ita_pkg::*;
#(
  parameter int N_IN  = 32,            // input vector length
  parameter int N_OUT = 32,            // output vector length (matrix rows)
  parameter int IN_W  = ACT_W,         // input element width
  parameter int OUT_W = ACT_W,         // output element width after saturation
  parameter int LAYER = 0,             // weight set selector
  parameter int MAT   = int'(MAT_WQ)   // weight set selector
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic signed [IN_W-1:0]        x [N_IN],
  output logic                          out_valid,
  output logic signed [OUT_W-1:0]       y [N_OUT]
);

  localparam int PROD_W = IN_W + WGT_W;
  localparam int SUM_W  = PROD_W + $clog2(N_IN + 1);      // exact sum of N_IN products
  // wide enough for the exact sum and for the saturation bounds of OUT_W
  localparam int ACC_W  = (SUM_W > OUT_W + W_FRAC + 1) ? SUM_W : OUT_W + W_FRAC + 1;
  localparam logic signed [ACC_W-1:0] MAXV = ACC_W'((64'sd1 <<< (OUT_W - 1)) - 1);
  localparam logic signed [ACC_W-1:0] MINV = ACC_W'(-(64'sd1 <<< (OUT_W - 1)));

  logic signed [PROD_W-1:0] prod [N_OUT][N_IN];
  logic signed [ACC_W-1:0]  acc  [N_OUT];
  logic signed [ACC_W-1:0]  scl  [N_OUT];
  logic signed [OUT_W-1:0]  ysat [N_OUT];

  for (genvar r = 0; r < N_OUT; r++) begin : g_row
    for (genvar c = 0; c < N_IN; c++) begin : g_col
      csd_const_mult #(
        .IN_W (IN_W),
        .W    (weight(LAYER, MAT, r, c)),
        .OUT_W(PROD_W)
      ) u_mul (
        .x(x[c]),
        .p(prod[r][c])
      );
    end

    always_comb begin
      acc[r] = '0;
      for (int c = 0; c < N_IN; c++) acc[r] = acc[r] + ACC_W'(prod[r][c]);
      scl[r] = acc[r] >>> W_FRAC;
      if (scl[r] > MAXV)      ysat[r] = MAXV[OUT_W-1:0];
      else if (scl[r] < MINV) ysat[r] = MINV[OUT_W-1:0];
      else                    ysat[r] = scl[r][OUT_W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int r = 0; r < N_OUT; r++) y[r] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int r = 0; r < N_OUT; r++) y[r] <= ysat[r];
    end
  end

endmodule

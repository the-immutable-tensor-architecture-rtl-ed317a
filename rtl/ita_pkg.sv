// ita_pkg: number formats, sizes and the hardwired weight set shared by the
// Immutable Tensor Architecture (ITA) RTL.
//
// Number formats. Activations inside the device are INT8 with ACT_FRAC = 4
// fractional bits. Weights are INT4 codes q in [-8, 7] standing for q/8
// (W_FRAC = 3), so the paper's example weight 0.375 is q = 3. Vectors cross
// the host link as INT16 elements with the same 4 fractional bits, matching
// the 2-byte elements of the paper's bandwidth budget.
//
// Weights. The trained model's weights are not available, so weight() returns
// a fixed pseudo-random INT4 code for every (layer, matrix, row, column). The
// code is a hash, so each constant multiplier gets its coefficient at
// elaboration time and the values are reproducible by any reference model.
// About 1/4 of the codes are zero (the paper quotes 15-25 % pruned weights);
// those multipliers are removed by csd_const_mult.
//
// CSD. csd_pos()/csd_neg() give the canonical signed digit (non-adjacent form)
// of a weight code as two masks of digit positions holding +1 and -1.
package ita_pkg;

  localparam int ACT_W    = 8;   // INT8 activations
  localparam int ACT_FRAC = 4;   // fractional bits of activations and link elements
  localparam int WGT_W    = 4;   // INT4 hardwired weights
  localparam int W_FRAC   = 3;   // weight code q means q / 2**W_FRAC
  localparam int ELEM_W   = 16;  // INT16 elements on the host link
  localparam int CSD_DIGITS = WGT_W + 1;  // NAF of a 4-bit code needs 5 digits

  // Matrix identifiers used to seed the weight set.
  typedef enum logic [2:0] {
    MAT_WQ = 3'd0, MAT_WK = 3'd1, MAT_WV = 3'd2,
    MAT_W1 = 3'd3, MAT_W2 = 3'd4, MAT_W3 = 3'd5, MAT_LM = 3'd6
  } mat_id_e;

  // Kind of a vector on the host link.
  typedef enum logic [2:0] {
    VK_EMBED  = 3'd0,  // host -> device: token embedding for layer 0
    VK_ATTN   = 3'd1,  // host -> device: attention output for one layer
    VK_Q      = 3'd2,  // device -> host: query projection of one layer
    VK_K      = 3'd3,  // device -> host: key projection of one layer
    VK_V      = 3'd4,  // device -> host: value projection of one layer
    VK_LOGITS = 3'd5   // device -> host: final logits
  } vec_kind_e;

  localparam int LAYER_ID_W = 6;   // up to 64 layers

  // Side information of one element beat on the host link.
  typedef struct packed {
    vec_kind_e             kind;
    logic [LAYER_ID_W-1:0] layer;
    logic                  last;   // final element of the vector
  } link_tag_t;

  // Hardwired weight code of one matrix entry.
  function automatic logic signed [WGT_W-1:0] weight(int unsigned layer, int unsigned mat,
                                                     int unsigned row, int unsigned col);
    logic [31:0] h;
    h = (layer * 32'h9E37_79B1) ^ (mat * 32'h85EB_CA77) ^ (row * 32'hC2B2_AE3D)
        ^ (col * 32'h27D4_EB2F) ^ 32'h1656_67B1;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    h = h * 32'h297A_2D39;
    h = h ^ (h >> 15);
    if (h[11:8] < 4'd3) return '0;        // pruned (|w| below threshold)
    return h[WGT_W-1:0];
  endfunction

  // Canonical signed digit masks of a weight code.
  function automatic logic [CSD_DIGITS-1:0] csd_pos(int w);
    logic [CSD_DIGITS-1:0] m;
    int v;
    m = '0;
    v = w;
    for (int i = 0; i < CSD_DIGITS; i++) begin
      if (v % 2 != 0) begin
        if (((v % 4) + 4) % 4 == 1) begin m[i] = 1'b1; v = v - 1; end
        else v = v + 1;
      end
      v = v / 2;
    end
    return m;
  endfunction

  function automatic logic [CSD_DIGITS-1:0] csd_neg(int w);
    logic [CSD_DIGITS-1:0] m;
    int v;
    m = '0;
    v = w;
    for (int i = 0; i < CSD_DIGITS; i++) begin
      if (v % 2 != 0) begin
        if (((v % 4) + 4) % 4 == 1) v = v - 1;
        else begin m[i] = 1'b1; v = v + 1; end
      end
      v = v / 2;
    end
    return m;
  endfunction

  // Saturate a wide signed value to OUT bits is done in modules with
  // explicit widths; the helpers below cover the fixed formats.
  function automatic logic signed [ACT_W-1:0] sat_act(logic signed [31:0] v);
    if (v > 127)  return 8'sd127;
    if (v < -128) return -8'sd128;
    return v[ACT_W-1:0];
  endfunction

  function automatic logic signed [ELEM_W-1:0] sat_elem(logic signed [31:0] v);
    if (v > 32767)  return 16'sh7FFF;
    if (v < -32768) return 16'sh8000;
    return v[ELEM_W-1:0];
  endfunction

endpackage

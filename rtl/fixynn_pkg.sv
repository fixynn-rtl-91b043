// fixynn_pkg -- types, constants and the fixed-weight table shared by the
// fixed-weight feature extractor (FFE).
//
// The FFE hard-codes the first layers of a MobileNet-0.25 network. Every
// layer is either a standard 3x3 convolution (layer 1) or a depth-wise
// separable layer (a 3x3 depth-wise convolution followed directly by a 1x1
// point-wise convolution). The layer table below lists the seven fixed
// layers of the main configuration (7 fixed layers, 224x224 input). The layer
// shapes are those of MobileNet-0.25; the count of fixed layers, the 8-bit
// activations and weights and the 32-bit accumulator follow the paper.
//
// Fixed weights: the trained MobileNet weights are not part of this design.
// They are stood in for by fixed_weight(), a deterministic hash that yields
// signed 8-bit weights of which about half are zero (the 50 % sparsity the
// evaluation assumes). Replacing that function with a table of trained
// weights changes nothing else in the RTL: every kernel is elaborated from it.
//
// Configuration bus: BN scale, BN bias and the quantisation shift of every
// datapath stage, and the output tap select, are written through one
// address/data write port. Address layout (CFG_AW = 16 bits):
//   [15:12] layer number 1..15 (0 = top-level control registers)
//   [11]    sub-stage: 0 = first stage (conv or depth-wise), 1 = point-wise
//   [10:9]  field: 0 = BN scale, 1 = BN bias, 2 = Q shift
//   [8:0]   channel
package fixynn_pkg;

  localparam int ACT_W  = 8;   // activation width (paper: 8-bit)
  localparam int WGT_W  = 8;   // weight width (paper: 8-bit)
  localparam int ACC_W  = 32;  // accumulator width (paper: 32-bit)
  localparam int SCALE_W = 16; // BN scale register width (own choice)
  localparam int SHIFT_W = 6;  // Q shift register width (own choice)
  localparam int KSIZE  = 3;   // kernel size of every fixed MobileNet layer
  localparam int KK     = KSIZE * KSIZE;

  localparam int CFG_AW = 16;
  localparam int CFG_DW = 32;

  typedef enum logic [1:0] {
    ST_CONV = 2'd0,  // standard KxKxCin convolution
    ST_DW   = 2'd1,  // depth-wise KxKx1 convolution, one kernel per channel
    ST_PW   = 2'd2   // point-wise 1x1xCin convolution
  } stage_e;

  typedef enum logic [1:0] {
    CF_SCALE = 2'd0,
    CF_BIAS  = 2'd1,
    CF_SHIFT = 2'd2
  } cfg_field_e;

  typedef struct packed {
    logic [3:0] layer;
    logic       sub;
    cfg_field_e field;
    logic [8:0] ch;
  } cfg_addr_t;

  // ---------------------------------------------------------------------
  // Layer table of the fixed MobileNet-0.25 front end (layers 1..7).
  // ---------------------------------------------------------------------
  localparam int NUM_LAYERS = 7;
  localparam int MAX_CH     = 128;

  // is_dws: 0 = standard conv (layer 1), 1 = depth-wise separable
  function automatic int layer_is_dws(int l);
    return (l == 1) ? 0 : 1;
  endfunction

  function automatic int layer_cin(int l);
    case (l)
      1: return 3;
      2: return 8;
      3: return 16;
      4: return 32;
      5: return 32;
      6: return 64;
      7: return 64;
      default: return 1;
    endcase
  endfunction

  function automatic int layer_cout(int l);
    case (l)
      1: return 8;
      2: return 16;
      3: return 32;
      4: return 32;
      5: return 64;
      6: return 64;
      7: return 128;
      default: return 1;
    endcase
  endfunction

  function automatic int layer_stride(int l);
    case (l)
      1, 3, 5, 7: return 2;
      default:    return 1;
    endcase
  endfunction

  // TensorFlow 'SAME' output size
  function automatic int out_size(int in_size, int stride);
    return (in_size + stride - 1) / stride;
  endfunction

  // input width (or height) of layer l for an image of size img
  function automatic int layer_in_size(int l, int img);
    int s = img;
    for (int k = 1; k < l; k++) s = out_size(s, layer_stride(k));
    return s;
  endfunction

  // ---------------------------------------------------------------------
  // Stand-in fixed weights.
  //   l   : layer 1..7
  //   st  : stage (ST_CONV, ST_DW, ST_PW)
  //   o   : output channel of the kernel
  //   j   : input index inside the kernel
  //         ST_CONV: j = cin*KK + ky*KSIZE + kx
  //         ST_DW  : j = ky*KSIZE + kx
  //         ST_PW  : j = cin
  // ---------------------------------------------------------------------
  function automatic int fixed_weight(int l, int st, int o, int j);
    logic [31:0] h;
    logic signed [7:0] v;
    h = 32'(l) * 32'h9E3779B1 ^ 32'(st) * 32'h85EBCA77 ^
        32'(o) * 32'hC2B2AE3D ^ 32'(j) * 32'h27D4EB2F;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    h = h * 32'h297A2D39;
    h = h ^ (h >> 15);
    if (h[31]) return 0;                 // about 50 % pruned
    v = h[7:0];
    if (h[30]) v = v >>> 3;              // a share of small weights
    if (v == 0) v = 8'sd1;
    if (v == -8'sd128) v = -8'sd127;
    return int'(v);
  endfunction

  // number of inputs of one kernel of a stage
  function automatic int stage_taps(int st, int cin);
    if (st == int'(ST_CONV)) return cin * KK;
    if (st == int'(ST_DW))   return KK;
    return cin;
  endfunction

  // number of non-zero (kept) weights of a kernel
  function automatic int kernel_nnz(int l, int st, int o, int n);
    int c = 0;
    for (int j = 0; j < n; j++) if (fixed_weight(l, st, o, j) != 0) c++;
    return c;
  endfunction

  // input index of the k-th non-zero weight of a kernel
  function automatic int kernel_nz_index(int l, int st, int o, int n, int k);
    int c = 0;
    for (int j = 0; j < n; j++) begin
      if (fixed_weight(l, st, o, j) != 0) begin
        if (c == k) return j;
        c++;
      end
    end
    return 0;
  endfunction

  // bits needed for the magnitude of a weight (product width optimisation)
  function automatic int mag_bits(int w);
    int m = (w < 0) ? -w : w;
    int b = 0;
    while (m > 0) begin
      b++;
      m = m >> 1;
    end
    return b;
  endfunction

endpackage

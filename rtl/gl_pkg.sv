// gl_pkg: types, sizes and arithmetic shared by the GraphLeap accelerator.
//
// The parallelism numbers (P_N = P_D = 32 node and channel lanes, H = 16
// heads) are the published configuration. Everything about number format is
// this design's own choice, since none is published: features and weights
// are signed 16-bit fixed point with 8 fraction bits, products accumulate in
// 48 bits, and every linear layer rounds by truncation (arithmetic shift
// right by FRAC) and saturates back to 16 bits. The GELU is a 17-point
// piece-wise-linear table over [-4, 4] (entries are round(256*x*Phi(x)) at
// x = -4 + 0.5*i), identity above 4 and zero below -4.
package gl_pkg;

  localparam int DW    = 16;   // feature / weight width
  localparam int FRAC  = 8;    // fraction bits
  localparam int ACCW  = 48;   // MAC accumulator width
  localparam int DISTW = 48;   // squared-distance width

  typedef logic signed [DW-1:0]   feat_t;
  typedef logic signed [ACCW-1:0] acc_t;
  typedef logic [DISTW-1:0]       dist_t;

  // Activation applied on write-back of a linear layer.
  typedef enum logic [1:0] {
    ACT_NONE = 2'd0,
    ACT_RELU = 2'd1,
    ACT_GELU = 2'd2
  } act_e;

  // Operand source / destination selectors of the shared MLP fabric.
  typedef enum logic [2:0] {
    BUF_XIN  = 3'd0,   // current layer input features X(l)
    BUF_XOUT = 3'd1,   // next layer features X(l+1)
    BUF_U    = 3'd2,   // U = X W_in
    BUF_M    = 3'd3,   // max-relative messages
    BUF_T    = 3'd4,   // act(graph-conv output)
    BUF_Y    = 3'd5,   // Grapher output
    BUF_HID  = 3'd6,   // FFN hidden (4D)
    BUF_NONE = 3'd7
  } buf_e;

  // One linear layer for the shared MLP fabric (see mlp_engine).
  typedef struct packed {
    logic [15:0] n_nodes;    // nodes to process
    logic [15:0] in_ch;      // dense: input channels K; grouped: D
    logic [7:0]  in_tiles_a; // p_D tiles per node in source a
    logic [7:0]  in_tiles_b; // p_D tiles per node in source b (grouped only)
    logic [15:0] out_ch;     // output channels
    logic [7:0]  out_tiles;  // p_D tiles per node in destination / residual
    logic        grouped;    // multi-head [a, b] x W_agg with heads of dh channels
    logic [15:0] dh;         // channels per head (grouped only)
    buf_e        src_a;
    buf_e        src_b;
    logic        res_en;
    buf_e        res_buf;
    buf_e        dst;
    act_e        act;
    logic [23:0] w_base;     // weight-buffer word address of row 0, tile 0
    logic [23:0] b_base;     // weight-buffer word address of bias tile 0
  } mlp_job_t;

  // Saturate a wide value to the feature width.
  function automatic feat_t sat(input acc_t v);
    if (v > acc_t'(32767))       return feat_t'(16'sh7fff);
    else if (v < acc_t'(-32768)) return feat_t'(-16'sh8000);
    else                         return feat_t'(v[DW-1:0]);
  endfunction

  function automatic feat_t sat_add(input feat_t a, input feat_t b);
    return sat(acc_t'(a) + acc_t'(b));
  endfunction

  function automatic feat_t relu(input feat_t x);
    return (x < 0) ? feat_t'(0) : x;
  endfunction

  // GELU breakpoint table, Q8.8, x = -4.0 + 0.5*i.
  function automatic feat_t gelu_tab(input int i);
    case (i)
      0: return 0;     1: return 0;     2: return -1;    3: return -4;
      4: return -12;   5: return -26;   6: return -41;   7: return -39;
      8: return 0;     9: return 89;    10: return 215;  11: return 358;
      12: return 500;  13: return 636;  14: return 767;  15: return 896;
      default: return 1024;
    endcase
  endfunction

  function automatic feat_t gelu_pwl(input feat_t x);
    int   seg, o;
    acc_t off, y0, y1, y;
    if (x < -16'sd1024)     return 0;
    else if (x >= 16'sd1024) return x;
    seg = (int'(x) + 1024) >>> 7;            // 0..15, segment width 0.5 = 128
    o   = int'(x) + 1024 - seg * 128;
    off = acc_t'(o);
    y0  = acc_t'(gelu_tab(seg));
    y1  = acc_t'(gelu_tab(seg + 1));
    y   = y0 + (((y1 - y0) * off) >>> 7);
    return sat(y);
  endfunction

  function automatic feat_t apply_act(input act_e a, input feat_t x);
    case (a)
      ACT_RELU: return relu(x);
      ACT_GELU: return gelu_pwl(x);
      default:  return x;
    endcase
  endfunction

  // Linear-layer epilogue: (acc + bias<<FRAC) >>> FRAC, saturate.
  function automatic feat_t requant(input acc_t acc, input feat_t bias);
    acc_t s;
    s = acc + (acc_t'(bias) <<< FRAC);
    return sat(s >>> FRAC);
  endfunction

  // Word address of (node, tile) in a feature_banks memory of nb banks
  // holding nodes of `tiles` p_D-element tiles; the bank is node mod nb.
  function automatic int unsigned fb_addr(input int unsigned node,
                                          input int unsigned tile,
                                          input int unsigned tiles,
                                          input int unsigned nb);
    return (node / nb) * tiles + tile;
  endfunction

  // Per-layer weight block layout in p_D-element words, for D channels in
  // t = ceil(D/p_D) tiles and dh = D/H channels per head:
  //   0: W_in  (D rows x t)      1: W_agg (2*dh rows x t)   2: W_out (D x t)
  //   3: W_1   (D rows x 4t)     4: W_2   (4D rows x t)
  //   5..9: biases b_in, b_agg, b_out (t words each), b_1 (4t), b_2 (t)
  //   10: total words of the block.
  function automatic int unsigned wl_off(input int unsigned d, input int unsigned t,
                                         input int unsigned dh, input int unsigned part);
    int unsigned wb;
    wb = t * (10 * d + 2 * dh);
    case (part)
      0: return 0;
      1: return d * t;
      2: return d * t + 2 * dh * t;
      3: return 2 * d * t + 2 * dh * t;
      4: return 6 * d * t + 2 * dh * t;
      5: return wb;
      6: return wb + t;
      7: return wb + 2 * t;
      8: return wb + 3 * t;
      9: return wb + 7 * t;
      default: return wb + 8 * t;
    endcase
  endfunction

endpackage

// kws_pkg: types, constants and the layer table of the keyword-spotting CNN accelerator.
//
// The accelerator runs a fixed eight-step network: three 3x3 convolutions, each followed by
// 2x2/2 max pooling, then two fully connected layers. The number of filters follows the
// network table of the design (64s, 32s, 32s filters, 64s hidden neurons, s = 4.5 in the main
// configuration: 288, 144, 144, 288). The layer table is a packed array of layer_cfg_t that
// build_net() computes from the module parameters, so the same function serves the RTL and
// the testbenches' reference models.
//
// Choices of this design (the source network gives kernel, filter count and stride only):
//   * layer 0 is an unpadded ("valid") convolution: 44x13 -> 42x11, which reproduces the
//     published largest feature map of 3.70*q*s KB; layers 2 and 4 pad by one pixel, so that
//     a 3x3 window still fits after the pooling steps;
//   * pooling drops an odd last row or column (floor);
//   * no biases; every layer shifts its accumulator right by layer_cfg_t.shift and saturates
//     to q signed bits (shift_for); ReLU on all layers but the last.
//
// Storage layout shared by all blocks: a feature map of H x W pixels and C channels is kept
// pixel by pixel (row-major), each pixel as ceil(C/M) words of M lanes of q bits; lane l of
// word g holds channel g*M+l. Weights of output channel co = tile*P + p live in bank p; word k
// of (layer, tile) is at address w_base + tile*K + k, with K words per tile (9*ceil(C/M) for
// a convolution, tap-major; H*W*ceil(C/M) for a fully connected layer, in storage order).
package kws_pkg;

  typedef enum logic [1:0] {
    L_CONV = 2'd0,
    L_POOL = 2'd1,
    L_FC   = 2'd2
  } layer_kind_e;

  localparam int NUM_LAYERS = 8;
  localparam int DIM_W      = 16;  // width of every size field in the layer table
  localparam int ADDR_W     = 20;  // width of the address fields carried between blocks
  localparam int TILE_W     = 8;   // width of the output-channel tile index
  localparam int PIPE_LAT   = 3;   // issue -> result latency: memory read, adder block, accumulator

  typedef struct packed {
    layer_kind_e      kind;
    logic [DIM_W-1:0] in_h;
    logic [DIM_W-1:0] in_w;
    logic [DIM_W-1:0] in_c;
    logic [DIM_W-1:0] in_cg;    // words per input pixel, ceil(in_c / M)
    logic [DIM_W-1:0] out_h;
    logic [DIM_W-1:0] out_w;
    logic [DIM_W-1:0] out_c;
    logic [DIM_W-1:0] out_cg;   // words per output pixel, ceil(out_c / M)
    logic [DIM_W-1:0] tiles;    // ceil(out_c / P) for conv and fc
    logic [DIM_W-1:0] k_words;  // weight words per output channel
    logic             pad;      // conv: one pixel of zero padding
    logic             relu;
    logic [4:0]       shift;
    logic [ADDR_W-1:0] w_base;
  } layer_cfg_t;

  typedef layer_cfg_t [NUM_LAYERS-1:0] net_cfg_t;

  // One issued operation of the convolution or fully connected address generator.
  typedef struct packed {
    logic              valid;
    logic [ADDR_W-1:0] fm_addr;   // feature-map word to read
    logic              pad_zero;  // the word lies in the zero padding: feed zeros
    logic [ADDR_W-1:0] w_addr;    // common address of all weight banks
    logic              first;     // first word of an output pixel: clear the accumulator
    logic              last;      // last word of an output pixel: result follows
    logic [ADDR_W-1:0] out_pix;   // output pixel index (row-major)
    logic [TILE_W-1:0] tile;      // output-channel tile
  } issue_t;

  function automatic int cdiv(int a, int b);
    return (a + b - 1) / b;
  endfunction

  // Right shift of a layer's accumulator: about log2 of the spread of a sum of `terms`
  // products of q-bit values, which keeps the outputs of random data in range.
  function automatic int shift_for(int q, int terms);
    int s;
    s = (q - 3) + ($clog2(terms) + 1) / 2;
    return (s < 0) ? 0 : s;
  endfunction

  function automatic layer_cfg_t mk_layer(layer_kind_e kind, int h, int w, int c, int oh, int ow,
                                          int oc, bit pad, bit relu, int q, int p, int m,
                                          int w_base);
    layer_cfg_t l;
    int terms;
    l = '0;
    l.kind   = kind;
    l.in_h   = DIM_W'(h);
    l.in_w   = DIM_W'(w);
    l.in_c   = DIM_W'(c);
    l.in_cg  = DIM_W'(cdiv(c, m));
    l.out_h  = DIM_W'(oh);
    l.out_w  = DIM_W'(ow);
    l.out_c  = DIM_W'(oc);
    l.out_cg = DIM_W'(cdiv(oc, m));
    l.pad    = pad;
    l.relu   = relu;
    l.w_base = ADDR_W'(w_base);
    if (kind == L_POOL) begin
      l.tiles   = '0;
      l.k_words = '0;
      l.shift   = '0;
    end else begin
      l.tiles   = DIM_W'(cdiv(oc, p));
      l.k_words = (kind == L_CONV) ? DIM_W'(9 * cdiv(c, m)) : DIM_W'(h * w * cdiv(c, m));
      terms     = (kind == L_CONV) ? 9 * c : h * w * c;
      l.shift   = 5'(shift_for(q, terms));
    end
    return l;
  endfunction

  // The network: conv(valid) - pool - conv(same) - pool - conv(same) - pool - fc - fc.
  function automatic net_cfg_t build_net(int q, int p, int m, int in_h, int in_w, int f1,
                                         int f2, int f3, int fc1, int n_out);
    net_cfg_t n;
    int h, w, c, wb;
    h = in_h; w = in_w; c = 1; wb = 0;
    n[0] = mk_layer(L_CONV, h, w, c, h - 2, w - 2, f1, 1'b0, 1'b1, q, p, m, wb);
    wb += int'(n[0].tiles) * int'(n[0].k_words);
    h = h - 2; w = w - 2; c = f1;
    n[1] = mk_layer(L_POOL, h, w, c, h / 2, w / 2, c, 1'b0, 1'b0, q, p, m, 0);
    h = h / 2; w = w / 2;
    n[2] = mk_layer(L_CONV, h, w, c, h, w, f2, 1'b1, 1'b1, q, p, m, wb);
    wb += int'(n[2].tiles) * int'(n[2].k_words);
    c = f2;
    n[3] = mk_layer(L_POOL, h, w, c, h / 2, w / 2, c, 1'b0, 1'b0, q, p, m, 0);
    h = h / 2; w = w / 2;
    n[4] = mk_layer(L_CONV, h, w, c, h, w, f3, 1'b1, 1'b1, q, p, m, wb);
    wb += int'(n[4].tiles) * int'(n[4].k_words);
    c = f3;
    n[5] = mk_layer(L_POOL, h, w, c, h / 2, w / 2, c, 1'b0, 1'b0, q, p, m, 0);
    h = h / 2; w = w / 2;
    n[6] = mk_layer(L_FC, h, w, c, 1, 1, fc1, 1'b0, 1'b1, q, p, m, wb);
    wb += int'(n[6].tiles) * int'(n[6].k_words);
    n[7] = mk_layer(L_FC, 1, 1, fc1, 1, 1, n_out, 1'b0, 1'b0, q, p, m, wb);
    return n;
  endfunction

  // Words per weight bank: all layers' tiles times their words per output channel.
  function automatic int wmem_depth(net_cfg_t n);
    int d;
    d = 0;
    for (int i = 0; i < NUM_LAYERS; i++) d += int'(n[i].tiles) * int'(n[i].k_words);
    return d;
  endfunction

  // Words of the largest feature map (input or output of any layer).
  function automatic int amem_depth(net_cfg_t n);
    int d, a;
    d = 0;
    for (int i = 0; i < NUM_LAYERS; i++) begin
      a = int'(n[i].in_h) * int'(n[i].in_w) * int'(n[i].in_cg);
      if (a > d) d = a;
      a = int'(n[i].out_h) * int'(n[i].out_w) * int'(n[i].out_cg);
      if (a > d) d = a;
    end
    return d;
  endfunction

  // Cycles in which a layer issues work: one weight/feature word per cycle for conv and fc,
  // one read per cycle (four per output word) for pooling.
  function automatic int issue_cycles(layer_cfg_t l);
    if (l.kind == L_POOL)
      return int'(l.out_h) * int'(l.out_w) * int'(l.out_cg) * 4;
    return int'(l.tiles) * int'(l.out_h) * int'(l.out_w) * int'(l.k_words);
  endfunction

endpackage

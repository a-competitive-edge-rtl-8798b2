// deconv_pkg -- types and constants shared by the deconvolution accelerator.
//
// The accelerator computes deconvolution (transposed convolution) layers in
// 32-bit fixed point, as the design it follows does. The split of those 32 bits
// into integer and fraction (Q16.16 here) is this design's choice. The layer
// configuration struct is what a host writes before starting one layer; its
// field widths and the memory layout it implies (CHW feature maps, [oc][ic][kh][kw]
// weights, one bias word per output channel, 32-bit words at byte addresses) are
// also this design's choices.
package deconv_pkg;

  localparam int DATA_W = 32;   // fixed-point word
  localparam int FRAC_W = 16;   // fraction bits (Q16.16)
  localparam int ADDR_W = 32;   // byte address on the memory ports
  localparam int DIM_W  = 12;   // feature-map height/width/channel counts
  localparam int KP_W   = 4;    // kernel size K, stride S, padding P

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic [ADDR_W-1:0]        addr_t;
  typedef logic [DIM_W-1:0]         dim_t;
  typedef logic [KP_W-1:0]          kp_t;

  // One deconvolution layer, as set up by the host.
  typedef struct packed {
    dim_t  ic;         // input channels  I_C
    dim_t  oc;         // output channels
    dim_t  ih;         // input height
    dim_t  iw;         // input width
    dim_t  oh;         // output height
    dim_t  ow;         // output width
    kp_t   k;          // kernel size K (square)
    kp_t   s;          // stride S
    kp_t   p;          // padding P
    logic  zero_skip;  // skip the loops of zero-valued weights
    addr_t in_base;    // input feature map,  word (ic*IH+ih)*IW+iw
    addr_t w_base;     // weights,            word ((oc*IC+ic)*K+kh)*K+kw
    addr_t b_base;     // biases,             word oc
    addr_t out_base;   // output feature map, word (oc*OH+oh)*OW+ow
  } layer_cfg_t;

  // Position of an output tile: output channel, tile row, tile column.
  typedef struct packed {
    dim_t oc;
    dim_t th;
    dim_t tw;
  } tile_pos_t;

  // The tile after `t` in the order tiles are handed to the CUs.
  function automatic tile_pos_t next_tile(tile_pos_t t, dim_t n_th, dim_t n_tw);
    tile_pos_t n;
    n = t;
    if (t.tw + 1'b1 == n_tw) begin
      n.tw = '0;
      if (t.th + 1'b1 == n_th) begin
        n.th = '0;
        n.oc = t.oc + 1'b1;
      end else n.th = t.th + 1'b1;
    end else n.tw = t.tw + 1'b1;
    return n;
  endfunction

  // Q16.16 multiply: full 64-bit product, arithmetic shift, keep 32 bits.
  function automatic data_t fx_mul(data_t a, data_t b);
    logic signed [2*DATA_W-1:0] prod;
    prod = a * b;
    return data_t'(prod >>> FRAC_W);
  endfunction

  // Byte address of word number `word` in a region starting at `base`.
  function automatic addr_t word_addr(addr_t base, logic [ADDR_W-1:0] word);
    return base + (word << 2);
  endfunction

endpackage

// tucker_pkg: types and arithmetic shared by the sparse Tucker accelerator.
//
// Every tensor and matrix element is a signed two's-complement fixed-point
// number of DATA_W bits with FRAC_W fraction bits (Q16.16 by default). A
// product of two elements keeps the full 2*DATA_W-bit result, shifts it right
// arithmetically by FRAC_W and keeps the low DATA_W bits; sums wrap. The
// number format is this design's own choice: the accelerator was described
// as high-level-synthesis code without a stated number format.
//
// A nonzero of an order-3 sparse tensor travels in coordinate (COO) form:
// three zero-based indices and the value, as in the COO table of the design
// (i, j, k, value). Indices are IDX_W bits wide, enough for modes of up to
// 65535 entries.
package tucker_pkg;

  localparam int unsigned DATA_W = 32;
  localparam int unsigned FRAC_W = 16;
  localparam int unsigned IDX_W  = 16;
  localparam int unsigned ORDER  = 3;

  typedef logic signed [DATA_W-1:0] fx_t;
  typedef logic [IDX_W-1:0]         idx_t;

  // One COO nonzero: idx[0] = i (mode 1), idx[1] = j (mode 2), idx[2] = k (mode 3).
  typedef struct packed {
    idx_t [ORDER-1:0] idx;
    fx_t              val;
  } coo_t;

  // Fixed-point multiply: full product, arithmetic shift by FRAC_W, wrap to DATA_W.
  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    logic signed [2*DATA_W-1:0] p;
    p = a * b;
    return fx_t'(p >>> FRAC_W);
  endfunction

endpackage

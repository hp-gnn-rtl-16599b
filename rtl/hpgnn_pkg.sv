// hpgnn_pkg -- types and constants shared by the GNN training accelerator.
//
// Feature vectors move through the design in slices of VEC = 16 words, the
// width one processing element handles per clock. A word is 32 bits, the
// width of the single-precision values of the original design, but it is
// interpreted here as signed fixed point with FRAC fraction bits (Q16.16), so
// that every multiplier and adder is a plain integer unit. fx_mul rounds
// toward minus infinity (arithmetic shift of the 64-bit product) and wraps on
// overflow; fx_add wraps. Vertex indices are 32-bit unsigned.
package hpgnn_pkg;

  localparam int unsigned VEC    = 16;   // words per feature slice
  localparam int unsigned DATA_W = 32;   // word width
  localparam int unsigned FRAC   = 16;   // fraction bits of a word
  localparam int unsigned VID_W  = 32;   // vertex index width

  typedef logic signed [DATA_W-1:0] data_t;
  typedef data_t [VEC-1:0]           vec_t;
  typedef logic [VID_W-1:0]          vid_t;

  // One edge of the sampled adjacency matrix in coordinate form; val is the
  // edge weight prepared by the host (1/sqrt(D(u)D(v)) for GCN, 1/deg for a
  // GraphSAGE mean).
  typedef struct packed {
    vid_t  src;
    vid_t  dst;
    data_t val;
  } edge_t;

  // One feature slice of a source vertex, read from local memory.
  typedef struct packed {
    vid_t src;
    vec_t val;
  } feat_t;

  // An update travelling from a scatter PE to a gather PE, and also a
  // write-back record (vertex index plus slice).
  typedef struct packed {
    vid_t dst;
    vec_t val;
  } upd_t;

  // Element-wise operator applied after each MAC.
  typedef enum logic [0:0] {
    ACT_NONE = 1'b0,
    ACT_RELU = 1'b1
  } act_e;

  function automatic data_t fx_mul(data_t a, data_t b);
    logic signed [2*DATA_W-1:0] p;
    p = 64'(a) * 64'(b);
    return data_t'(p >>> FRAC);
  endfunction

  function automatic data_t fx_add(data_t a, data_t b);
    return data_t'(a + b);
  endfunction

  function automatic vec_t vec_scale(vec_t v, data_t s);
    vec_t r;
    for (int i = 0; i < VEC; i++) r[i] = fx_mul(v[i], s);
    return r;
  endfunction

  function automatic vec_t vec_add(vec_t a, vec_t b);
    vec_t r;
    for (int i = 0; i < VEC; i++) r[i] = fx_add(a[i], b[i]);
    return r;
  endfunction

endpackage

// hyscale_pkg -- types and arithmetic shared by the GNN training kernel.
//
// The kernel moves vertex features as "beats": VEC consecutive elements of a
// feature vector, one beat per cycle, which matches a 512-bit memory word.
// An element is a signed fixed-point number with FRAC_W fraction bits. The
// published kernel computes in single-precision floating point; fixed point
// is this implementation's choice, made so that every result is exact and can
// be checked bit for bit.
//
// Shared here:
//   elem_t / vec_t   one element and one beat of VEC elements
//   edge_t           one edge of a sampled mini-batch layer, as it enters the
//                    aggregate kernel (sorted by source vertex)
//   layer_cfg_t      per-layer configuration of the kernel
//   fx_mul           fixed-point multiply (floor of the exact product)
package hyscale_pkg;

  parameter int DATA_W = 32;   // element width
  parameter int FRAC_W = 16;   // fraction bits of an element (Q15.16)
  parameter int VEC    = 16;   // elements per beat (512-bit memory word)
  parameter int VID_W  = 24;   // width of a vertex id
  parameter int BEAT_W = 8;    // width of a beat index within a feature row

  typedef logic signed [DATA_W-1:0] elem_t;
  typedef elem_t [VEC-1:0]          vec_t;

  // One edge (src -> dst). weight is the per-edge coefficient the host
  // computes with the mini-batch: 1/sqrt(D(v)D(u)) for GCN, 1/|N(v)| for the
  // mean of GraphSAGE, 1.0 for the self term of GraphSAGE. slot selects which
  // half of the aggregated row the edge adds into: 0 the neighbour part,
  // 1 the part GraphSAGE concatenates (the vertex's own feature).
  typedef struct packed {
    logic [VID_W-1:0] src;
    logic [VID_W-1:0] dst;
    elem_t            weight;
    logic             slot;
    logic             last;   // last edge of this layer
  } edge_t;

  // Configuration of one GNN layer.
  typedef struct packed {
    logic [BEAT_W-1:0] in_beats;   // beats of a source feature, f^(l-1)/VEC rounded up
    logic              concat;     // GraphSAGE: aggregated row is [mean || self], 2*in_beats
    logic [VID_W-1:0]  num_dst;    // destination vertices of this layer
    logic [BEAT_W-1:0] out_tiles;  // output columns / COLS of the update array, rounded up
    logic              relu;       // apply ReLU after the bias
  } layer_cfg_t;

  // A scatter PE's output: one scaled beat on its way to the gather PE that
  // owns destination `dst`. `beat` is the beat index in the aggregated row.
  typedef struct packed {
    logic [VID_W-1:0]  dst;
    logic [BEAT_W-1:0] beat;
    vec_t              data;
  } msg_t;

  function automatic elem_t fx_mul(elem_t a, elem_t b);
    logic signed [2*DATA_W-1:0] p;
    p = a * b;
    return p[FRAC_W +: DATA_W];
  endfunction

  function automatic vec_t vec_scale(vec_t v, elem_t w);
    vec_t r;
    for (int i = 0; i < VEC; i++) r[i] = fx_mul(v[i], w);
    return r;
  endfunction

  function automatic vec_t vec_add(vec_t a, vec_t b);
    vec_t r;
    for (int i = 0; i < VEC; i++) r[i] = a[i] + b[i];
    return r;
  endfunction

endpackage

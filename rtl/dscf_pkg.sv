// dscf_pkg -- constants and types shared by the Fast-DSCF polar decoder.
//
// The decoder is configured here for the decoding order omega = 2 design
// point: 6-bit channel LLRs, 7-bit internal LLRs with two fractional bits and
// a 7-bit decision metric. These are the quantisation widths reported for the
// omega > 1 decoders; the omega = 1 design point uses 5/6/5 bits with one
// fractional bit. Editing OMEGA selects the matching widths (the attempt
// budget, sorter length and SPC size limit are parameters of the top level).
// They live in the package because the sorting element type depends on them.
//
// A sorting element (lambda) carries the flip order w, the (normalised)
// metric M and the flip set E_w. Each flip entry names a decoded node by its
// position in the decoding order (9 bits) and up to two indices inside that
// node (6 bits each): Rate-1 nodes use idx1, SPC nodes use idx1 and idx2 and
// Rep nodes use neither. The 9- and 6-bit field widths follow the sorter size
// example of the paper; the element layout itself is this design's choice.
package dscf_pkg;

  // ---- decoder configuration (omega = 2 design point) -------------------
  localparam int OMEGA  = 2;   // maximum number of flips per attempt
  localparam int QC     = (OMEGA == 1) ? 5 : 6;   // channel LLR bits
  localparam int QI     = QC + 1;                 // internal LLR bits
  localparam int QM     = (OMEGA == 1) ? 5 : 7;   // metric bits
  localparam int FRAC   = (OMEGA == 1) ? 1 : 2;   // fractional LLR bits
  localparam int CRC_W  = 16;  // CRC length C
  localparam logic [CRC_W-1:0] CRC_POLY = 16'h1021;

  // constant approximation f*(x) = 3/2 if |x| <= 5, else 0, in LLR units
  localparam int FSTAR_VAL = (3 << FRAC) / 2;
  localparam int FSTAR_THR = 5 << FRAC;

  localparam int NODE_W = 9;   // decoded-node identifier
  localparam int IDX_W  = 6;   // index inside a node (node size <= 64)
  localparam int ORD_W  = 2;   // flip order field

  localparam int LLR_MAX = (1 << (QI - 1)) - 1;   // symmetric saturation
  localparam int MET_MAX = (1 << QM) - 1;

  typedef logic signed [QI-1:0] llr_t;
  typedef logic        [QM-1:0] metric_t;

  typedef enum logic [2:0] {
    NT_GEN  = 3'd0,   // generic node: traverse its children
    NT_R0   = 3'd1,   // all frozen
    NT_R1   = 3'd2,   // no frozen bit
    NT_REP  = 3'd3,   // only the last bit is information
    NT_SPC  = 3'd4    // only the first bit is frozen
  } node_type_t;

  typedef struct packed {
    logic [NODE_W-1:0] node;
    logic [IDX_W-1:0]  idx1;
    logic [IDX_W-1:0]  idx2;
  } flip_t;

  typedef struct packed {
    logic                   valid;
    logic [ORD_W-1:0]       order;
    metric_t                metric;
    flip_t [OMEGA-1:0]      flips;   // entry e valid when e < order
  } elem_t;

  // Saturate a wide signed value to the internal LLR range.
  function automatic llr_t sat_llr(input logic signed [QI+1:0] v);
    if (v > $signed((QI+2)'(LLR_MAX)))       return llr_t'(LLR_MAX);
    else if (v < -$signed((QI+2)'(LLR_MAX))) return llr_t'(-LLR_MAX);
    else                   return llr_t'(v);
  endfunction

  // Saturate a non-negative wide value to the metric range.
  function automatic metric_t sat_met(input logic [QM+8:0] v);
    return (v > (QM+9)'(MET_MAX)) ? metric_t'(MET_MAX) : metric_t'(v);
  endfunction

  function automatic logic [QI-1:0] abs_llr(input llr_t v);
    return v[QI-1] ? QI'(-v) : QI'(v);
  endfunction

  // f*(x) of the constant approximation, x a non-negative magnitude
  function automatic logic [3:0] fstar(input logic [QI+8:0] x);
    return (x <= (QI+9)'(FSTAR_THR)) ? 4'(FSTAR_VAL) : 4'd0;
  endfunction

  // First LLR-memory row of stage s: stages 0..n-1 hold one node each
  // (max(1, 2^s/PE) rows), the channel (stage n) follows them.
  function automatic int row_base(input int s, input int lpe);
    int b;
    b = 0;
    for (int t = 0; t < 16; t++)
      if (t < s) b += (t >= lpe) ? (1 << (t - lpe)) : 1;
    return b;
  endfunction

  function automatic int llr_rows(input int n, input int lpe);
    return row_base(n, lpe) + ((n >= lpe) ? (1 << (n - lpe)) : 1);
  endfunction

endpackage

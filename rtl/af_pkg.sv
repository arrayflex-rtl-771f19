// af_pkg -- shared types and constants of the ArrayFlex systolic array.
//
// ArrayFlex is a weight-stationary systolic array whose pipeline depth can be
// collapsed at run time: in mode k, every k adjacent PEs of a row share one
// horizontal pipeline stage and every k adjacent PEs of a column share one
// vertical pipeline stage. The supported modes are k = 1 (normal), 2 and 4
// (shallow), as in the evaluated design. Inputs and weights are 32-bit and
// the column reduction is 64 bits wide, also as in the evaluated design.
// The 2-bit mode encoding and the helper functions are this design's own.
package af_pkg;

  localparam int unsigned DATA_W = 32;  // input feature / weight width
  localparam int unsigned ACC_W  = 64;  // vertical reduction width (full product)

  // Pipeline-collapsing depth. The value of the enum is log2(k).
  typedef enum logic [1:0] {
    MODE_K1 = 2'd0,  // normal pipeline
    MODE_K2 = 2'd1,  // two stages merged
    MODE_K4 = 2'd2   // four stages merged
  } mode_e;

  localparam int unsigned K_MAX = 4;

  // Per-PE configuration, loaded together with the PE's weight.
  // h_reg = 1: the horizontal (east) register is used; 0: it is bypassed.
  // v_reg = 1: the vertical (south) register is used; 0: it is transparent.
  typedef struct packed {
    logic h_reg;
    logic v_reg;
  } pe_cfg_t;

  // k as a number
  function automatic int unsigned mode_k(mode_e m);
    return 32'd1 << m;
  endfunction

  // Is position idx (row or column) the last of its k-group?
  function automatic logic group_end(int unsigned idx, mode_e m);
    return ((idx + 1) & (mode_k(m) - 1)) == 0;
  endfunction

  // Which k-group does position idx belong to (idx / k)?
  function automatic int unsigned group_of(int unsigned idx, mode_e m);
    return idx >> m;
  endfunction

endpackage

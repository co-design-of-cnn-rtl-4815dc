// wmd_pkg: constants, code layouts and shared types of the WMD (weight matrix
// decomposition) shift-and-add CNN accelerator.
//
// The defaults are the hardware parameters of the DS-CNN design point reported
// for the accelerator (P=2, Z=3, E=3, M=4, S_W=4, 8-bit activations).  The grid
// size (8 x 12 PEs), the largest supported decomposition depth (P_MAX=3), the
// accumulator width and the buffer depths are this design's own choices.
//
// Po2 coefficient codes.  A coefficient is 0 or +/-2^-k with k in 0..Z, so it is
// applied to an activation as an arithmetic right shift by k and an optional
// negation.  Two code layouts are used (MSB first):
//   F_0 code   : {nz, neg, sh[SH_W-1:0]}                 (no column index)
//   F_gen code : {neg, sh[SH_W-1:0], idx[IDX_W-1:0]}      (always non-zero)
// The F_0 block needs no index because the first decomposed matrix only has
// non-zeros in its first S_W columns; an F_gen row has a fixed 1 on the
// diagonal plus E-1 coded elements whose column is picked by idx.
package wmd_pkg;

  // ---------------- design-point defaults ----------------
  localparam int unsigned ACT_W_D  = 8;   // activation width
  localparam int unsigned S_W_D    = 4;   // slice width (inputs per PE)
  localparam int unsigned M_D      = 4;   // rows of an F matrix (outputs per PE)
  localparam int unsigned E_D      = 3;   // non-zeros per row of an F_gen matrix
  localparam int unsigned Z_D      = 3;   // largest right shift, shifts 0..Z
  localparam int unsigned P_MAX_D  = 3;   // deepest decomposition supported
  localparam int unsigned PE_X_D   = 8;   // SA columns
  localparam int unsigned PE_Y_D   = 12;  // SA rows
  localparam int unsigned ACC_W_D  = 32;  // output buffer word element width

  // ---------------- width helpers ----------------
  function automatic int unsigned sh_w(int unsigned z);
    return (z < 1) ? 1 : $clog2(z + 1);
  endfunction

  function automatic int unsigned idx_w(int unsigned m);
    return (m < 2) ? 1 : $clog2(m);
  endfunction

  function automatic int unsigned f0_code_w(int unsigned z);
    return 2 + sh_w(z);
  endfunction

  function automatic int unsigned fg_code_w(int unsigned z, int unsigned m);
    return 1 + sh_w(z) + idx_w(m);
  endfunction

  // Bits of all F-matrix codes held by one PE: one F_0 matrix (M x S_W) and
  // P_MAX-1 F_gen matrices (M rows of E-1 codes each).
  function automatic int unsigned pe_coef_w(int unsigned s_w, int unsigned m, int unsigned e,
                                            int unsigned z, int unsigned p_max);
    return m * s_w * f0_code_w(z) + (p_max - 1) * m * (e - 1) * fg_code_w(z, m);
  endfunction

  // Width of the F_0 block result: S_W terms of at most 2^(ACT_W-1) magnitude.
  function automatic int unsigned f0_out_w(int unsigned act_w, int unsigned s_w);
    return act_w + $clog2(s_w) + 1;
  endfunction

  // Width carried through the F_gen passes: every pass adds at most E terms of
  // the previous magnitude, i.e. clog2(E) bits.
  function automatic int unsigned f_w(int unsigned act_w, int unsigned s_w, int unsigned e,
                                      int unsigned p_max);
    return f0_out_w(act_w, s_w) + (p_max - 1) * $clog2(e);
  endfunction

  // ---------------- layer configuration ----------------
  // One convolution layer as mapped on the array.  Input feature map word
  // address = cin_t*in_h*in_w + iy*in_w + ix, output word address =
  // cout_t*out_h*out_w + oy*out_w + ox, weight-set address (in PE-row words) =
  // w_base + PE_Y*(((cout_t*k + ky)*k + kx)*cin_tiles + cin_t).
  typedef struct packed {
    logic [3:0]  p;           // decomposition depth of this layer (2..P_MAX)
    logic [3:0]  k;           // kernel size K (K x K)
    logic [1:0]  stride;      // 1..3
    logic [1:0]  pad;         // zero padding on each side
    logic [9:0]  in_h;
    logic [9:0]  in_w;
    logic [9:0]  out_h;
    logic [9:0]  out_w;
    logic [7:0]  cin_tiles;   // ceil(C_in  / (S_W * PE_X))
    logic [7:0]  cout_tiles;  // ceil(C_out / (M * PE_Y))
    logic [15:0] w_base;
  } layer_cfg_t;

  typedef enum logic [2:0] {
    ST_IDLE,
    ST_LOAD,     // F-matrix codes: one PE row per cycle
    ST_STREAM,   // one input vector every Lat_F = P-1 cycles
    ST_DRAIN,    // wait for the array to empty before the next weight load
    ST_DONE
  } ctrl_state_t;

endpackage

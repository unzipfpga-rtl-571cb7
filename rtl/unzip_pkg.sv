// unzip_pkg: types, constants and helper functions shared by the on-the-fly
// weights generator and the CNN engine.
//
// Arithmetic follows the 16-bit fixed-point precision of the evaluated
// designs (WL = 16). Products and partial sums are kept at ACC_W = 32 bits;
// that width is this design's choice. Basis vectors are binary: a bit of 1
// stands for +1 and a bit of 0 for -1.
//
// ovsf_code() returns OVSF codes in code-tree order: the code at index 2i of
// length 2L is {C_L[i], C_L[i]} and the code at 2i+1 is {C_L[i], -C_L[i]}.
// Element b of code idx of length 2^n equals (-1)^popcount(bitrev_n(idx) & b),
// which is what the function evaluates. Element 0 sits in bit 0.
package unzip_pkg;

  localparam int unsigned WL    = 16;   // activation / weight / alpha wordlength
  localparam int unsigned ACC_W = 32;   // product and partial-sum width
  localparam int unsigned CW    = 16;   // width of loop counts in the layer descriptor

  typedef logic signed [WL-1:0]    word_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  // Per-layer configuration written by the host before a layer starts.
  // n_rt/n_ct/n_pt: number of row, column and P tiles (ceil(R/T_R), ceil(C/T_C),
  // ceil(P/T_P)); rows_last/cols_last: valid rows/columns of the last row/column
  // tile; nb: basis vectors per filter (floor(rho*K^2)); ksq_sel: index of the
  // layer's K^2 in the generator's list of supported filter sizes.
  typedef struct packed {
    logic [3:0]    ksq_sel;
    logic [CW-1:0] nb;
    logic [CW-1:0] n_rt;
    logic [CW-1:0] n_ct;
    logic [CW-1:0] n_pt;
    logic [CW-1:0] rows_last;
    logic [CW-1:0] cols_last;
    logic [31:0]   alpha_base;
    logic          bal_en;      // enable input-selective (work-stealing) PEs
    logic [4:0]    out_shift;   // arithmetic right shift applied on output read
  } layer_cfg_t;

  function automatic int unsigned clog2_min1(input int unsigned v);
    return (v <= 1) ? 1 : $clog2(v);
  endfunction

  // Element b of the OVSF code with index idx and length ksq (a power of two).
  function automatic logic ovsf_bit(input int unsigned ksq, input int unsigned idx,
                                    input int unsigned b);
    int unsigned n, rev, ones;
    n   = (ksq <= 1) ? 0 : $clog2(ksq);
    rev = 0;
    for (int unsigned i = 0; i < n; i++)
      if (idx[i]) rev = rev | (1 << (n - 1 - i));
    ones = 0;
    for (int unsigned i = 0; i < n; i++)
      if (rev[i] && b[i]) ones++;
    return (ones % 2 == 0);
  endfunction

endpackage

// nc_pkg -- shared types, default sizes and width helpers of the neural-checksum batch.
//
// The batch protects a group of N_PE in-memory-computing processing elements (PEs) with two
// checksum codes: a "crossbar checksum" column inside every PE and a redundant "PE checksum"
// crossbar shared by the batch, plus a parity column on the PE checksum. This package holds
// what the modules of the batch share: the default sizes, the width formulas, the enum that
// selects which array a programming write goes to, the states of the error detection and
// correction routine and the correction modes.
//
// Numbers that follow the paper: 12 PEs per batch and 3 protected weight bits (the
// configuration the paper singles out), 4-bit signed weights, 8-bit signed activations.
// The crossbar size (64 rows x 16 weight columns), the crossbar latency and the retry limits
// are this design's own choices; the paper does not give them.
package nc_pkg;

  // Sizes (defaults of the batch)
  localparam int unsigned N_PE_DEF      = 12; // PEs per batch (paper: 12-PE configuration)
  localparam int unsigned PROT_BITS_DEF = 3;  // protected weight bit planes (paper: 3 bits)
  localparam int unsigned WBITS_DEF     = 4;  // weight precision, signed (paper: 4 bit)
  localparam int unsigned IN_W_DEF      = 8;  // activation precision, signed (paper: 8 bit)
  localparam int unsigned ROWS_DEF      = 64; // crossbar rows (assumed)
  localparam int unsigned COLS_DEF      = 16; // weight columns per crossbar (assumed)
  localparam int unsigned LAT_DEF       = 1;  // cycles from compute request to ADC result (assumed)
  localparam int unsigned MAX_CONSEC_DEF = 2; // consecutive MAC recomputations before a checksum recomputation (assumed)
  localparam int unsigned MAX_ROUNDS_DEF = 16;// recomputation rounds before giving up (assumed)

  // Width of every column result, sum and difference in the batch: large enough for the sum
  // over all PEs and columns of a full-scale MAC.
  function automatic int unsigned calc_dw(int unsigned rows, int unsigned cols,
                                          int unsigned npe, int unsigned in_w,
                                          int unsigned wbits);
    return in_w + wbits + $clog2(rows) + $clog2(npe) + $clog2(cols) + 2;
  endfunction

  // Width of a checksum cell: a sum of up to max(N_PE, COLS) signed weights.
  function automatic int unsigned calc_chk_w(int unsigned npe, int unsigned cols,
                                             int unsigned wbits);
    return wbits + $clog2((npe > cols) ? npe : cols) + 1;
  endfunction

  // Target of a programming (weight write) operation
  typedef enum logic [1:0] {
    TGT_WEIGHT = 2'd0,  // row of 4-bit weights of one PE's crossbar
    TGT_XCHK   = 2'd1,  // row cell of one PE's crossbar checksum column
    TGT_PECHK  = 2'd2,  // row of the PE checksum crossbar
    TGT_PARITY = 2'd3   // row cell of the parity column of the PE checksum crossbar
  } prog_tgt_e;

  // States of the IEDCR controller
  typedef enum logic [2:0] {
    S_IDLE  = 3'd0,
    S_ISSUE = 3'd1,  // request computations from the crossbars
    S_WAIT  = 3'd2,  // wait for the requested crossbars' results
    S_EVAL  = 3'd3,  // evaluate the syndrome and take the flowchart decision
    S_DONE  = 3'd4   // result register holds the (corrected) outputs
  } iedcr_state_e;

  // How the corrector changes the outputs
  typedef enum logic [1:0] {
    CORR_NONE = 2'd0,  // pass outputs through
    CORR_COL  = 2'd1,  // one faulty column b*: O[n][b*] += Delta(n) for every PE n
    CORR_PE   = 2'd2   // one faulty PE n*:     O[n*][b] += Delta(b) for every column b
  } corr_mode_e;

  // Why the controller issued a checksum recomputation (a stall)
  typedef enum logic [1:0] {
    RECHK_NONE   = 2'd0,
    RECHK_SUM    = 2'd1,  // sum of Delta(b) differs from sum of Delta(n)
    RECHK_PARITY = 2'd2,  // parity column inconsistent with the PE checksum outputs
    RECHK_CONSEC = 2'd3   // limit of consecutive MAC recomputations reached
  } rechk_cause_e;

endpackage

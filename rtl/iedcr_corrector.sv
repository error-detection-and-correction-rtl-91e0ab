// iedcr_corrector -- run-time correction step of the IEDCR: adds the checksum differences to
// the outputs of the faulty crossbar column(s).
//
// Two cases can be corrected (nc_pkg::corr_mode_e):
//   CORR_COL - a single faulty column index b* (only Delta(b*) non-zero), possibly in several
//              PEs: O[n][b*] += Delta(n) for every PE n (Delta(n) of a fault-free PE is 0).
//   CORR_PE  - a single faulty PE n* with several faulty columns:
//              O[n*][b] += Delta(b) for every column b.
//   CORR_NONE passes the outputs through.
// The Deltas come from the protected bit planes, and an error in a protected plane adds to the
// full column result by the same amount, so adding Delta restores the full result.
//
// Purely combinational; the batch registers the result.
module iedcr_corrector #(
  parameter int unsigned N_PE = nc_pkg::N_PE_DEF,
  parameter int unsigned COLS = nc_pkg::COLS_DEF,
  parameter int unsigned DW   = nc_pkg::calc_dw(nc_pkg::ROWS_DEF, nc_pkg::COLS_DEF,
                                  nc_pkg::N_PE_DEF, nc_pkg::IN_W_DEF, nc_pkg::WBITS_DEF)
) (
  input  nc_pkg::corr_mode_e          mode,
  input  logic [$clog2(N_PE)-1:0]     idx_n,
  input  logic [$clog2(COLS)-1:0]     idx_b,
  input  logic signed [DW-1:0]        d_n   [N_PE],
  input  logic signed [DW-1:0]        d_b   [COLS],
  input  logic signed [DW-1:0]        o_col [N_PE][COLS],
  output logic signed [DW-1:0]        o_cor [N_PE][COLS]
);

  always_comb begin
    for (int n = 0; n < N_PE; n++) begin
      for (int b = 0; b < COLS; b++) begin
        o_cor[n][b] = o_col[n][b];
        if (mode == nc_pkg::CORR_COL && b == int'(idx_b))
          o_cor[n][b] = o_col[n][b] + d_n[n];
        else if (mode == nc_pkg::CORR_PE && n == int'(idx_n))
          o_cor[n][b] = o_col[n][b] + d_b[b];
      end
    end
  end

endmodule

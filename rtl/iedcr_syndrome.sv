// iedcr_syndrome -- the arithmetic of the IMC error detection and correction routine (IEDCR):
// differences between checksums and recomputed sums, their totals and where they are non-zero.
//
// For every PE n:     Delta(n) = O^Crossch_n - O^acc_n      (crossbar checksum vs. PE's adder tree)
// For every column b: Delta(b) = O^PEch_b    - O^acc_b,  O^acc_b = sum_n o_prot[n][b]
//                     (PE checksum vs. the same column of all PEs, summed by adder trees)
// Then sum_db = sum_b Delta(b) and sum_dn = sum_n Delta(n). With correct checksums both sums
// equal the total error of the protected outputs, so sums_equal is the routine's test that the
// checksums themselves computed correctly. cnt_b / cnt_n count the non-zero Deltas (the paper's
// "numbers of Delta > 0", read here as non-zero since an error can have either sign), and
// idx_b / idx_n give the lowest index of a non-zero Delta: with a single faulty column or PE,
// its coordinates. any_err is set when any Delta is non-zero.
//
// Purely combinational; the controller samples the outputs in its evaluation state.
module iedcr_syndrome #(
  parameter int unsigned N_PE = nc_pkg::N_PE_DEF,
  parameter int unsigned COLS = nc_pkg::COLS_DEF,
  parameter int unsigned DW   = nc_pkg::calc_dw(nc_pkg::ROWS_DEF, nc_pkg::COLS_DEF,
                                  nc_pkg::N_PE_DEF, nc_pkg::IN_W_DEF, nc_pkg::WBITS_DEF)
) (
  input  logic signed [DW-1:0]          o_prot    [N_PE][COLS],
  input  logic signed [DW-1:0]          o_acc     [N_PE],
  input  logic signed [DW-1:0]          o_crossch [N_PE],
  input  logic signed [DW-1:0]          o_pech    [COLS],
  output logic signed [DW-1:0]          d_n       [N_PE],
  output logic signed [DW-1:0]          d_b       [COLS],
  output logic signed [DW-1:0]          sum_dn,
  output logic signed [DW-1:0]          sum_db,
  output logic                          sums_equal,
  output logic                          any_err,
  output logic [$clog2(N_PE+1)-1:0]     cnt_n,
  output logic [$clog2(COLS+1)-1:0]     cnt_b,
  output logic [$clog2(N_PE)-1:0]       idx_n,
  output logic [$clog2(COLS)-1:0]       idx_b
);

  // column sums over the PEs of the batch
  logic signed [DW-1:0] acc_b [COLS];
  for (genvar b = 0; b < COLS; b++) begin : g_col
    logic signed [DW-1:0] col_vals [N_PE];
    for (genvar n = 0; n < N_PE; n++) begin : g_pe
      assign col_vals[n] = o_prot[n][b];
    end
    adder_tree #(.N(N_PE), .W(DW)) u_colsum (.in(col_vals), .sum(acc_b[b]));
    assign d_b[b] = o_pech[b] - acc_b[b];
  end

  for (genvar n = 0; n < N_PE; n++) begin : g_dn
    assign d_n[n] = o_crossch[n] - o_acc[n];
  end

  adder_tree #(.N(N_PE), .W(DW)) u_sum_dn (.in(d_n), .sum(sum_dn));
  adder_tree #(.N(COLS), .W(DW)) u_sum_db (.in(d_b), .sum(sum_db));

  assign sums_equal = (sum_dn == sum_db);

  always_comb begin
    cnt_n = '0;
    idx_n = '0;
    for (int n = N_PE - 1; n >= 0; n--) begin
      if (d_n[n] != '0) begin
        cnt_n = cnt_n + 1'b1;
        idx_n = $clog2(N_PE)'(n);
      end
    end
    cnt_b = '0;
    idx_b = '0;
    for (int b = COLS - 1; b >= 0; b--) begin
      if (d_b[b] != '0) begin
        cnt_b = cnt_b + 1'b1;
        idx_b = $clog2(COLS)'(b);
      end
    end
  end

  assign any_err = (cnt_n != '0) || (cnt_b != '0);

endmodule

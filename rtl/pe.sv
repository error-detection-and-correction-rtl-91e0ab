// pe -- one processing element (PE) of the batch: a bit-sliced weight crossbar, the digital
// recombination of its bit planes, the crossbar checksum column and the PE's adder tree.
//
// Weights are COLS columns of WBITS-bit two's-complement numbers. Each weight column b is
// stored as WBITS binary-cell columns, one per bit plane p (physical column b*WBITS + p); a
// plane's column returns P[b][p] = sum_k In_k * bit_p(w[k][b]). The digital side rebuilds
//   o_col[b]  = sum_p s_p 2^p P[b][p]            (s_p = -1 for the sign plane, +1 otherwise)
//   o_prot[b] = the same sum over the PROT_BITS most significant planes only.
// Only the protected planes are covered by the checksums; errors in the other planes pass
// unnoticed, which is how the design trades checksum area for accuracy.
//
// Crossbar checksum: a redundant column driven by the same row inputs stores, in row k, the
// sum over the PE's columns of the protected part of the weights, W^Crossch[k]. Its MAC
// o_crossch should therefore equal o_acc = sum_b o_prot[b], which the adder tree computes.
// A difference means a fault in the PE's crossbar or in the checksum column.
//
// Interface and timing: w_wr_* program one row of logical weights (split into bit planes here);
// c_wr_* program one cell of the checksum column. mac_go starts the weight crossbar, chk_go the
// checksum column, independently, so the controller can repeat either one alone. Both sample
// in_vec at the go edge; mac_valid / chk_valid pulse LAT cycles later. o_col, o_prot and o_acc
// follow the weight crossbar's registered results (combinational recombination), o_crossch the
// checksum column's. fi_main (per physical column) and fi_xchk add soft-fault errors.
//
// Following the paper: redundant checksum columns inside each PE sharing the crossbar's inputs,
// a digital adder tree over the column results, protection of the most significant weight
// bits. This design's own choices: bit-plane order inside a weight column, sign handling of the
// MSB plane, one multi-valued cell per row for the checksum column.
module pe #(
  parameter int unsigned ROWS      = nc_pkg::ROWS_DEF,
  parameter int unsigned COLS      = nc_pkg::COLS_DEF,
  parameter int unsigned IN_W      = nc_pkg::IN_W_DEF,
  parameter int unsigned WBITS     = nc_pkg::WBITS_DEF,
  parameter int unsigned PROT_BITS = nc_pkg::PROT_BITS_DEF,
  parameter int unsigned CHK_W     = nc_pkg::calc_chk_w(nc_pkg::N_PE_DEF, nc_pkg::COLS_DEF,
                                                        nc_pkg::WBITS_DEF),
  parameter int unsigned DW        = nc_pkg::calc_dw(nc_pkg::ROWS_DEF, nc_pkg::COLS_DEF,
                                       nc_pkg::N_PE_DEF, nc_pkg::IN_W_DEF, nc_pkg::WBITS_DEF),
  parameter int unsigned LAT       = nc_pkg::LAT_DEF
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // programming
  input  logic                         w_wr_en,
  input  logic [$clog2(ROWS)-1:0]      w_wr_row,
  input  logic signed [WBITS-1:0]      w_wr_data [COLS],
  input  logic                         c_wr_en,
  input  logic [$clog2(ROWS)-1:0]      c_wr_row,
  input  logic signed [CHK_W-1:0]      c_wr_data,
  // computation
  input  logic                         mac_go,
  input  logic                         chk_go,
  input  logic signed [IN_W-1:0]       in_vec  [ROWS],
  input  logic signed [DW-1:0]         fi_main [COLS*WBITS],
  input  logic signed [DW-1:0]         fi_xchk,
  output logic                         mac_valid,
  output logic                         chk_valid,
  output logic signed [DW-1:0]         o_col   [COLS],
  output logic signed [DW-1:0]         o_prot  [COLS],
  output logic signed [DW-1:0]         o_acc,
  output logic signed [DW-1:0]         o_crossch
);

  localparam int unsigned PCOLS = COLS * WBITS;

  // ---- weight crossbar, one binary cell per weight bit ----
  logic [0:0]           plane_wr [PCOLS];
  logic signed [DW-1:0] plane_out [PCOLS];

  for (genvar b = 0; b < COLS; b++) begin : g_split
    for (genvar p = 0; p < WBITS; p++) begin : g_bit
      assign plane_wr[b*WBITS+p] = w_wr_data[b][p];
    end
  end

  imc_crossbar #(
    .ROWS(ROWS), .COLS(PCOLS), .IN_W(IN_W), .CELL_W(1), .CELL_SIGNED(1'b0),
    .DW(DW), .LAT(LAT)
  ) u_xbar (
    .clk, .rst_n,
    .wr_en(w_wr_en), .wr_row(w_wr_row), .wr_data(plane_wr),
    .go(mac_go), .in_vec, .fi(fi_main),
    .valid(mac_valid), .col_out(plane_out)
  );

  // ---- shift-and-add recombination of the bit planes ----
  always_comb begin
    for (int b = 0; b < COLS; b++) begin
      o_col[b]  = '0;
      o_prot[b] = '0;
      for (int p = 0; p < WBITS; p++) begin
        logic signed [DW-1:0] term;
        term = plane_out[b*WBITS+p] <<< p;
        if (p == WBITS-1) term = -term;           // two's-complement sign plane
        o_col[b] = o_col[b] + term;
        if (p >= WBITS - PROT_BITS) o_prot[b] = o_prot[b] + term;
      end
    end
  end

  // ---- adder tree over the protected column results ----
  adder_tree #(.N(COLS), .W(DW)) u_acc (.in(o_prot), .sum(o_acc));

  // ---- crossbar checksum column ----
  logic [CHK_W-1:0]     xchk_wr [1];
  logic signed [DW-1:0] xchk_fi [1];
  logic signed [DW-1:0] xchk_out [1];

  assign xchk_wr[0] = c_wr_data;
  assign xchk_fi[0] = fi_xchk;

  imc_crossbar #(
    .ROWS(ROWS), .COLS(1), .IN_W(IN_W), .CELL_W(CHK_W), .CELL_SIGNED(1'b1),
    .DW(DW), .LAT(LAT)
  ) u_xchk (
    .clk, .rst_n,
    .wr_en(c_wr_en), .wr_row(c_wr_row), .wr_data(xchk_wr),
    .go(chk_go), .in_vec, .fi(xchk_fi),
    .valid(chk_valid), .col_out(xchk_out)
  );

  assign o_crossch = xchk_out[0];

endmodule

// pe_checksum -- the redundant "PE checksum" crossbar of a batch and its parity column.
//
// Column b of this crossbar stores, in row k, the sum over the batch's PEs of the protected
// part of weight w[n][k][b]: W^PEch[k][b] = sum_n wprot[n][k][b]. Driven by the same row inputs
// as the PEs, it returns o_pech[b] = sum_n o_prot[n][b] when nothing is faulty; the
// syndrome unit compares the two. The PE checksum has no checksum of its own; instead a parity
// column stores, in row k, (sum_b W^PEch[k][b]) mod 2. Since sum_b W^PEch[k][b] and its parity
// differ by an even number, sum_k In_k * that difference is even, so
//     parity_ok = LSB(sum_b o_pech[b]) == LSB(o_par)
// (the LSB of the sum is formed as the XOR of the columns' LSBs)
// holds for a fault-free computation; an odd error in one PE checksum column or in the parity
// column breaks it.
//
// Interface and timing: wr_* program one row of checksum cells, par_wr_* one parity cell.
// chk_go starts both arrays at once (they are one redundant PE); chk_valid pulses LAT cycles
// later. o_pech, o_par and parity_ok then hold until the next chk_go. fi_pech / fi_par add
// soft-fault errors to the columns.
//
// Following the paper: the redundant PE storing per-column sums of weights over the PEs of the
// batch and a parity column on it. This design's reading of the figure: the parity cell of row
// k is the parity of that row's sum of checksum weights, checked against the LSB of the sum of
// the checksum outputs.
module pe_checksum #(
  parameter int unsigned ROWS  = nc_pkg::ROWS_DEF,
  parameter int unsigned COLS  = nc_pkg::COLS_DEF,
  parameter int unsigned IN_W  = nc_pkg::IN_W_DEF,
  parameter int unsigned CHK_W = nc_pkg::calc_chk_w(nc_pkg::N_PE_DEF, nc_pkg::COLS_DEF,
                                                    nc_pkg::WBITS_DEF),
  parameter int unsigned DW    = nc_pkg::calc_dw(nc_pkg::ROWS_DEF, nc_pkg::COLS_DEF,
                                   nc_pkg::N_PE_DEF, nc_pkg::IN_W_DEF, nc_pkg::WBITS_DEF),
  parameter int unsigned LAT   = nc_pkg::LAT_DEF
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // programming
  input  logic                         wr_en,
  input  logic [$clog2(ROWS)-1:0]      wr_row,
  input  logic signed [CHK_W-1:0]      wr_data [COLS],
  input  logic                         par_wr_en,
  input  logic [$clog2(ROWS)-1:0]      par_wr_row,
  input  logic                         par_wr_data,
  // computation
  input  logic                         chk_go,
  input  logic signed [IN_W-1:0]       in_vec  [ROWS],
  input  logic signed [DW-1:0]         fi_pech [COLS],
  input  logic signed [DW-1:0]         fi_par,
  output logic                         chk_valid,
  output logic signed [DW-1:0]         o_pech  [COLS],
  output logic signed [DW-1:0]         o_par,
  output logic                         parity_ok
);

  logic [CHK_W-1:0] cs_wr [COLS];
  for (genvar b = 0; b < COLS; b++) begin : g_wr
    assign cs_wr[b] = wr_data[b];
  end

  imc_crossbar #(
    .ROWS(ROWS), .COLS(COLS), .IN_W(IN_W), .CELL_W(CHK_W), .CELL_SIGNED(1'b1),
    .DW(DW), .LAT(LAT)
  ) u_pech (
    .clk, .rst_n,
    .wr_en, .wr_row, .wr_data(cs_wr),
    .go(chk_go), .in_vec, .fi(fi_pech),
    .valid(chk_valid), .col_out(o_pech)
  );

  // parity column
  logic [0:0]           par_wr [1];
  logic signed [DW-1:0] par_fi [1];
  logic signed [DW-1:0] par_out [1];
  logic                 par_valid;

  assign par_wr[0] = par_wr_data;
  assign par_fi[0] = fi_par;

  imc_crossbar #(
    .ROWS(ROWS), .COLS(1), .IN_W(IN_W), .CELL_W(1), .CELL_SIGNED(1'b0),
    .DW(DW), .LAT(LAT)
  ) u_par (
    .clk, .rst_n,
    .wr_en(par_wr_en), .wr_row(par_wr_row), .wr_data(par_wr),
    .go(chk_go), .in_vec, .fi(par_fi),
    .valid(par_valid), .col_out(par_out)
  );

  assign o_par = par_out[0];

  // parity check: the LSB of a sum is the XOR of the addends' LSBs
  logic pech_sum_lsb;
  always_comb begin
    pech_sum_lsb = 1'b0;
    for (int b = 0; b < COLS; b++) pech_sum_lsb ^= o_pech[b][0];
  end

  assign parity_ok = (pech_sum_lsb == o_par[0]);

  // both arrays are started together, so their results arrive together
  a_in_step: assert property (@(posedge clk) disable iff (!rst_n) par_valid == chk_valid)
    else $error("pe_checksum: parity column and checksum columns out of step");

endmodule

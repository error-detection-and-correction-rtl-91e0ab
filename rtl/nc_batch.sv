// nc_batch -- one batch of in-memory-computing PEs protected by neural checksums: N_PE PEs,
// each with its crossbar checksum column, one redundant PE-checksum crossbar with a parity
// column, and the IEDCR (detection and correction routine) that checks and repairs their
// outputs at run time.
//
// Data flow: an input vector of ROWS activations is latched at `start` and drives every
// crossbar of the batch (the PEs of a batch share their inputs). Each PE returns COLS column
// results o_col[n][b] and its crossbar-checksum difference data; the PE checksum returns one
// result per column. The syndrome unit forms Delta(n) per PE and Delta(b) per column, the
// controller decides (release, correct, recompute checksums, recompute MAC) as in the
// routine's flowchart, and the corrector adds the Deltas to the faulty outputs. `out` is the
// result register, loaded when the routine finishes; `done` pulses one cycle later.
//
// Interface:
//   programming - prog_en writes one row prog_row of the array chosen by prog_tgt:
//     TGT_WEIGHT: PE prog_pe, weights prog_data[b][WBITS-1:0] (two's complement) per column b;
//     TGT_XCHK:   PE prog_pe, crossbar-checksum cell prog_data[0];
//     TGT_PECHK:  PE-checksum cells prog_data[b];
//     TGT_PARITY: parity cell prog_data[0][0].
//     The checksum cells are computed off line from the weights (see the PE modules).
//   inference - start with in_vec; busy while running; done with out[n][b] and the status.
//   fault injection - fi_* are added to the respective crossbar columns at every computation;
//     they stand for the soft faults of the analog arrays and are zero in normal use.
// Timing: (LAT + 2) * (1 + recomputations) cycles from the start edge to done.
//
// Following the paper: batch of PEs with two independent checksum codes, parity column, the
// routine's decisions and corrections, recomputation of checksums or of the MAC outputs, the
// extra checksum recomputation after a number of consecutive stalls. This design's own choices:
// crossbar size, latency, retry limits, programming port and status outputs.
module nc_batch #(
  parameter int unsigned N_PE       = nc_pkg::N_PE_DEF,
  parameter int unsigned ROWS       = nc_pkg::ROWS_DEF,
  parameter int unsigned COLS       = nc_pkg::COLS_DEF,
  parameter int unsigned IN_W       = nc_pkg::IN_W_DEF,
  parameter int unsigned WBITS      = nc_pkg::WBITS_DEF,
  parameter int unsigned PROT_BITS  = nc_pkg::PROT_BITS_DEF,
  parameter int unsigned LAT        = nc_pkg::LAT_DEF,
  parameter int unsigned MAX_CONSEC = nc_pkg::MAX_CONSEC_DEF,
  parameter int unsigned MAX_ROUNDS = nc_pkg::MAX_ROUNDS_DEF,
  parameter int unsigned CHK_W      = nc_pkg::calc_chk_w(N_PE, COLS, WBITS),
  parameter int unsigned DW         = nc_pkg::calc_dw(ROWS, COLS, N_PE, IN_W, WBITS),
  parameter int unsigned CNT_W      = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // programming
  input  logic                          prog_en,
  input  nc_pkg::prog_tgt_e             prog_tgt,
  input  logic [$clog2(N_PE)-1:0]       prog_pe,
  input  logic [$clog2(ROWS)-1:0]       prog_row,
  input  logic signed [CHK_W-1:0]       prog_data [COLS],
  // inference
  input  logic                          start,
  input  logic signed [IN_W-1:0]        in_vec [ROWS],
  output logic                          busy,
  output logic                          done,
  output logic signed [DW-1:0]          out [N_PE][COLS],
  // status of the last inference
  output logic                          err_detected,
  output logic                          corrected,
  output logic                          uncorrectable,
  output nc_pkg::corr_mode_e            corr_mode_q,
  output logic [CNT_W-1:0]              rounds,
  output logic [CNT_W-1:0]              n_mac_recomp,
  output logic [CNT_W-1:0]              n_rechk_sum,
  output logic [CNT_W-1:0]              n_rechk_par,
  output logic [CNT_W-1:0]              n_rechk_consec,
  // soft-fault injection into the analog arrays
  input  logic signed [DW-1:0]          fi_main [N_PE][COLS*WBITS],
  input  logic signed [DW-1:0]          fi_xchk [N_PE],
  input  logic signed [DW-1:0]          fi_pech [COLS],
  input  logic signed [DW-1:0]          fi_par
);
  import nc_pkg::*;

  // ---- control ----
  logic load_in, mac_go, chk_go, out_load;
  logic mac_valid_all, chk_valid_all;
  logic any_err, sums_equal, parity_ok;
  corr_mode_e corr_mode;

  logic signed [IN_W-1:0] in_q [ROWS];
  always_ff @(posedge clk) begin
    if (load_in) in_q <= in_vec;
  end

  // ---- PEs ----
  logic                 pe_mac_valid [N_PE];
  logic                 pe_chk_valid [N_PE];
  logic signed [DW-1:0] o_col     [N_PE][COLS];
  logic signed [DW-1:0] o_prot    [N_PE][COLS];
  logic signed [DW-1:0] o_acc     [N_PE];
  logic signed [DW-1:0] o_crossch [N_PE];
  logic signed [WBITS-1:0] w_row  [COLS];

  for (genvar b = 0; b < COLS; b++) begin : g_wrow
    assign w_row[b] = prog_data[b][WBITS-1:0];
  end

  for (genvar n = 0; n < N_PE; n++) begin : g_pe
    pe #(
      .ROWS(ROWS), .COLS(COLS), .IN_W(IN_W), .WBITS(WBITS), .PROT_BITS(PROT_BITS),
      .CHK_W(CHK_W), .DW(DW), .LAT(LAT)
    ) u_pe (
      .clk, .rst_n,
      .w_wr_en  (prog_en && prog_tgt == TGT_WEIGHT && prog_pe == n),
      .w_wr_row (prog_row),
      .w_wr_data(w_row),
      .c_wr_en  (prog_en && prog_tgt == TGT_XCHK && prog_pe == n),
      .c_wr_row (prog_row),
      .c_wr_data(prog_data[0]),
      .mac_go, .chk_go,
      .in_vec   (in_q),
      .fi_main  (fi_main[n]),
      .fi_xchk  (fi_xchk[n]),
      .mac_valid(pe_mac_valid[n]),
      .chk_valid(pe_chk_valid[n]),
      .o_col    (o_col[n]),
      .o_prot   (o_prot[n]),
      .o_acc    (o_acc[n]),
      .o_crossch(o_crossch[n])
    );
  end

  // ---- PE checksum with parity column ----
  logic                 pech_valid;
  logic signed [DW-1:0] o_pech [COLS];
  logic signed [DW-1:0] o_par;

  pe_checksum #(
    .ROWS(ROWS), .COLS(COLS), .IN_W(IN_W), .CHK_W(CHK_W), .DW(DW), .LAT(LAT)
  ) u_pech (
    .clk, .rst_n,
    .wr_en      (prog_en && prog_tgt == TGT_PECHK),
    .wr_row     (prog_row),
    .wr_data    (prog_data),
    .par_wr_en  (prog_en && prog_tgt == TGT_PARITY),
    .par_wr_row (prog_row),
    .par_wr_data(prog_data[0][0]),
    .chk_go,
    .in_vec     (in_q),
    .fi_pech, .fi_par,
    .chk_valid  (pech_valid),
    .o_pech, .o_par, .parity_ok
  );

  always_comb begin
    mac_valid_all = 1'b1;
    chk_valid_all = pech_valid;
    for (int n = 0; n < N_PE; n++) begin
      mac_valid_all &= pe_mac_valid[n];
      chk_valid_all &= pe_chk_valid[n];
    end
  end

  // ---- syndrome ----
  logic signed [DW-1:0]        d_n [N_PE];
  logic signed [DW-1:0]        d_b [COLS];
  logic signed [DW-1:0]        sum_dn, sum_db;
  logic [$clog2(N_PE+1)-1:0]   cnt_n;
  logic [$clog2(COLS+1)-1:0]   cnt_b;
  logic [$clog2(N_PE)-1:0]     idx_n;
  logic [$clog2(COLS)-1:0]     idx_b;

  iedcr_syndrome #(.N_PE(N_PE), .COLS(COLS), .DW(DW)) u_syn (
    .o_prot, .o_acc, .o_crossch, .o_pech,
    .d_n, .d_b, .sum_dn, .sum_db, .sums_equal, .any_err,
    .cnt_n, .cnt_b, .idx_n, .idx_b
  );

  // ---- controller ----
  iedcr_ctrl #(.MAX_CONSEC(MAX_CONSEC), .MAX_ROUNDS(MAX_ROUNDS), .CNT_W(CNT_W)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done,
    .load_in, .mac_go, .chk_go,
    .mac_valid(mac_valid_all), .chk_valid(chk_valid_all),
    .any_err, .sums_equal,
    .single_b(cnt_b == 1), .single_n(cnt_n == 1),
    .parity_ok,
    .corr_mode, .out_load,
    .err_detected, .corrected, .uncorrectable,
    .rounds, .n_mac_recomp, .n_rechk_sum, .n_rechk_par, .n_rechk_consec
  );

  // ---- corrector and result register ----
  logic signed [DW-1:0] o_cor [N_PE][COLS];

  iedcr_corrector #(.N_PE(N_PE), .COLS(COLS), .DW(DW)) u_cor (
    .mode(corr_mode), .idx_n, .idx_b, .d_n, .d_b, .o_col, .o_cor
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      corr_mode_q <= CORR_NONE;
      for (int n = 0; n < N_PE; n++)
        for (int b = 0; b < COLS; b++) out[n][b] <= '0;
    end else if (out_load) begin
      corr_mode_q <= corr_mode;
      out         <= o_cor;
    end
  end

endmodule

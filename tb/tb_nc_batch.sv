// tb_nc_batch -- end-to-end test of the checksum-protected batch at reduced size (4 PEs,
// 8 rows, 4 weight columns of 4-bit weights, 3 protected bit planes).
//
// The testbench draws random weights and activations, computes the checksum cells itself
// (crossbar checksum: row sum of the protected weight part per PE; PE checksum: sum over PEs
// per row and column; parity: parity of the PE-checksum row sum), programs them, and runs
// directed fault scenarios that each exercise one branch of the detection and correction
// routine, followed by random single-fault inferences. Faults are injected per round of the
// routine: the fault inputs are a function of the batch's `rounds` counter, so a fault can be
// transient (gone after a recomputation) or persistent. Each inference is checked for its
// outputs (against a reference MAC), correction mode, status flags, counters, and latency
// (LAT + 2) * (1 + rounds). Every mechanism of the routine must occur at least once.
module tb_nc_batch;
  import nc_pkg::*;
  // ---- sizes ----
  localparam int unsigned N_PE = 4, ROWS = 8, COLS = 4, IN_W = 8, WBITS = 4, PROT = 3,
                          LAT = 1, MAX_CONSEC = 2, MAX_ROUNDS = 6;
  localparam int unsigned N_RANDOM = 40;
  // ---- end of sizes ----
  localparam int unsigned CHK_W = calc_chk_w(N_PE, COLS, WBITS);
  localparam int unsigned DW    = calc_dw(ROWS, COLS, N_PE, IN_W, WBITS);
  localparam int unsigned PC    = COLS * WBITS;
  localparam int unsigned CNT_W = 8;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                      prog_en;
  prog_tgt_e                 prog_tgt;
  logic [$clog2(N_PE)-1:0]   prog_pe;
  logic [$clog2(ROWS)-1:0]   prog_row;
  logic signed [CHK_W-1:0]   prog_data [COLS];
  logic                      start, busy, done;
  logic signed [IN_W-1:0]    in_vec [ROWS];
  logic signed [DW-1:0]      out [N_PE][COLS];
  logic                      err_detected, corrected, uncorrectable;
  corr_mode_e                corr_mode_q;
  logic [CNT_W-1:0]          rounds, n_mac_recomp, n_rechk_sum, n_rechk_par, n_rechk_consec;
  logic signed [DW-1:0]      fi_main [N_PE][PC];
  logic signed [DW-1:0]      fi_xchk [N_PE];
  logic signed [DW-1:0]      fi_pech [COLS];
  logic signed [DW-1:0]      fi_par;

  nc_batch #(.N_PE(N_PE), .ROWS(ROWS), .COLS(COLS), .IN_W(IN_W), .WBITS(WBITS),
             .PROT_BITS(PROT), .LAT(LAT), .MAX_CONSEC(MAX_CONSEC), .MAX_ROUNDS(MAX_ROUNDS))
    dut (.*);

  // ---- fault scenario: faults present while rounds < ka (weight arrays) / kx (checksums) ----
  int fm [N_PE][PC];
  int fx [N_PE];
  int fp [COLS];
  int fpar;
  int ka, kx;

  always_comb begin
    for (int n = 0; n < N_PE; n++) begin
      for (int c = 0; c < PC; c++) fi_main[n][c] = (int'(rounds) < ka) ? DW'(fm[n][c]) : '0;
      fi_xchk[n] = (int'(rounds) < kx) ? DW'(fx[n]) : '0;
    end
    for (int b = 0; b < COLS; b++) fi_pech[b] = (int'(rounds) < kx) ? DW'(fp[b]) : '0;
    fi_par = (int'(rounds) < kx) ? DW'(fpar) : '0;
  end

  task automatic clear_faults();
    foreach (fm[n, c]) fm[n][c] = 0;
    foreach (fx[n]) fx[n] = 0;
    foreach (fp[b]) fp[b] = 0;
    fpar = 0; ka = 0; kx = 0;
  endtask

  // error a fault value e on plane p adds to a column result
  function automatic int plane_err(int e, int p);
    return (p == WBITS - 1) ? -(e <<< p) : (e <<< p);
  endfunction

  // random fault in a protected plane of column b of PE n; the sign is chosen so that the
  // column error is positive and several faults cannot cancel in a Delta
  task automatic rand_fault(int n, int b);
    int p, e;
    p = $urandom_range(WBITS-PROT, WBITS-1);
    e = $urandom_range(1, 6);
    fm[n][b*WBITS + p] = (p == WBITS-1) ? -e : e;
  endtask

  // ---- weights and reference ----
  int w [N_PE][ROWS][COLS];
  int gold [N_PE][COLS];

  function automatic int wprot(int v);
    return (v >>> (WBITS - PROT)) <<< (WBITS - PROT);
  endfunction

  task automatic prog_write(prog_tgt_e tgt, int pe_i, int row);
    @(negedge clk);
    prog_en = 1; prog_tgt = tgt; prog_pe = $clog2(N_PE)'(pe_i); prog_row = $clog2(ROWS)'(row);
    @(negedge clk);
    prog_en = 0;
  endtask

  task automatic program_all();
    for (int n = 0; n < N_PE; n++)
      for (int r = 0; r < ROWS; r++)
        for (int b = 0; b < COLS; b++) w[n][r][b] = $urandom_range(0, (1 << WBITS) - 1) - (1 << (WBITS-1));
    for (int r = 0; r < ROWS; r++) begin
      int ps; ps = 0;
      for (int n = 0; n < N_PE; n++) begin
        int s; s = 0;
        for (int b = 0; b < COLS; b++) begin prog_data[b] = CHK_W'(w[n][r][b]); s += wprot(w[n][r][b]); end
        prog_write(TGT_WEIGHT, n, r);
        foreach (prog_data[b]) prog_data[b] = '0;
        prog_data[0] = CHK_W'(s);
        prog_write(TGT_XCHK, n, r);
      end
      for (int b = 0; b < COLS; b++) begin
        int s; s = 0;
        for (int n = 0; n < N_PE; n++) s += wprot(w[n][r][b]);
        prog_data[b] = CHK_W'(s);
        ps += s;
      end
      prog_write(TGT_PECHK, 0, r);
      foreach (prog_data[b]) prog_data[b] = '0;
      prog_data[0] = CHK_W'(ps & 1);
      prog_write(TGT_PARITY, 0, r);
    end
  endtask

  // ---- mechanism counters ----
  int m_release = 0, m_corr_col = 0, m_corr_pe = 0, m_rechk_sum = 0, m_rechk_par = 0,
      m_remac = 0, m_rechk_consec = 0, m_giveup = 0, m_unprot = 0;

  // run one inference; exp_err_out[n][b] is the error expected to remain in the output
  task automatic run_op(string name, corr_mode_e exp_mode, bit exp_corr, bit exp_unc,
                        bit exp_det, int exp_rounds, int exp_mac, int exp_sum, int exp_par,
                        int exp_con, input int exp_err_out [N_PE][COLS]);
    int t0, lat;
    foreach (in_vec[r]) in_vec[r] = IN_W'($urandom);
    for (int n = 0; n < N_PE; n++)
      for (int b = 0; b < COLS; b++) begin
        gold[n][b] = 0;
        for (int r = 0; r < ROWS; r++) gold[n][b] += int'(in_vec[r]) * w[n][r][b];
      end
    @(negedge clk);
    start = 1;
    @(posedge clk); t0 = int'($time);
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    lat = (int'($time) - t0 - 5) / 10;
    checks += 4;
    if (lat != (LAT + 2) * (1 + exp_rounds)) begin
      failures++; $display("%s: latency %0d exp %0d", name, lat, (LAT + 2) * (1 + exp_rounds));
    end
    if (corr_mode_q != exp_mode || corrected != exp_corr || uncorrectable != exp_unc || err_detected != exp_det) begin
      failures++; $display("%s: mode %s corr %b unc %b det %b", name, corr_mode_q.name(), corrected, uncorrectable, err_detected);
    end
    if (int'(rounds) != exp_rounds || int'(n_mac_recomp) != exp_mac || int'(n_rechk_sum) != exp_sum ||
        int'(n_rechk_par) != exp_par || int'(n_rechk_consec) != exp_con) begin
      failures++; $display("%s: rounds %0d mac %0d sum %0d par %0d consec %0d", name, rounds, n_mac_recomp,
                           n_rechk_sum, n_rechk_par, n_rechk_consec);
    end
    begin
      int bad; bad = 0;
      for (int n = 0; n < N_PE; n++)
        for (int b = 0; b < COLS; b++)
          if (int'(out[n][b]) != gold[n][b] + exp_err_out[n][b]) begin
            bad++;
            if (bad < 4) $display("%s: out[%0d][%0d]=%0d exp %0d", name, n, b, out[n][b], gold[n][b] + exp_err_out[n][b]);
          end
      if (bad != 0) failures++;
    end
    // mechanism statistics
    if (exp_mode == CORR_COL) m_corr_col++;
    if (exp_mode == CORR_PE)  m_corr_pe++;
    if (!exp_det) m_release++;
    if (exp_unc) m_giveup++;
    m_rechk_sum += int'(n_rechk_sum); m_rechk_par += int'(n_rechk_par);
    m_remac += int'(n_mac_recomp);   m_rechk_consec += int'(n_rechk_consec);
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int none [N_PE][COLS];
    int eo   [N_PE][COLS];
    foreach (none[n, b]) none[n][b] = 0;
    prog_en = 0; prog_tgt = TGT_WEIGHT; prog_pe = '0; prog_row = '0; start = 0;
    foreach (prog_data[b]) prog_data[b] = '0;
    foreach (in_vec[r]) in_vec[r] = '0;
    clear_faults();
    repeat (3) @(posedge clk);
    rst_n = 1;
    program_all();

    // 1. fault free: released unchanged
    clear_faults();
    run_op("clean", CORR_NONE, 0, 0, 0, 0, 0, 0, 0, 0, none);

    // 2. one faulty column index b=1 in two PEs (protected planes): column correction
    clear_faults(); ka = 1;
    fm[0][1*WBITS + WBITS-1] = 3;
    fm[N_PE-1][1*WBITS + WBITS-2] = -2;
    run_op("single column", CORR_COL, 1, 0, 1, 0, 0, 0, 0, 0, none);

    // 3. one faulty PE (PE 1) with errors in three columns: PE correction
    clear_faults(); ka = 1;
    fm[1][0*WBITS + WBITS-1] = 1;
    fm[1][2*WBITS + WBITS-2] = 5;
    fm[1][3*WBITS + WBITS-PROT] = -7;
    run_op("single PE", CORR_PE, 1, 0, 1, 0, 0, 0, 0, 0, none);

    // 4. transient fault in a crossbar checksum column: sums differ, checksums recomputed
    clear_faults(); kx = 1;
    fx[2] = 9;
    run_op("checksum fault", CORR_NONE, 0, 0, 1, 1, 0, 1, 0, 0, none);

    // 5. single faulty column plus a transient odd error in the parity column:
    //    parity check fails, checksums recomputed, then the column is corrected
    clear_faults(); ka = 100; kx = 1;
    fm[0][2*WBITS + WBITS-1] = 2;
    fpar = 3;
    run_op("parity fault", CORR_COL, 1, 0, 1, 1, 0, 0, 1, 0, none);

    // 6. several faulty columns in several PEs, transient: one MAC recomputation
    clear_faults(); ka = 1;
    fm[0][0*WBITS + WBITS-1] = 2;
    fm[0][1*WBITS + WBITS-1] = 1;
    fm[1][0*WBITS + WBITS-2] = -3;
    fm[1][3*WBITS + WBITS-1] = 4;
    run_op("multi transient", CORR_NONE, 0, 0, 1, 1, 1, 0, 0, 0, none);

    // 7. the same faults for three rounds: two MAC recomputations, then the extra checksum
    //    recomputation after MAX_CONSEC consecutive ones, then a MAC recomputation that is clean
    clear_faults(); ka = 3;
    fm[0][0*WBITS + WBITS-1] = 2;
    fm[0][1*WBITS + WBITS-1] = 1;
    fm[1][0*WBITS + WBITS-2] = -3;
    fm[1][3*WBITS + WBITS-1] = 4;
    run_op("multi persistent", CORR_NONE, 0, 0, 1, 4, 3, 0, 0, 1, none);

    // 8. fault in the lowest bit plane: with partial protection it is not seen by the
    //    checksums and stays in the output; with every plane protected it is corrected
    clear_faults(); ka = 1;
    fm[N_PE-1][1*WBITS + 0] = 5;
    if (PROT < WBITS) begin
      eo = none; eo[N_PE-1][1] = plane_err(5, 0);
      run_op("unprotected plane", CORR_NONE, 0, 0, 0, 0, 0, 0, 0, 0, eo);
      m_unprot++;
    end else begin
      run_op("lowest plane", CORR_COL, 1, 0, 1, 0, 0, 0, 0, 0, none);
    end

    // 9. permanent faults in several columns of several PEs: routine gives up
    clear_faults(); ka = 1000;
    fm[0][0*WBITS + WBITS-1] = 1;
    fm[0][2*WBITS + WBITS-1] = 1;
    fm[N_PE-1][0*WBITS + WBITS-2] = 2;
    fm[N_PE-1][1*WBITS + WBITS-2] = 2;
    eo = none;
    eo[0][0] = plane_err(1, WBITS-1); eo[0][2] = plane_err(1, WBITS-1);
    eo[N_PE-1][0] = plane_err(2, WBITS-2); eo[N_PE-1][1] = plane_err(2, WBITS-2);
    // rounds: MAX_CONSEC MAC recomputations, one checksum recomputation, and again, until
    // MAX_ROUNDS recomputations have been made; then the routine gives up
    run_op("permanent multi", CORR_NONE, 0, 1, 1, MAX_ROUNDS,
           MAX_ROUNDS - MAX_ROUNDS / (MAX_CONSEC + 1), 0, 0, MAX_ROUNDS / (MAX_CONSEC + 1), eo);

    // 10. random single faults in protected planes (one column in some PEs, or one PE)
    for (int t = 0; t < N_RANDOM; t++) begin
      clear_faults(); ka = 1;
      if (t % 2 == 0) begin
        int b; b = $urandom_range(0, COLS-1);
        for (int n = 0; n < N_PE; n++)
          if ($urandom_range(0, 1) == 1 || n == 0)
            rand_fault(n, b);
        run_op("random column", CORR_COL, 1, 0, 1, 0, 0, 0, 0, 0, none);
      end else begin
        int n; n = $urandom_range(0, N_PE-1);
        for (int b = 0; b < COLS; b++)
          if ($urandom_range(0, 1) == 1 || b < 2)
            rand_fault(n, b);
        run_op("random PE", CORR_PE, 1, 0, 1, 0, 0, 0, 0, 0, none);
      end
    end

    $display("mechanisms: release=%0d corr_col=%0d corr_pe=%0d rechk_sum=%0d rechk_par=%0d remac=%0d rechk_consec=%0d giveup=%0d unprotected=%0d",
             m_release, m_corr_col, m_corr_pe, m_rechk_sum, m_rechk_par, m_remac, m_rechk_consec, m_giveup, m_unprot);
    checks++;
    if (m_release == 0 || m_corr_col == 0 || m_corr_pe == 0 || m_rechk_sum == 0 || m_rechk_par == 0 ||
        m_remac == 0 || m_rechk_consec == 0 || m_giveup == 0 || (PROT < WBITS && m_unprot == 0)) begin
      failures++; $display("a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

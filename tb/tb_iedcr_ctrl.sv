// tb_iedcr_ctrl -- self-checking test of the IEDCR controller. The crossbars are replaced by
// valid pulses LAT cycles after each go strobe; after every go the testbench draws a random
// syndrome (no error, unequal sums, single faulty column/PE with good or bad parity, several
// faulty columns and PEs) and predicts, with its own model of the flowchart, which arrays the
// controller must restart next, or how it must finish (release, correction mode, give-up).
// It checks each go strobe, the final correction mode, status flags, counters, and the
// latency (LAT + 2) * (1 + recomputations), and counts how often each decision occurred.
module tb_iedcr_ctrl;
  import nc_pkg::*;
  localparam int unsigned LAT = 2, MAX_CONSEC = 2, MAX_ROUNDS = 5, CNT_W = 8;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, load_in, mac_go, chk_go, mac_valid, chk_valid;
  logic any_err, sums_equal, single_b, single_n, parity_ok;
  corr_mode_e corr_mode;
  logic out_load, err_detected, corrected, uncorrectable;
  logic [CNT_W-1:0] rounds, n_mac_recomp, n_rechk_sum, n_rechk_par, n_rechk_consec;

  iedcr_ctrl #(.MAX_CONSEC(MAX_CONSEC), .MAX_ROUNDS(MAX_ROUNDS), .CNT_W(CNT_W)) dut (.*);

  // crossbar stand-ins
  logic [LAT-1:0] mp, cp;
  always_ff @(posedge clk) begin
    mp <= {mp[LAT-2:0], mac_go};
    cp <= {cp[LAT-2:0], chk_go};
  end
  assign mac_valid = mp[LAT-1];
  assign chk_valid = cp[LAT-1];

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // statistics: how often each flowchart outcome occurred
  int n_release = 0, n_corr_col = 0, n_corr_pe = 0, n_sum = 0, n_par = 0, n_remac = 0,
      n_consec = 0, n_giveup = 0;

  initial begin
    mp = '0; cp = '0;
    start = 0; any_err = 0; sums_equal = 1; single_b = 0; single_n = 0; parity_ok = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int op = 0; op < 300; op++) begin
      bit exp_mac, exp_chk, fin, exp_corr, exp_unc, exp_err;
      corr_mode_e exp_mode;
      int r, consec, t0, lat, e_mac, e_sum, e_par, e_con;
      @(negedge clk);
      start = 1;
      @(posedge clk); t0 = $time;
      @(negedge clk);
      start = 0;
      exp_mac = 1; exp_chk = 1; fin = 0; r = 0; consec = 0; exp_err = 0;
      e_mac = 0; e_sum = 0; e_par = 0; e_con = 0;
      while (!fin) begin
        int kind;
        // wait for the go strobe
        while (!(mac_go || chk_go)) @(negedge clk);
        checks++;
        if (mac_go != exp_mac || chk_go != exp_chk) begin
          failures++; $display("op %0d round %0d: go mac=%b chk=%b exp %b %b", op, r, mac_go, chk_go, exp_mac, exp_chk);
        end
        // new syndrome for the coming evaluation
        kind = $urandom_range(0, 9);
        any_err    = (kind != 0);
        sums_equal = (kind != 1);
        single_b   = (kind == 2 || kind == 3 || kind == 6);
        single_n   = (kind == 4 || kind == 5 || kind == 6);
        parity_ok  = (kind != 3 && kind != 5);
        // reference model of the flowchart
        if (!any_err) begin
          fin = 1; exp_mode = CORR_NONE; exp_corr = 0; exp_unc = 0; n_release++;
        end else begin
          exp_err = 1;
          if (sums_equal && (single_b || single_n) && parity_ok) begin
            fin = 1; exp_mode = single_b ? CORR_COL : CORR_PE; exp_corr = 1; exp_unc = 0;
            if (single_b) n_corr_col++; else n_corr_pe++;
          end else if (r >= MAX_ROUNDS) begin
            fin = 1; exp_mode = CORR_NONE; exp_corr = 0; exp_unc = 1; n_giveup++;
          end else begin
            r++;
            if (!sums_equal) begin exp_mac = 0; exp_chk = 1; consec = 0; e_sum++; n_sum++; end
            else if (single_b || single_n) begin exp_mac = 0; exp_chk = 1; consec = 0; e_par++; n_par++; end
            else if (consec >= MAX_CONSEC) begin exp_mac = 0; exp_chk = 1; consec = 0; e_con++; n_consec++; end
            else begin exp_mac = 1; exp_chk = 0; consec++; e_mac++; n_remac++; end
          end
        end
        @(negedge clk);
        if (fin) begin
          while (!out_load) @(negedge clk);
          checks++;
          if (corr_mode != exp_mode) begin failures++; $display("op %0d: mode %s exp %s", op, corr_mode.name(), exp_mode.name()); end
          @(negedge clk);
          checks++;
          if (!done) begin failures++; $display("op %0d: done not one cycle after out_load", op); end
          lat = int'(($time - t0 - 5) / 10);
          checks += 4;
          if (lat != (LAT + 2) * (1 + r)) begin failures++; $display("op %0d: latency %0d exp %0d", op, lat, (LAT+2)*(1+r)); end
          if (corrected != exp_corr || uncorrectable != exp_unc || err_detected != exp_err) begin
            failures++; $display("op %0d: flags c=%b u=%b e=%b", op, corrected, uncorrectable, err_detected);
          end
          if (int'(rounds) != r || int'(n_mac_recomp) != e_mac) begin failures++; $display("op %0d: rounds %0d/%0d remac %0d/%0d", op, rounds, r, n_mac_recomp, e_mac); end
          if (int'(n_rechk_sum) != e_sum || int'(n_rechk_par) != e_par || int'(n_rechk_consec) != e_con) begin
            failures++; $display("op %0d: rechk counters", op);
          end
        end
      end
      @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("op %0d: still busy", op); end
    end
    $display("release=%0d corr_col=%0d corr_pe=%0d rechk_sum=%0d rechk_par=%0d remac=%0d rechk_consec=%0d giveup=%0d",
             n_release, n_corr_col, n_corr_pe, n_sum, n_par, n_remac, n_consec, n_giveup);
    checks++;
    if (n_release == 0 || n_corr_col == 0 || n_corr_pe == 0 || n_sum == 0 || n_par == 0 ||
        n_remac == 0 || n_consec == 0 || n_giveup == 0) begin
      failures++; $display("a decision never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

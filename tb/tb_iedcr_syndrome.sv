// tb_iedcr_syndrome -- self-checking test of the syndrome unit: builds consistent PE outputs,
// adder-tree sums and checksums, then adds chosen errors to the PE checksums (Delta(b)) and
// crossbar checksums (Delta(n)) and checks the Deltas, their sums, the equality flag, the
// counts and the indices against values computed here.
module tb_iedcr_syndrome;
  localparam int unsigned N_PE = 5, COLS = 6, DW = 20;
  int checks = 0, failures = 0;

  logic signed [DW-1:0] o_prot [N_PE][COLS];
  logic signed [DW-1:0] o_acc [N_PE];
  logic signed [DW-1:0] o_crossch [N_PE];
  logic signed [DW-1:0] o_pech [COLS];
  logic signed [DW-1:0] d_n [N_PE];
  logic signed [DW-1:0] d_b [COLS];
  logic signed [DW-1:0] sum_dn, sum_db;
  logic                 sums_equal, any_err;
  logic [2:0]           cnt_n, idx_n;
  logic [2:0]           cnt_b, idx_b;

  iedcr_syndrome #(.N_PE(N_PE), .COLS(COLS), .DW(DW)) dut (.*);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int en [N_PE];
    int eb [COLS];
    for (int t = 0; t < 300; t++) begin
      int sn, sb, cn, cb, in_, ib;
      foreach (en[i]) en[i] = 0;
      foreach (eb[i]) eb[i] = 0;
      // a few random non-zero errors, sometimes none
      for (int k = 0; k < (t % 4); k++) en[$urandom_range(0, N_PE-1)] = $urandom_range(1, 50) - 25;
      for (int k = 0; k < ((t / 4) % 4); k++) eb[$urandom_range(0, COLS-1)] = $urandom_range(1, 50) - 25;
      for (int n = 0; n < N_PE; n++) begin
        int s; s = 0;
        for (int b = 0; b < COLS; b++) begin
          o_prot[n][b] = DW'($urandom_range(0, 4000)) - DW'(2000);
          s += int'(o_prot[n][b]);
        end
        o_acc[n] = DW'(s);
        o_crossch[n] = DW'(s + en[n]);
      end
      for (int b = 0; b < COLS; b++) begin
        int s; s = 0;
        for (int n = 0; n < N_PE; n++) s += int'(o_prot[n][b]);
        o_pech[b] = DW'(s + eb[b]);
      end
      #1;
      sn = 0; sb = 0; cn = 0; cb = 0; in_ = -1; ib = -1;
      for (int n = 0; n < N_PE; n++) begin
        sn += en[n];
        if (en[n] != 0) begin cn++; if (in_ < 0) in_ = n; end
        checks++;
        if (int'(d_n[n]) != en[n]) begin failures++; $display("d_n[%0d]=%0d exp %0d", n, d_n[n], en[n]); end
      end
      for (int b = 0; b < COLS; b++) begin
        sb += eb[b];
        if (eb[b] != 0) begin cb++; if (ib < 0) ib = b; end
        checks++;
        if (int'(d_b[b]) != eb[b]) begin failures++; $display("d_b[%0d]=%0d exp %0d", b, d_b[b], eb[b]); end
      end
      checks += 6;
      if (int'(sum_dn) != sn) begin failures++; $display("sum_dn %0d exp %0d", sum_dn, sn); end
      if (int'(sum_db) != sb) begin failures++; $display("sum_db %0d exp %0d", sum_db, sb); end
      if (sums_equal != (sn == sb)) begin failures++; $display("sums_equal"); end
      if (any_err != (cn + cb > 0)) begin failures++; $display("any_err"); end
      if (int'(cnt_n) != cn || int'(cnt_b) != cb) begin failures++; $display("counts %0d %0d exp %0d %0d", cnt_n, cnt_b, cn, cb); end
      if ((in_ >= 0 && int'(idx_n) != in_) || (ib >= 0 && int'(idx_b) != ib)) begin
        failures++; $display("indices %0d %0d exp %0d %0d", idx_n, idx_b, in_, ib);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

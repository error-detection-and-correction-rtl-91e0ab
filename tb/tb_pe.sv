// tb_pe -- self-checking test of one PE: random 4-bit signed weights and the matching
// crossbar-checksum cells (sum over columns of the protected weight part, computed here),
// random activations. Checks the rebuilt column results, the protected-part results, the adder
// tree, the checksum column, and the effect of a fault in a protected and in an unprotected
// bit plane; checks that mac_go and chk_go start their arrays independently.
module tb_pe;
  localparam int unsigned ROWS = 8, COLS = 4, IN_W = 8, WBITS = 4, PROT = 3, CHK_W = 7,
                          DW = 22, LAT = 1;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                    w_wr_en, c_wr_en;
  logic [2:0]              w_wr_row, c_wr_row;
  logic signed [WBITS-1:0] w_wr_data [COLS];
  logic signed [CHK_W-1:0] c_wr_data;
  logic                    mac_go, chk_go;
  logic signed [IN_W-1:0]  in_vec [ROWS];
  logic signed [DW-1:0]    fi_main [COLS*WBITS];
  logic signed [DW-1:0]    fi_xchk;
  logic                    mac_valid, chk_valid;
  logic signed [DW-1:0]    o_col [COLS];
  logic signed [DW-1:0]    o_prot [COLS];
  logic signed [DW-1:0]    o_acc, o_crossch;

  pe #(.ROWS(ROWS), .COLS(COLS), .IN_W(IN_W), .WBITS(WBITS), .PROT_BITS(PROT), .CHK_W(CHK_W),
       .DW(DW), .LAT(LAT)) dut (.*);

  int w [ROWS][COLS];

  function automatic int wprot(int v);   // clear the unprotected low bit planes
    return (v >>> (WBITS - PROT)) <<< (WBITS - PROT);
  endfunction

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compute(input bit m, input bit c);
    @(negedge clk);
    mac_go = m; chk_go = c;
    @(negedge clk);
    mac_go = 0; chk_go = 0;
    checks++;
    if (mac_valid !== m || chk_valid !== c) begin
      failures++; $display("valid mac=%b chk=%b exp %b %b", mac_valid, chk_valid, m, c);
    end
  endtask

  task automatic check_all(input int err_b, input int err_plane, input int err_val);
    int ec, ep, eacc, ex, delta;
    eacc = 0; ex = int'(fi_xchk);
    for (int b = 0; b < COLS; b++) begin
      ec = 0; ep = 0;
      for (int r = 0; r < ROWS; r++) begin
        ec += int'(in_vec[r]) * w[r][b];
        ep += int'(in_vec[r]) * wprot(w[r][b]);
      end
      if (b == err_b) begin
        delta = err_val <<< err_plane;
        if (err_plane == WBITS-1) delta = -delta;
        ec += delta;
        if (err_plane >= WBITS - PROT) ep += delta;
      end
      eacc += ep;
      checks += 2;
      if (int'(o_col[b])  != ec) begin failures++; $display("o_col[%0d]=%0d exp %0d", b, o_col[b], ec); end
      if (int'(o_prot[b]) != ep) begin failures++; $display("o_prot[%0d]=%0d exp %0d", b, o_prot[b], ep); end
    end
    for (int r = 0; r < ROWS; r++) begin
      int s; s = 0;
      for (int b = 0; b < COLS; b++) s += wprot(w[r][b]);
      ex += int'(in_vec[r]) * s;
    end
    checks += 2;
    if (int'(o_acc) != eacc)   begin failures++; $display("o_acc=%0d exp %0d", o_acc, eacc); end
    if (int'(o_crossch) != ex) begin failures++; $display("o_crossch=%0d exp %0d", o_crossch, ex); end
  endtask

  initial begin
    w_wr_en = 0; c_wr_en = 0; mac_go = 0; chk_go = 0; fi_xchk = '0;
    w_wr_row = '0; c_wr_row = '0; c_wr_data = '0;
    foreach (w_wr_data[b]) w_wr_data[b] = '0;
    foreach (fi_main[i]) fi_main[i] = '0;
    foreach (in_vec[r]) in_vec[r] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // program weights and checksum column
    for (int r = 0; r < ROWS; r++) begin
      int s; s = 0;
      @(negedge clk);
      w_wr_en = 1; c_wr_en = 1; w_wr_row = 3'(r); c_wr_row = 3'(r);
      for (int b = 0; b < COLS; b++) begin
        w[r][b] = $urandom_range(0, 15) - 8;
        w_wr_data[b] = WBITS'(w[r][b]);
        s += wprot(w[r][b]);
      end
      c_wr_data = CHK_W'(s);
    end
    @(negedge clk); w_wr_en = 0; c_wr_en = 0;

    for (int t = 0; t < 40; t++) begin
      int eb, ep, ev;
      foreach (in_vec[r]) in_vec[r] = IN_W'($urandom);
      foreach (fi_main[i]) fi_main[i] = '0;
      fi_xchk = '0;
      eb = -1; ep = 0; ev = 0;
      if (t % 2 == 1) begin
        eb = $urandom_range(0, COLS-1);
        ep = (t % 4 == 1) ? 0 : $urandom_range(WBITS-PROT, WBITS-1);   // unprotected / protected plane
        ev = $urandom_range(1, 9);
        fi_main[eb*WBITS+ep] = DW'(ev);
      end
      compute(1, 1);
      check_all(eb, ep, ev);
      checks++;
      if ((o_crossch != o_acc) != (eb >= 0 && ep >= WBITS-PROT)) begin
        failures++; $display("checksum mismatch flag wrong, plane %0d", ep);
      end
    end
    // independence: repeat only the checksum column with a fault, the MAC results must hold
    begin
      logic signed [DW-1:0] held [COLS];
      logic signed [DW-1:0] held_x;
      held = o_col;
      held_x = o_crossch;   // computed with fi_xchk = 0
      foreach (fi_main[i]) fi_main[i] = DW'(77);
      fi_xchk = DW'(5);
      compute(0, 1);
      checks++;
      if (held != o_col) begin failures++; $display("MAC results changed on a checksum-only recompute"); end
      checks++;
      if (o_crossch != held_x + DW'(5)) begin failures++; $display("checksum column not recomputed"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_pe_checksum -- self-checking test of the PE checksum crossbar and its parity column:
// random checksum cells and the parity cell of each row (parity of the row sum, computed here),
// random activations. Checks every column result, the parity column, and that parity_ok is
// set without faults, cleared by an odd error in a checksum or parity column, and blind to an
// even error.
module tb_pe_checksum;
  localparam int unsigned ROWS = 8, COLS = 5, IN_W = 8, CHK_W = 7, DW = 22, LAT = 2;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                    wr_en, par_wr_en, par_wr_data;
  logic [2:0]              wr_row, par_wr_row;
  logic signed [CHK_W-1:0] wr_data [COLS];
  logic                    chk_go;
  logic signed [IN_W-1:0]  in_vec [ROWS];
  logic signed [DW-1:0]    fi_pech [COLS];
  logic signed [DW-1:0]    fi_par;
  logic                    chk_valid, parity_ok;
  logic signed [DW-1:0]    o_pech [COLS];
  logic signed [DW-1:0]    o_par;

  pe_checksum #(.ROWS(ROWS), .COLS(COLS), .IN_W(IN_W), .CHK_W(CHK_W), .DW(DW), .LAT(LAT)) dut (.*);

  int wc [ROWS][COLS];
  int wp [ROWS];

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; par_wr_en = 0; chk_go = 0; fi_par = '0; wr_row = '0; par_wr_row = '0;
    par_wr_data = 0;
    foreach (wr_data[b]) wr_data[b] = '0;
    foreach (fi_pech[b]) fi_pech[b] = '0;
    foreach (in_vec[r]) in_vec[r] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      int s; s = 0;
      @(negedge clk);
      wr_en = 1; par_wr_en = 1; wr_row = 3'(r); par_wr_row = 3'(r);
      for (int b = 0; b < COLS; b++) begin
        wc[r][b] = $urandom_range(0, 60) - 30;
        wr_data[b] = CHK_W'(wc[r][b]);
        s += wc[r][b];
      end
      wp[r] = s & 1;
      par_wr_data = 1'(wp[r]);
    end
    @(negedge clk); wr_en = 0; par_wr_en = 0;

    for (int t = 0; t < 60; t++) begin
      int kind, e, exp_par;
      bit exp_ok;
      foreach (in_vec[r]) in_vec[r] = IN_W'($urandom);
      foreach (fi_pech[b]) fi_pech[b] = '0;
      fi_par = '0;
      kind = t % 4;            // 0: none, 1: odd error in a column, 2: odd error in parity, 3: even error
      e = 2 * $urandom_range(1, 20) + ((kind == 3) ? 0 : 1);
      if (kind == 1 || kind == 3) fi_pech[$urandom_range(0, COLS-1)] = DW'(e);
      if (kind == 2) fi_par = DW'(e);
      exp_ok = (kind == 0 || kind == 3);
      @(negedge clk); chk_go = 1;
      @(negedge clk); chk_go = 0;
      repeat (LAT - 1) @(negedge clk);
      checks++;
      if (!chk_valid) begin failures++; $display("chk_valid not after %0d cycles", LAT); end
      for (int b = 0; b < COLS; b++) begin
        int ex; ex = int'(fi_pech[b]);
        for (int r = 0; r < ROWS; r++) ex += int'(in_vec[r]) * wc[r][b];
        checks++;
        if (int'(o_pech[b]) != ex) begin failures++; $display("o_pech[%0d]=%0d exp %0d", b, o_pech[b], ex); end
      end
      exp_par = int'(fi_par);
      for (int r = 0; r < ROWS; r++) exp_par += int'(in_vec[r]) * wp[r];
      checks += 2;
      if (int'(o_par) != exp_par) begin failures++; $display("o_par=%0d exp %0d", o_par, exp_par); end
      if (parity_ok != exp_ok) begin failures++; $display("parity_ok=%b exp %b kind %0d", parity_ok, exp_ok, kind); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_iedcr_corrector -- self-checking test of the corrector: random outputs and Deltas, all
// three modes, every faulty-column / faulty-PE index; expected outputs computed here from the
// correction rules (column: add Delta(n) to column b* of each PE; PE: add Delta(b) to each
// column of PE n*).
module tb_iedcr_corrector;
  import nc_pkg::*;
  localparam int unsigned N_PE = 3, COLS = 5, DW = 18;
  int checks = 0, failures = 0;

  corr_mode_e           mode;
  logic [1:0]           idx_n;
  logic [2:0]           idx_b;
  logic signed [DW-1:0] d_n [N_PE];
  logic signed [DW-1:0] d_b [COLS];
  logic signed [DW-1:0] o_col [N_PE][COLS];
  logic signed [DW-1:0] o_cor [N_PE][COLS];

  iedcr_corrector #(.N_PE(N_PE), .COLS(COLS), .DW(DW)) dut (.*);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 120; t++) begin
      int m;
      m = t % 3;
      mode  = (m == 0) ? CORR_NONE : (m == 1) ? CORR_COL : CORR_PE;
      idx_n = 2'($urandom_range(0, N_PE-1));
      idx_b = 3'($urandom_range(0, COLS-1));
      foreach (d_n[n]) d_n[n] = DW'($urandom_range(0, 200)) - DW'(100);
      foreach (d_b[b]) d_b[b] = DW'($urandom_range(0, 200)) - DW'(100);
      foreach (o_col[n, b]) o_col[n][b] = DW'($urandom_range(0, 20000)) - DW'(10000);
      #1;
      for (int n = 0; n < N_PE; n++)
        for (int b = 0; b < COLS; b++) begin
          int ex; ex = int'(o_col[n][b]);
          if (m == 1 && b == int'(idx_b)) ex += int'(d_n[n]);
          if (m == 2 && n == int'(idx_n)) ex += int'(d_b[b]);
          checks++;
          if (int'(o_cor[n][b]) != ex) begin
            failures++; $display("mode %0d o_cor[%0d][%0d]=%0d exp %0d", m, n, b, o_cor[n][b], ex);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

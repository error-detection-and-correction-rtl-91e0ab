// tb_imc_crossbar -- self-checking test of the crossbar model: programs random signed
// multi-bit cells (and, in a second instance, binary cells), applies random inputs and fault
// errors, and checks every column result against a reference MAC and the valid pulse against
// the latency LAT (3 cycles here).
module tb_imc_crossbar;
  localparam int unsigned ROWS = 8, COLS = 3, IN_W = 8, DW = 20, LAT = 3;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                    wr_en;
  logic [2:0]              wr_row;
  logic [3:0]              wr_s [COLS];
  logic [0:0]              wr_u [COLS];
  logic                    go;
  logic signed [IN_W-1:0]  in_vec [ROWS];
  logic signed [DW-1:0]    fi [COLS];
  logic                    v_s, v_u;
  logic signed [DW-1:0]    o_s [COLS];
  logic signed [DW-1:0]    o_u [COLS];

  imc_crossbar #(.ROWS(ROWS), .COLS(COLS), .IN_W(IN_W), .CELL_W(4), .CELL_SIGNED(1'b1),
                 .DW(DW), .LAT(LAT)) u_s (
    .clk, .rst_n, .wr_en, .wr_row, .wr_data(wr_s), .go, .in_vec, .fi, .valid(v_s), .col_out(o_s));
  imc_crossbar #(.ROWS(ROWS), .COLS(COLS), .IN_W(IN_W), .CELL_W(1), .CELL_SIGNED(1'b0),
                 .DW(DW), .LAT(LAT)) u_u (
    .clk, .rst_n, .wr_en, .wr_row, .wr_data(wr_u), .go, .in_vec, .fi, .valid(v_u), .col_out(o_u));

  int ws [ROWS][COLS];
  int wu [ROWS][COLS];

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_s, exp_u, lat;
    wr_en = 0; go = 0; wr_row = '0;
    foreach (in_vec[r]) in_vec[r] = '0;
    foreach (fi[c]) fi[c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      wr_en = 1; wr_row = 3'(r);
      for (int c = 0; c < COLS; c++) begin
        ws[r][c] = $urandom_range(0, 15) - 8;
        wu[r][c] = $urandom_range(0, 1);
        wr_s[c]  = 4'(ws[r][c]);
        wr_u[c]  = 1'(wu[r][c]);
      end
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 50; t++) begin
      @(negedge clk);
      foreach (in_vec[r]) in_vec[r] = IN_W'($urandom);
      foreach (fi[c]) fi[c] = (t % 3 == 0) ? DW'($urandom_range(0, 200)) - DW'(100) : '0;
      go = 1;
      @(negedge clk);
      go = 0;
      // results are registered at the go edge; valid must come LAT cycles after it
      lat = 1;
      while (!v_s && lat < 20) begin @(negedge clk); lat++; end
      checks++;
      if (lat != LAT || !v_u) begin failures++; $display("latency %0d exp %0d", lat, LAT); end
      for (int c = 0; c < COLS; c++) begin
        exp_s = int'(fi[c]); exp_u = int'(fi[c]);
        for (int r = 0; r < ROWS; r++) begin
          exp_s += int'(in_vec[r]) * ws[r][c];
          exp_u += int'(in_vec[r]) * wu[r][c];
        end
        checks += 2;
        if (int'(o_s[c]) != exp_s) begin failures++; $display("signed col %0d: %0d exp %0d", c, o_s[c], exp_s); end
        if (int'(o_u[c]) != exp_u) begin failures++; $display("binary col %0d: %0d exp %0d", c, o_u[c], exp_u); end
      end
      @(negedge clk);
      checks++;
      if (v_s) begin failures++; $display("valid longer than one cycle"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

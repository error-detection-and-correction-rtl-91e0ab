// tb_adder_tree -- self-checking test of adder_tree: random signed inputs for a non-power-of-
// two size (N=5, padding exercised) and for N=1, sums compared with a plain loop.
module tb_adder_tree;
  localparam int unsigned W = 14;
  int checks = 0, failures = 0;

  logic signed [W-1:0] a5 [5];
  logic signed [W-1:0] s5;
  logic signed [W-1:0] a1 [1];
  logic signed [W-1:0] s1;
  logic signed [W-1:0] a16 [16];
  logic signed [W-1:0] s16;

  adder_tree #(.N(5),  .W(W)) u5  (.in(a5),  .sum(s5));
  adder_tree #(.N(1),  .W(W)) u1  (.in(a1),  .sum(s1));
  adder_tree #(.N(16), .W(W)) u16 (.in(a16), .sum(s16));

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [W-1:0] ref5, ref16;
    for (int t = 0; t < 200; t++) begin
      ref5 = '0; ref16 = '0;
      foreach (a5[i])  begin a5[i]  = W'($signed($urandom_range(0, 1023)) - 512); ref5  += a5[i];  end
      foreach (a16[i]) begin a16[i] = W'($signed($urandom_range(0, 511)) - 256);  ref16 += a16[i]; end
      a1[0] = W'($urandom);
      #1;
      checks += 3;
      if (s5 != ref5)   begin failures++; $display("N=5 sum %0d exp %0d", s5, ref5); end
      if (s16 != ref16) begin failures++; $display("N=16 sum %0d exp %0d", s16, ref16); end
      if (s1 != a1[0])  begin failures++; $display("N=1 sum %0d exp %0d", s1, a1[0]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

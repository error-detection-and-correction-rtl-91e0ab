// adder_tree -- combinational balanced adder tree: sum = in[0] + ... + in[N-1].
//
// The checksum scheme needs several digital sums: the column results of one PE (compared with
// its crossbar checksum column), the same column of all PEs of the batch (compared with the PE
// checksum crossbar), and the sums of the differences (Delta) in the detection routine. The
// paper names adder trees for the first two; this one is used for all of them.
//
// How it works: the N inputs are placed at the leaves of a complete binary tree with
// P = 2^ceil(log2 N) leaves (unused leaves are zero); each inner node adds its two children,
// so the depth is log2(P) adders. All values are W-bit two's complement; the caller sizes W so
// the sum cannot overflow. Purely combinational, no clock.
module adder_tree #(
  parameter int unsigned N = 8,
  parameter int unsigned W = 16
) (
  input  logic signed [W-1:0] in  [N],
  output logic signed [W-1:0] sum
);

  localparam int unsigned P = (N <= 1) ? 1 : (1 << $clog2(N));

  // node[0] is the root; node[P-1+i] is leaf i
  logic signed [W-1:0] node [2*P-1];

  for (genvar i = 0; i < P; i++) begin : g_leaf
    if (i < N) begin : g_used
      assign node[P-1+i] = in[i];
    end else begin : g_pad
      assign node[P-1+i] = '0;
    end
  end

  for (genvar j = 0; j < P-1; j++) begin : g_node
    assign node[j] = node[2*j+1] + node[2*j+2];
  end

  assign sum = node[0];

endmodule

// fp18_sum_tree - combinational tree of fp18 adders summing N words.
//
// The N inputs are split into the first N/2 and the last N - N/2 words; each
// half is summed by a smaller tree (recursively) and one fp18_add adds the
// two sums, so a tree of N inputs holds exactly N - 1 adders and is
// ceil(log2 N) adders deep. N = 1 passes its word through; a half of one
// word is wired straight to the adder rather than through a 1-word subtree.
//
// Ports: in (N fp18 words), sum (fp18). Zero latency.
module fp18_sum_tree
  import fp18_pkg::*;
#(
  parameter int unsigned N = 2
) (
  input  fp18_t [N-1:0] in,
  output fp18_t         sum
);

  if (N == 1) begin : g_one
    assign sum = in[0];
  end else begin : g_node
    localparam int unsigned NL = N / 2;
    localparam int unsigned NR = N - NL;
    fp18_t sl, sr;
    // a half of one word is that word; larger halves are subtrees
    if (NL == 1) begin : g_l1
      assign sl = in[0];
    end else begin : g_l
      fp18_sum_tree #(.N(NL)) u_l (.in(in[NL-1:0]), .sum(sl));
    end
    if (NR == 1) begin : g_r1
      assign sr = in[N-1];
    end else begin : g_r
      fp18_sum_tree #(.N(NR)) u_r (.in(in[N-1:NL]), .sum(sr));
    end
    fp18_add u_add (.a(sl), .b(sr), .sub(1'b0), .s(sum));
  end

endmodule

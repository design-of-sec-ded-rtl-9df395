// daec_correct: error pattern and correction logic of the SEC-DED-DAEC
// decoder.
//
// For each data bit j three syndrome patterns mean "bit j is wrong": the
// single-error pattern (column j+1 of H) and the two double-adjacent
// patterns that include it (column j xor column j+1, and column j+1 xor
// column j+2). Each pattern is matched against the syndrome, the matches
// are ORed (two OR2 per data bit, one for d1 which has no left neighbour)
// and the result is XORed into the received bit. The pair (d_k, c1) is
// covered, so an adjacent error straddling the data/check boundary is
// corrected too. Adjacent pairs wholly in the check bits only affect the
// status.
//
// Verdict: no error (zero syndrome); corrected single (syndrome equals a
// column); corrected adjacent (syndrome equals one of the n-1 adjacent-pair
// patterns); uncorrectable otherwise. A double error in two non-adjacent
// bits whose syndrome happens to equal an adjacent-pair pattern cannot be
// told apart from that adjacent error and is miscorrected; this is inherent
// to the codes, and the rest of the non-adjacent doubles are reported as
// uncorrectable.
//
// Interface: syndrome_i (r bits) and received data_i (k bits) in; corrected
// data_o and status_o out. Purely combinational: r-bit comparators, OR2 and
// XOR2 per data bit.
//
// The matching, OR2 and XOR2 structure follow the paper. The full r-bit
// comparison and the status output are this design's own, as are the
// elaboration-time check that all adjacent-pair patterns of CODE are
// distinct and the assertion that at most one pattern matches.
module daec_correct
  import ecc_pkg::*;
#(
  parameter code_e CODE = CODE_14_8,
  localparam int N = code_n(CODE),
  localparam int K = code_k(CODE),
  localparam int R = N - K
) (
  input  logic [R-1:0]  syndrome_i,
  input  logic [K-1:0]  data_i,
  output logic [K-1:0]  data_o,
  output ecc_status_e   status_o
);

  logic [N-1:0] single_hit;  // syndrome equals column j+1
  logic [N-2:0] adj_hit;     // syndrome equals column j+1 xor column j+2
  logic [K-1:0] flip;

  if (!h_is_daec(CODE)) begin : g_bad_matrix
    $error("daec_correct: H of code %0d does not separate all adjacent pairs", CODE);
  end

  for (genvar j = 0; j < N; j++) begin : g_single
    localparam logic [MAX_R-1:0] COL = h_col(CODE, j);
    assign single_hit[j] = (syndrome_i == COL[R-1:0]);
  end

  for (genvar j = 0; j < N - 1; j++) begin : g_adj
    localparam logic [MAX_R-1:0] PAIR = h_adj(CODE, j);
    assign adj_hit[j] = (syndrome_i == PAIR[R-1:0]);
  end

  // d1 can only be the left bit of a pair; every other data bit can be
  // either bit of a pair.
  assign flip[0] = single_hit[0] | adj_hit[0];
  for (genvar j = 1; j < K; j++) begin : g_flip
    assign flip[j] = single_hit[j] | adj_hit[j-1] | adj_hit[j];
  end

  assign data_o = data_i ^ flip;

  // Columns and adjacent-pair patterns are all distinct, so at most one of
  // the 2n-1 comparators can fire.
  always_comb assert final ($onehot0({single_hit, adj_hit}))
    else $error("daec_correct: several patterns match syndrome %b", syndrome_i);

  always_comb begin
    if (syndrome_i == '0)  status_o = ECC_NO_ERROR;
    else if (|single_hit)  status_o = ECC_CORRECTED_SINGLE;
    else if (|adj_hit)     status_o = ECC_CORRECTED_ADJACENT;
    else                   status_o = ECC_UNCORRECTABLE;
  end

endmodule

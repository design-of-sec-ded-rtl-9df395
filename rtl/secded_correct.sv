// secded_correct: error correction logic of the SEC-DED decoder.
//
// Data bit j is flipped when the syndrome equals H column j+1 (a single
// error in that bit). Check-bit errors need no data change. The verdict is:
// no error for a zero syndrome; corrected single error when the syndrome
// equals any of the n columns; uncorrectable otherwise. Because every
// column has odd weight and the columns are distinct, each single error
// lands in the second case and each double error (even, non-zero syndrome)
// in the last one.
//
// Interface: syndrome_i (r bits) and the received data bits data_i (k bits)
// in; corrected data_o (k bits) and status_o (ecc_status_e) out. Purely
// combinational: one r-bit comparator per column, one XOR2 per data bit.
//
// The paper gives the single-error matching and the XOR2 correction. This
// design compares all r syndrome bits (the paper's gate count suggests that
// only the three ones of each column are ANDed) and adds the status output,
// which the paper does not define. An elaboration-time check stops with an
// error if the matrix of CODE lacks the SEC-DED property, and a deferred
// assertion checks that at most one column matches.
module secded_correct
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

  logic [N-1:0] hit;  // syndrome equals column j+1

  if (!h_is_secded(CODE)) begin : g_bad_matrix
    $error("secded_correct: H columns of code %0d are not distinct and odd", CODE);
  end

  for (genvar j = 0; j < N; j++) begin : g_col
    localparam logic [MAX_R-1:0] COL = h_col(CODE, j);
    assign hit[j] = (syndrome_i == COL[R-1:0]);
  end

  assign data_o = data_i ^ hit[K-1:0];

  // With distinct columns at most one comparator can fire.
  always_comb assert final ($onehot0(hit))
    else $error("secded_correct: several columns match syndrome %b", syndrome_i);

  always_comb begin
    if (syndrome_i == '0)  status_o = ECC_NO_ERROR;
    else if (|hit)         status_o = ECC_CORRECTED_SINGLE;
    else                   status_o = ECC_UNCORRECTABLE;
  end

endmodule

// ecc_encoder: check-bit generator of one code of the family.
//
// Each check bit c_i is the XOR of the data bits that have a one in row i of
// the data part of H (the identity part of H makes c_i the only check bit
// in that row). For the (8,3) code this gives c1 = d1^d2, c2 = d2,
// c3 = d2^d3, c4 = c5 = d1^d3. The codeword is the data word followed by the
// check bits, in the column order of H.
//
// Interface: data_i (k bits, data_i[0] = d1) in, check_o (r bits,
// check_o[0] = c1) and codeword_o (n bits, {check, data}) out. Purely
// combinational; the longest path is one XOR tree as wide as the fullest row
// of H (8 inputs for (24,16)).
//
// The equations come from the paper's H matrices; the parameterisation by a
// code enumeration is this design's own.
module ecc_encoder
  import ecc_pkg::*;
#(
  parameter code_e CODE = CODE_14_8,
  localparam int N = code_n(CODE),
  localparam int K = code_k(CODE),
  localparam int R = N - K
) (
  input  logic [K-1:0] data_i,
  output logic [R-1:0] check_o,
  output logic [N-1:0] codeword_o
);

  for (genvar i = 0; i < R; i++) begin : g_check
    localparam logic [MAX_N-1:0] ROW  = h_row(CODE, i);
    localparam logic [K-1:0]     MASK = ROW[K-1:0];
    assign check_o[i] = ^(data_i & MASK);
  end

  assign codeword_o = {check_o, data_i};

endmodule

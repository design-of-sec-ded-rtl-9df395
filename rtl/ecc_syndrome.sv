// ecc_syndrome: syndrome computation, the first half of the decoder.
//
// Syndrome bit s_i is the XOR of all received codeword bits that have a one
// in row i of H, i.e. the recomputed check bit c_i xor the received c_i. A
// zero syndrome means no error was seen; otherwise it is the XOR of the H
// columns of the flipped bits.
//
// Interface: codeword_i (n bits, codeword_i[j] = column j+1 of H) in,
// syndrome_o (r bits, syndrome_o[i] = row i+1) out. Purely combinational:
// one XOR tree per row, one input wider than the encoder's.
//
// Follows the paper's decoding description; the code enumeration is this
// design's own.
module ecc_syndrome
  import ecc_pkg::*;
#(
  parameter code_e CODE = CODE_14_8,
  localparam int N = code_n(CODE),
  localparam int K = code_k(CODE),
  localparam int R = N - K
) (
  input  logic [N-1:0] codeword_i,
  output logic [R-1:0] syndrome_o
);

  for (genvar i = 0; i < R; i++) begin : g_syn
    localparam logic [MAX_N-1:0] ROW  = h_row(CODE, i);
    localparam logic [N-1:0]     MASK = ROW[N-1:0];
    assign syndrome_o[i] = ^(codeword_i & MASK);
  end

endmodule

// secded_codec: SEC-DED codec: single error correction, double error detection.
//
// The write side encodes a data word into a codeword (ecc_encoder). The read
// side takes a possibly corrupted codeword, computes its syndrome
// (ecc_syndrome) and corrects the data bits (secded_correct).
// A single error anywhere in the codeword is corrected in the data word; a
// double error is flagged as uncorrectable and the data passes unchanged.
//
// Interface: data_i (k bits) -> codeword_o (n bits) on the write side;
// codeword_i (n bits) -> data_o (k bits), syndrome_o (r bits) and status_o
// on the read side. The two sides are independent and purely
// combinational; a memory would sit between codeword_o and codeword_i.
//
// The split into encoder, syndrome computation and correction logic follows
// the paper; the syndrome and status outputs are this design's own.
module secded_codec
  import ecc_pkg::*;
#(
  parameter code_e CODE = CODE_14_8,
  localparam int N = code_n(CODE),
  localparam int K = code_k(CODE),
  localparam int R = N - K
) (
  input  logic [K-1:0] data_i,
  output logic [N-1:0] codeword_o,
  input  logic [N-1:0] codeword_i,
  output logic [K-1:0] data_o,
  output logic [R-1:0] syndrome_o,
  output ecc_status_e  status_o
);

  logic [R-1:0] check_unused;

  ecc_encoder #(.CODE(CODE)) u_encoder (
    .data_i     (data_i),
    .check_o    (check_unused),
    .codeword_o (codeword_o)
  );

  ecc_syndrome #(.CODE(CODE)) u_syndrome (
    .codeword_i (codeword_i),
    .syndrome_o (syndrome_o)
  );

  secded_correct #(.CODE(CODE)) u_correct (
    .syndrome_i (syndrome_o),
    .data_i     (codeword_i[K-1:0]),
    .data_o     (data_o),
    .status_o   (status_o)
  );

endmodule

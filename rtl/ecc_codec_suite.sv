// ecc_codec_suite: the complete family of proposed codecs side by side.
//
// For each of the six codes, (8,3), (9,4), (11,5), (13,7), (14,8) and
// (24,16), the suite holds one SEC-DED codec and one SEC-DED-DAEC codec
// built on the same H matrix, so the same codeword serves both decoders.
// Lane c of every port array belongs to code ecc_pkg::code_e'(c). Since the
// codes differ in width, each lane is padded to the widest code: data
// lanes are MAX_K = 16 bits, codeword lanes MAX_N = 24 bits and syndrome
// lanes MAX_R = 8 bits, all LSB-aligned. Input bits above a code's width
// are ignored and output bits above it are driven to zero.
//
// Per lane and per codec type:
//   *_data_i     -> *_codeword_o   write side (encoder)
//   *_codeword_i -> *_data_o, *_syndrome_o, *_status_o   read side
// sd_* ports belong to the SEC-DED codecs, da_* to the SEC-DED-DAEC codecs.
// Everything is combinational; there is no clock.
//
// The set of codes and the two codec types are those of the paper; putting
// them all in one top with padded lanes is this design's own packaging.
module ecc_codec_suite
  import ecc_pkg::*;
(
  input  logic [MAX_K-1:0] sd_data_i     [NUM_CODES],
  output logic [MAX_N-1:0] sd_codeword_o [NUM_CODES],
  input  logic [MAX_N-1:0] sd_codeword_i [NUM_CODES],
  output logic [MAX_K-1:0] sd_data_o     [NUM_CODES],
  output logic [MAX_R-1:0] sd_syndrome_o [NUM_CODES],
  output ecc_status_e      sd_status_o   [NUM_CODES],

  input  logic [MAX_K-1:0] da_data_i     [NUM_CODES],
  output logic [MAX_N-1:0] da_codeword_o [NUM_CODES],
  input  logic [MAX_N-1:0] da_codeword_i [NUM_CODES],
  output logic [MAX_K-1:0] da_data_o     [NUM_CODES],
  output logic [MAX_R-1:0] da_syndrome_o [NUM_CODES],
  output ecc_status_e      da_status_o   [NUM_CODES]
);

  for (genvar c = 0; c < NUM_CODES; c++) begin : g_code
    localparam code_e C = code_e'(c);
    localparam int    N = code_n(C);
    localparam int    K = code_k(C);
    localparam int    R = N - K;

    logic [N-1:0] sd_cw, da_cw;
    logic [K-1:0] sd_d, da_d;
    logic [R-1:0] sd_s, da_s;

    secded_codec #(.CODE(C)) u_secded (
      .data_i     (sd_data_i[c][K-1:0]),
      .codeword_o (sd_cw),
      .codeword_i (sd_codeword_i[c][N-1:0]),
      .data_o     (sd_d),
      .syndrome_o (sd_s),
      .status_o   (sd_status_o[c])
    );

    daec_codec #(.CODE(C)) u_daec (
      .data_i     (da_data_i[c][K-1:0]),
      .codeword_o (da_cw),
      .codeword_i (da_codeword_i[c][N-1:0]),
      .data_o     (da_d),
      .syndrome_o (da_s),
      .status_o   (da_status_o[c])
    );

    assign sd_codeword_o[c] = MAX_N'(sd_cw);
    assign sd_data_o[c]     = MAX_K'(sd_d);
    assign sd_syndrome_o[c] = MAX_R'(sd_s);
    assign da_codeword_o[c] = MAX_N'(da_cw);
    assign da_data_o[c]     = MAX_K'(da_d);
    assign da_syndrome_o[c] = MAX_R'(da_s);
  end

endmodule

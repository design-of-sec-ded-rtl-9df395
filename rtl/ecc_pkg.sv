// ecc_pkg: parity-check matrices and shared types of the SEC-DED and
// SEC-DED-DAEC code family.
//
// Six (n, k) codes are defined: (8,3), (9,4), (11,5), (13,7), (14,8) and
// (24,16). Each has an H matrix of r = n-k rows and n columns. The first k
// columns are the data columns d1..dk, every one of weight 3; the last r
// columns are the check-bit columns c1..cr and form an identity matrix. All
// columns therefore have odd weight, which is what makes the codes SEC-DED:
// a single error gives an odd-weight syndrome equal to one column, a double
// error gives a non-zero even-weight syndrome that equals no column. The
// matrices also keep every "adjacent pair" syndrome (column j xor column j+1)
// distinct, so a double error in two neighbouring codeword bits can be
// corrected as well (DAEC). The data columns were chosen to keep few ones per
// row, which keeps the XOR trees of the encoder and syndrome shallow.
//
// The matrices below are written row by row in the published order: the
// leftmost bit of each literal is column 1 (d1), the rightmost is column n
// (cr). The underscore separates the data part from the identity part.
//
// Codeword bit numbering used by every module: codeword[j] holds column j+1
// of H, i.e. codeword[k-1:0] = data d_k..d_1 (data[i] is d_{i+1}) and
// codeword[n-1:k] = check bits c_r..c_1 (check[i] is c_{i+1}). Syndrome bit
// i is row i+1 of H.
//
// The matrices, the column order and the codeword layout follow the paper;
// the enumerations and helper functions are this design's own.
package ecc_pkg;

  typedef enum logic [2:0] {
    CODE_8_3   = 3'd0,
    CODE_9_4   = 3'd1,
    CODE_11_5  = 3'd2,
    CODE_13_7  = 3'd3,
    CODE_14_8  = 3'd4,
    CODE_24_16 = 3'd5
  } code_e;

  localparam int NUM_CODES = 6;
  localparam int MAX_N     = 24;
  localparam int MAX_K     = 16;
  localparam int MAX_R     = 8;

  // Decoder verdict. Single and adjacent errors in check bits are reported
  // as corrected too: the data word needs no change for them.
  typedef enum logic [1:0] {
    ECC_NO_ERROR           = 2'd0,  // syndrome is zero
    ECC_CORRECTED_SINGLE   = 2'd1,  // syndrome equals one column of H
    ECC_CORRECTED_ADJACENT = 2'd2,  // syndrome equals column j xor column j+1 (DAEC only)
    ECC_UNCORRECTABLE      = 2'd3   // any other non-zero syndrome: detected, not corrected
  } ecc_status_e;

  // H matrices, one literal per row, column 1 leftmost.
  localparam logic [0:7] H_8_3 [5] = '{
    8'b110_10000,
    8'b010_01000,
    8'b011_00100,
    8'b101_00010,
    8'b101_00001
  };
  localparam logic [0:8] H_9_4 [5] = '{
    9'b0110_10000,
    9'b1010_01000,
    9'b0101_00100,
    9'b1101_00010,
    9'b1011_00001
  };
  localparam logic [0:10] H_11_5 [6] = '{
    11'b00110_100000,
    11'b11010_010000,
    11'b01011_001000,
    11'b10101_000100,
    11'b10000_000010,
    11'b01101_000001
  };
  localparam logic [0:12] H_13_7 [6] = '{
    13'b0100110_100000,
    13'b0011010_010000,
    13'b1101011_001000,
    13'b0110101_000100,
    13'b1010000_000010,
    13'b1001101_000001
  };
  localparam logic [0:13] H_14_8 [6] = '{
    14'b10100110_100000,
    14'b01111010_010000,
    14'b11001011_001000,
    14'b10010101_000100,
    14'b01010000_000010,
    14'b00101101_000001
  };
  localparam logic [0:23] H_24_16 [8] = '{
    24'b1010001010100110_10000000,
    24'b0100000100011010_01000000,
    24'b0000111000101011_00100000,
    24'b0000000001110101_00010000,
    24'b1001101100000000_00001000,
    24'b0111010001010000_00000100,
    24'b0010100111000000_00000010,
    24'b1101010010001101_00000001
  };

  function automatic int code_n(code_e c);
    case (c)
      CODE_8_3:   return 8;
      CODE_9_4:   return 9;
      CODE_11_5:  return 11;
      CODE_13_7:  return 13;
      CODE_14_8:  return 14;
      default:    return 24;
    endcase
  endfunction

  function automatic int code_k(code_e c);
    case (c)
      CODE_8_3:   return 3;
      CODE_9_4:   return 4;
      CODE_11_5:  return 5;
      CODE_13_7:  return 7;
      CODE_14_8:  return 8;
      default:    return 16;
    endcase
  endfunction

  function automatic int code_r(code_e c);
    return code_n(c) - code_k(c);
  endfunction

  // Row `row` (0-based) of H, as a vector whose bit j is column j+1.
  function automatic logic [MAX_N-1:0] h_row(code_e c, int row);
    logic [MAX_N-1:0] v;
    v = '0;
    for (int j = 0; j < code_n(c); j++) begin
      case (c)
        CODE_8_3:   v[j] = H_8_3[row][j];
        CODE_9_4:   v[j] = H_9_4[row][j];
        CODE_11_5:  v[j] = H_11_5[row][j];
        CODE_13_7:  v[j] = H_13_7[row][j];
        CODE_14_8:  v[j] = H_14_8[row][j];
        default:    v[j] = H_24_16[row][j];
      endcase
    end
    return v;
  endfunction

  // Column `col` (0-based) of H, as a vector whose bit i is row i+1. For
  // col = n it returns zero, so that "column j xor column j+1" is defined
  // for every j < n.
  function automatic logic [MAX_R-1:0] h_col(code_e c, int col);
    logic [MAX_R-1:0] v;
    v = '0;
    if (col < code_n(c)) begin
      for (int i = 0; i < code_r(c); i++) begin
        case (c)
          CODE_8_3:   v[i] = H_8_3[i][col];
          CODE_9_4:   v[i] = H_9_4[i][col];
          CODE_11_5:  v[i] = H_11_5[i][col];
          CODE_13_7:  v[i] = H_13_7[i][col];
          CODE_14_8:  v[i] = H_14_8[i][col];
          default:    v[i] = H_24_16[i][col];
        endcase
      end
    end
    return v;
  endfunction

  // Syndrome of a double error in codeword bits col and col+1.
  function automatic logic [MAX_R-1:0] h_adj(code_e c, int col);
    return h_col(c, col) ^ h_col(c, col + 1);
  endfunction

  // True when all n columns are distinct, non-zero and of odd weight: the
  // condition for SEC-DED with the decoders of this design.
  function automatic bit h_is_secded(code_e c);
    logic [MAX_R-1:0] cols [MAX_N];
    for (int a = 0; a < code_n(c); a++) cols[a] = h_col(c, a);
    for (int a = 0; a < code_n(c); a++) begin
      if (cols[a] == '0 || !(^cols[a])) return 1'b0;
      for (int b = a + 1; b < code_n(c); b++)
        if (cols[a] == cols[b]) return 1'b0;
    end
    return 1'b1;
  endfunction

  // True when the n-1 adjacent-pair syndromes are distinct (they are even,
  // hence distinct from the columns, whenever h_is_secded holds).
  function automatic bit h_is_daec(code_e c);
    logic [MAX_R-1:0] pairs [MAX_N];
    for (int a = 0; a + 1 < code_n(c); a++) pairs[a] = h_adj(c, a);
    for (int a = 0; a + 1 < code_n(c); a++)
      for (int b = a + 1; b + 1 < code_n(c); b++)
        if (pairs[a] == pairs[b]) return 1'b0;
    return h_is_secded(c);
  endfunction

endpackage

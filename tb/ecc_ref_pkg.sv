// ecc_ref_pkg: reference model shared by the testbenches.
//
// Holds a second, independent copy of the six H matrices, typed as text in
// the published row order (column 1 leftmost), and a reference encoder and
// decoder that work on that text by brute force: the decoder searches all
// single columns and all adjacent column pairs for the syndrome instead of
// using comparators. Code index c matches ecc_pkg::code_e'(c).
package ecc_ref_pkg;

  localparam int NUM_CODES = 6;

  // Row `row` of H for code `code`, ones and zeros separated by spaces.
  function automatic string h_text(int code, int row);
    case (code)
      0: begin  // (8,3)
        case (row)
          0: return "1 1 0 1 0 0 0 0";
          1: return "0 1 0 0 1 0 0 0";
          2: return "0 1 1 0 0 1 0 0";
          3: return "1 0 1 0 0 0 1 0";
          4: return "1 0 1 0 0 0 0 1";
          default: return "";
        endcase
      end
      1: begin  // (9,4)
        case (row)
          0: return "0 1 1 0 1 0 0 0 0";
          1: return "1 0 1 0 0 1 0 0 0";
          2: return "0 1 0 1 0 0 1 0 0";
          3: return "1 1 0 1 0 0 0 1 0";
          4: return "1 0 1 1 0 0 0 0 1";
          default: return "";
        endcase
      end
      2: begin  // (11,5)
        case (row)
          0: return "0 0 1 1 0 1 0 0 0 0 0";
          1: return "1 1 0 1 0 0 1 0 0 0 0";
          2: return "0 1 0 1 1 0 0 1 0 0 0";
          3: return "1 0 1 0 1 0 0 0 1 0 0";
          4: return "1 0 0 0 0 0 0 0 0 1 0";
          5: return "0 1 1 0 1 0 0 0 0 0 1";
          default: return "";
        endcase
      end
      3: begin  // (13,7)
        case (row)
          0: return "0 1 0 0 1 1 0 1 0 0 0 0 0";
          1: return "0 0 1 1 0 1 0 0 1 0 0 0 0";
          2: return "1 1 0 1 0 1 1 0 0 1 0 0 0";
          3: return "0 1 1 0 1 0 1 0 0 0 1 0 0";
          4: return "1 0 1 0 0 0 0 0 0 0 0 1 0";
          5: return "1 0 0 1 1 0 1 0 0 0 0 0 1";
          default: return "";
        endcase
      end
      4: begin  // (14,8)
        case (row)
          0: return "1 0 1 0 0 1 1 0 1 0 0 0 0 0";
          1: return "0 1 1 1 1 0 1 0 0 1 0 0 0 0";
          2: return "1 1 0 0 1 0 1 1 0 0 1 0 0 0";
          3: return "1 0 0 1 0 1 0 1 0 0 0 1 0 0";
          4: return "0 1 0 1 0 0 0 0 0 0 0 0 1 0";
          5: return "0 0 1 0 1 1 0 1 0 0 0 0 0 1";
          default: return "";
        endcase
      end
      5: begin  // (24,16)
        case (row)
          0: return "1 0 1 0 0 0 1 0 1 0 1 0 0 1 1 0 1 0 0 0 0 0 0 0";
          1: return "0 1 0 0 0 0 0 1 0 0 0 1 1 0 1 0 0 1 0 0 0 0 0 0";
          2: return "0 0 0 0 1 1 1 0 0 0 1 0 1 0 1 1 0 0 1 0 0 0 0 0";
          3: return "0 0 0 0 0 0 0 0 0 1 1 1 0 1 0 1 0 0 0 1 0 0 0 0";
          4: return "1 0 0 1 1 0 1 1 0 0 0 0 0 0 0 0 0 0 0 0 1 0 0 0";
          5: return "0 1 1 1 0 1 0 0 0 1 0 1 0 0 0 0 0 0 0 0 0 1 0 0";
          6: return "0 0 1 0 1 0 0 1 1 1 0 0 0 0 0 0 0 0 0 0 0 0 1 0";
          7: return "1 1 0 1 0 1 0 0 1 0 0 0 1 1 0 1 0 0 0 0 0 0 0 1";
          default: return "";
        endcase
      end
      default: return "";
    endcase
  endfunction

  function automatic int ref_n(int code);
    int n_by_code[NUM_CODES] = '{8, 9, 11, 13, 14, 24};
    return n_by_code[code];
  endfunction

  function automatic int ref_k(int code);
    int k_by_code[NUM_CODES] = '{3, 4, 5, 7, 8, 16};
    return k_by_code[code];
  endfunction

  function automatic int ref_r(int code);
    return ref_n(code) - ref_k(code);
  endfunction

  // H[row][col] read from the text (0-based row and column).
  function automatic bit h_bit(int code, int row, int col);
    string s;
    s = h_text(code, row);
    return s[2 * col] == "1";
  endfunction

  // Syndrome of an error (or codeword) vector e: bit i is row i+1 of H * e.
  function automatic logic [7:0] syndrome(int code, logic [23:0] e);
    logic [7:0] s;
    s = '0;
    for (int i = 0; i < ref_r(code); i++)
      for (int j = 0; j < ref_n(code); j++)
        if (h_bit(code, i, j) && e[j]) s[i] = ~s[i];
    return s;
  endfunction

  // Reference encoder: check bits c_i = row i of the data part times d.
  function automatic logic [23:0] encode(int code, logic [15:0] d);
    logic [23:0] cw;
    int k;
    k  = ref_k(code);
    cw = '0;
    for (int j = 0; j < k; j++) cw[j] = d[j];
    for (int i = 0; i < ref_r(code); i++) begin
      bit p;
      p = 0;
      for (int j = 0; j < k; j++) if (h_bit(code, i, j) && d[j]) p = ~p;
      cw[k + i] = p;
    end
    return cw;
  endfunction

  // Reference decoder. Returns the error pattern it believes in (zero when
  // none is found) and a status code: 0 none, 1 single, 2 adjacent (only
  // when daec is set), 3 uncorrectable.
  function automatic void decode(int code, bit daec, logic [7:0] s,
                                 output logic [23:0] pattern, output int status);
    int n;
    n = ref_n(code);
    pattern = '0;
    status  = 3;
    if (s == 0) begin
      status = 0;
      return;
    end
    for (int j = 0; j < n; j++)
      if (syndrome(code, 24'(1) << j) == s) begin
        pattern = 24'(1) << j;
        status  = 1;
        return;
      end
    if (daec)
      for (int j = 0; j + 1 < n; j++)
        if (syndrome(code, 24'(3) << j) == s) begin
          pattern = 24'(3) << j;
          status  = 2;
          return;
        end
  endfunction

endpackage

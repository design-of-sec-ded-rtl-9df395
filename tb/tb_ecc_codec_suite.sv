// tb_ecc_codec_suite: end-to-end test of the whole codec suite at its
// default (and only) size.
//
// Each round writes a random word into every lane of both banks, checks the
// codewords against the reference encoder, corrupts each codeword with a
// randomly chosen kind of error and reads it back. The kinds are: none, one
// data bit, one check bit, two adjacent data bits, the adjacent pair made of
// the last data bit and c1, two adjacent check bits, and two non-adjacent
// bits. Expected results follow from the kind (SEC-DED: singles corrected,
// doubles uncorrectable; DAEC: singles and adjacent doubles corrected) and,
// for non-adjacent doubles in the DAEC bank, from the brute-force reference
// decoder. Unused high bits of every output lane must stay zero.
//
// Each mechanism is counted and a mechanism that never occurred is a
// failure: SEC-DED correction of a data and of a check bit, SEC-DED double
// detection, DAEC adjacent correction inside the data, across the
// data/check boundary and inside the check bits, DAEC detection of a
// non-adjacent double and DAEC miscorrection of an aliased non-adjacent
// double. The number of check bits of every code with k <= 8 is also
// compared with the parity-bit estimate r = round(sqrt(1 + 2.5k) + 1.9).
module tb_ecc_codec_suite;
  import ecc_pkg::*;
  import ecc_ref_pkg::*;

  localparam int ROUNDS = 3000;

  int checks   = 0;
  int failures = 0;

  logic [MAX_K-1:0] sd_data_i     [NUM_CODES];
  logic [MAX_N-1:0] sd_codeword_o [NUM_CODES];
  logic [MAX_N-1:0] sd_codeword_i [NUM_CODES];
  logic [MAX_K-1:0] sd_data_o     [NUM_CODES];
  logic [MAX_R-1:0] sd_syndrome_o [NUM_CODES];
  ecc_status_e      sd_status_o   [NUM_CODES];
  logic [MAX_K-1:0] da_data_i     [NUM_CODES];
  logic [MAX_N-1:0] da_codeword_o [NUM_CODES];
  logic [MAX_N-1:0] da_codeword_i [NUM_CODES];
  logic [MAX_K-1:0] da_data_o     [NUM_CODES];
  logic [MAX_R-1:0] da_syndrome_o [NUM_CODES];
  ecc_status_e      da_status_o   [NUM_CODES];

  ecc_codec_suite dut (.*);

  typedef enum int {
    K_NONE, K_DATA1, K_CHECK1, K_ADJ_DATA, K_ADJ_EDGE, K_ADJ_CHECK, K_NONADJ
  } kind_e;

  // Mechanism counters.
  int sd_single_data, sd_single_check, sd_double;
  int da_adj_data, da_adj_edge, da_adj_check, da_nonadj_detect, da_nonadj_alias;

  function automatic logic [23:0] make_error(int code, kind_e kind);
    int n, k, a, b;
    n = ref_n(code);
    k = ref_k(code);
    case (kind)
      K_NONE:      return '0;
      K_DATA1:     return 24'(1) << ($urandom() % k);
      K_CHECK1:    return 24'(1) << (k + $urandom() % (n - k));
      K_ADJ_DATA:  return 24'(3) << ($urandom() % (k - 1));
      K_ADJ_EDGE:  return 24'(3) << (k - 1);
      K_ADJ_CHECK: return 24'(3) << (k + $urandom() % (n - k - 1));
      default: begin
        a = $urandom() % (n - 2);
        b = a + 2 + $urandom() % (n - a - 2);
        return (24'(1) << a) | (24'(1) << b);
      end
    endcase
  endfunction

  task automatic check(bit ok, string what, int code);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL lane %0d (%0d,%0d): %s", code, ref_n(code), ref_k(code), what);
    end
  endtask

  task automatic expect_seen(int count, string what);
    checks++;
    if (count == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    kind_e            sd_kind [NUM_CODES];
    kind_e            da_kind [NUM_CODES];
    logic [23:0]      sd_e [NUM_CODES];
    logic [23:0]      da_e [NUM_CODES];

    // Parity-bit estimate, valid up to k = 8.
    for (int c = 0; c < NUM_CODES; c++)
      if (ref_k(c) <= 8)
        check(code_r(code_e'(c)) == int'($floor($sqrt(1.0 + 2.5 * ref_k(c)) + 1.9 + 0.5)),
              "parity-bit count differs from the estimate", c);

    for (int t = 0; t < ROUNDS; t++) begin
      for (int c = 0; c < NUM_CODES; c++) begin
        logic [15:0] mask;
        mask = (16'(1) << ref_k(c)) - 16'(1);
        sd_data_i[c] = 16'($urandom()) & mask;
        da_data_i[c] = 16'($urandom()) & mask;
        sd_kind[c]   = kind_e'($urandom() % 7);
        da_kind[c]   = kind_e'($urandom() % 7);
        sd_e[c]      = make_error(c, sd_kind[c]);
        da_e[c]      = make_error(c, da_kind[c]);
      end
      #1;
      for (int c = 0; c < NUM_CODES; c++) begin
        check(sd_codeword_o[c] == encode(c, sd_data_i[c]), "SEC-DED encode", c);
        check(da_codeword_o[c] == encode(c, da_data_i[c]), "DAEC encode", c);
        sd_codeword_i[c] = sd_codeword_o[c] ^ sd_e[c];
        da_codeword_i[c] = da_codeword_o[c] ^ da_e[c];
      end
      #1;
      for (int c = 0; c < NUM_CODES; c++) begin
        logic [15:0] mask, sd_recv, da_recv, exp_d;
        logic [23:0] pat;
        int          st;
        ecc_status_e exp_st;
        mask    = (16'(1) << ref_k(c)) - 16'(1);
        sd_recv = 16'(sd_codeword_i[c]) & mask;
        da_recv = 16'(da_codeword_i[c]) & mask;

        // SEC-DED bank.
        check(sd_syndrome_o[c] == syndrome(c, sd_e[c]), "SEC-DED syndrome", c);
        case (sd_kind[c])
          K_NONE:           begin exp_d = sd_data_i[c]; exp_st = ECC_NO_ERROR; end
          K_DATA1, K_CHECK1: begin exp_d = sd_data_i[c]; exp_st = ECC_CORRECTED_SINGLE; end
          default:          begin exp_d = sd_recv;      exp_st = ECC_UNCORRECTABLE; end
        endcase
        check(sd_data_o[c] == exp_d && sd_status_o[c] == exp_st,
              $sformatf("SEC-DED decode, error %h: got %h/%0d expected %h/%0d",
                        sd_e[c], sd_data_o[c], sd_status_o[c], exp_d, exp_st), c);
        if (sd_data_o[c] == exp_d && sd_status_o[c] == exp_st)
          case (sd_kind[c])
            K_DATA1:  sd_single_data++;
            K_CHECK1: sd_single_check++;
            K_NONE:   ;
            default:  sd_double++;
          endcase

        // DAEC bank.
        check(da_syndrome_o[c] == syndrome(c, da_e[c]), "DAEC syndrome", c);
        case (da_kind[c])
          K_NONE:            begin exp_d = da_data_i[c]; exp_st = ECC_NO_ERROR; end
          K_DATA1, K_CHECK1: begin exp_d = da_data_i[c]; exp_st = ECC_CORRECTED_SINGLE; end
          K_NONADJ: begin
            decode(c, 1'b1, syndrome(c, da_e[c]), pat, st);
            exp_d  = da_recv ^ (16'(pat) & mask);
            exp_st = ecc_status_e'(st);
          end
          default:           begin exp_d = da_data_i[c]; exp_st = ECC_CORRECTED_ADJACENT; end
        endcase
        check(da_data_o[c] == exp_d && da_status_o[c] == exp_st,
              $sformatf("DAEC decode, error %h: got %h/%0d expected %h/%0d",
                        da_e[c], da_data_o[c], da_status_o[c], exp_d, exp_st), c);
        if (da_data_o[c] == exp_d && da_status_o[c] == exp_st)
          case (da_kind[c])
            K_ADJ_DATA:  da_adj_data++;
            K_ADJ_EDGE:  da_adj_edge++;
            K_ADJ_CHECK: da_adj_check++;
            K_NONADJ:    if (exp_st == ECC_UNCORRECTABLE) da_nonadj_detect++;
                         else da_nonadj_alias++;
            default:     ;
          endcase

        // Padding above the code width.
        check((sd_codeword_o[c] >> ref_n(c)) == 0 && (da_codeword_o[c] >> ref_n(c)) == 0 &&
              (sd_data_o[c] & ~mask) == 0 && (da_data_o[c] & ~mask) == 0 &&
              (sd_syndrome_o[c] >> ref_r(c)) == 0 && (da_syndrome_o[c] >> ref_r(c)) == 0,
              "padding bits not zero", c);
      end
    end

    $display("mechanisms: SEC-DED single data %0d, single check %0d, double detected %0d",
             sd_single_data, sd_single_check, sd_double);
    $display("mechanisms: DAEC adjacent data %0d, boundary %0d, check %0d, non-adjacent detected %0d, aliased %0d",
             da_adj_data, da_adj_edge, da_adj_check, da_nonadj_detect, da_nonadj_alias);
    expect_seen(sd_single_data,   "SEC-DED single data-bit correction");
    expect_seen(sd_single_check,  "SEC-DED single check-bit error");
    expect_seen(sd_double,        "SEC-DED double error detection");
    expect_seen(da_adj_data,      "DAEC adjacent correction inside data");
    expect_seen(da_adj_edge,      "DAEC adjacent correction across d_k/c1");
    expect_seen(da_adj_check,     "DAEC adjacent error inside check bits");
    expect_seen(da_nonadj_detect, "DAEC non-adjacent double detection");
    expect_seen(da_nonadj_alias,  "DAEC aliased non-adjacent double");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #1_000_000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_daec_correct: checks the SEC-DED-DAEC error pattern and correction
// logic of all six codes.
//
// Syndromes are worked out from the reference matrices for every single,
// every adjacent double and every non-adjacent double error pattern.
// Expected: singles and adjacent doubles (including the pair that straddles
// the last data bit and c1, and pairs inside the check bits) are corrected
// and reported as such; a non-adjacent double is handled as the brute-force
// reference decoder handles it (uncorrectable, or miscorrected when its
// syndrome equals an adjacent-pair syndrome). For the (14,8) code the
// adjacent-pair syndromes are also checked against the published Q matrix,
// which lists the row positions of the ones of d_j xor d_(j+1) (d9 = c1).
module tb_daec_correct;
  import ecc_pkg::*;
  import ecc_ref_pkg::*;

  int checks   = 0;
  int failures = 0;
  int done     = 0;

  // Q matrix of the (14,8) code: column j holds four row numbers (1-based).
  localparam int Q [4][8] = '{
    '{1, 1, 1, 3, 1, 2, 1, 1},
    '{2, 3, 4, 4, 2, 3, 2, 3},
    '{4, 5, 5, 5, 3, 4, 4, 4},
    '{5, 6, 6, 6, 4, 6, 6, 6}
  };

  for (genvar c = 0; c < ecc_pkg::NUM_CODES; c++) begin : g_code
    localparam code_e C = code_e'(c);
    localparam int N = code_n(C);
    localparam int K = code_k(C);
    localparam int R = N - K;

    logic [R-1:0] syn;
    logic [K-1:0] din, dout;
    ecc_status_e  status;

    daec_correct #(.CODE(C)) dut (
      .syndrome_i(syn), .data_i(din), .data_o(dout), .status_o(status)
    );

    // Apply error e to random data. kind: 0 none, 1 single, 2 adjacent,
    // 3 anything else (reference decoder decides).
    task automatic apply(logic [23:0] e, int kind);
      logic [K-1:0] d, exp_d;
      logic [7:0]   s;
      logic [23:0]  pat;
      int           st, exp_st;
      d   = K'($urandom());
      s   = syndrome(c, e);
      syn = s[R-1:0];
      din = d ^ e[K-1:0];
      #1;
      if (kind < 3) begin
        exp_d  = d;
        exp_st = kind;
      end else begin
        decode(c, 1'b1, s, pat, st);
        exp_d  = din ^ pat[K-1:0];
        exp_st = st;
      end
      checks++;
      if (dout !== exp_d || int'(status) != exp_st) begin
        failures++;
        $display("FAIL (%0d,%0d) e=%h dout=%h st=%0d expected %h st=%0d",
                 N, K, e, dout, status, exp_d, exp_st);
      end
    endtask

    initial begin
      for (int t = 0; t < 20; t++) apply('0, 0);
      for (int a = 0; a < N; a++) begin
        apply(24'(1) << a, 1);
        if (a + 1 < N) apply(24'(3) << a, 2);
        for (int b = a + 2; b < N; b++) apply((24'(1) << a) | (24'(1) << b), 3);
      end
      for (int t = 0; t < 300; t++) begin
        int a, b, e;
        a = $urandom() % N;
        b = (a + 1 + $urandom() % (N - 1)) % N;
        do e = $urandom() % N; while (e == a || e == b);
        apply((24'(1) << a) | (24'(1) << b) | (24'(1) << e), 3);
      end
      // Published Q matrix of (14,8): the syndrome with ones at the listed
      // rows must flip d_j and d_(j+1) (only d8 for j = 8) and report an
      // adjacent error.
      if (C == CODE_14_8) begin
        for (int j = 0; j < 8; j++) begin
          logic [K-1:0] d, flip;
          logic [R-1:0] s;
          s = '0;
          for (int q = 0; q < 4; q++) s[Q[q][j] - 1] = 1'b1;
          flip = K'(3) << j;
          d    = K'($urandom());
          syn  = s;
          din  = d ^ flip;
          #1;
          checks++;
          if (dout !== d || status != ECC_CORRECTED_ADJACENT) begin
            failures++;
            $display("FAIL Q column %0d: syn=%b dout=%h st=%0d expected %h adjacent",
                     j + 1, s, dout, status, d);
          end
        end
      end
      done++;
    end
  end

  initial begin
    wait (done == ecc_pkg::NUM_CODES);
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

// tb_secded_correct: checks the SEC-DED correction logic of all six codes.
//
// The syndrome of every single and every double error pattern is worked
// out with the reference matrices and applied together with the received
// (corrupted) data bits. Expected: a single error is corrected and
// reported as such, wherever it is; a double error is reported as
// uncorrectable and leaves the data bits untouched; a zero syndrome passes
// the data through with no error reported. Random triple errors are
// compared with the reference decoder.
module tb_secded_correct;
  import ecc_pkg::*;
  import ecc_ref_pkg::*;

  int checks   = 0;
  int failures = 0;
  int done     = 0;

  for (genvar c = 0; c < ecc_pkg::NUM_CODES; c++) begin : g_code
    localparam code_e C = code_e'(c);
    localparam int N = code_n(C);
    localparam int K = code_k(C);
    localparam int R = N - K;

    logic [R-1:0] syn;
    logic [K-1:0] din, dout;
    ecc_status_e  status;

    secded_correct #(.CODE(C)) dut (
      .syndrome_i(syn), .data_i(din), .data_o(dout), .status_o(status)
    );

    // Apply error e to random data; expect data exp_d and status exp_st.
    task automatic apply(logic [23:0] e, int weight);
      logic [K-1:0] d, exp_d;
      logic [7:0]   s;
      logic [23:0]  pat;
      int           st, exp_st;
      d   = K'($urandom());
      s   = syndrome(c, e);
      syn = s[R-1:0];
      din = d ^ e[K-1:0];
      #1;
      case (weight)
        0:       begin exp_d = d;   exp_st = 0; end
        1:       begin exp_d = d;   exp_st = 1; end
        2:       begin exp_d = din; exp_st = 3; end
        default: begin
          decode(c, 1'b0, s, pat, st);
          exp_d  = din ^ pat[K-1:0];
          exp_st = st;
        end
      endcase
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
        for (int b = a + 1; b < N; b++) apply((24'(1) << a) | (24'(1) << b), 2);
      end
      for (int t = 0; t < 300; t++) begin
        int a, b, e;
        a = $urandom() % N;
        b = (a + 1 + $urandom() % (N - 1)) % N;
        do e = $urandom() % N; while (e == a || e == b);
        apply((24'(1) << a) | (24'(1) << b) | (24'(1) << e), 3);
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

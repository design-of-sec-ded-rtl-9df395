// tb_secded_codec: end-to-end check of the SEC-DED codec for all six codes.
//
// Random data is encoded by the codec; the codeword is compared with the
// reference encoder, corrupted by an error pattern and fed back into the
// codec's read side, as a memory with upsets would. The syndrome output
// must equal the reference syndrome of the error pattern, and a single error is corrected, a double error is reported as
// uncorrectable with the data bits left as received.
module tb_secded_codec;
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

    logic [K-1:0] din, dout;
    logic [N-1:0] cw_out, cw_in;
    logic [R-1:0] syn;
    ecc_status_e  status;

    secded_codec #(.CODE(C)) dut (
      .data_i(din), .codeword_o(cw_out), .codeword_i(cw_in),
      .data_o(dout), .syndrome_o(syn), .status_o(status)
    );

    // Error pattern e, of weight w (1 or 2) or anything (w = 3).
    task automatic apply(logic [23:0] e, int w);
      logic [23:0] exp_cw, pat;
      logic [7:0]  exp_s;
      logic [K-1:0] exp_d;
      int st, exp_st;
      din = K'($urandom());
      #1;
      exp_cw = encode(c, 16'(din));
      checks++;
      if (cw_out !== exp_cw[N-1:0]) begin
        failures++;
        $display("FAIL (%0d,%0d) encode %h: %h expected %h", N, K, din, cw_out, exp_cw[N-1:0]);
      end
      cw_in = cw_out ^ e[N-1:0];
      #1;
      exp_s = syndrome(c, e);
      if (w == 0) begin
        exp_d = din; exp_st = 0;
      end else if (w == 1) begin
        exp_d = din; exp_st = 1;
      end else if (w == 2) begin
        exp_d = cw_in[K-1:0]; exp_st = 3;
      end else begin
        decode(c, 1'b0, exp_s, pat, st);
        exp_d  = cw_in[K-1:0] ^ pat[K-1:0];
        exp_st = st;
      end
      checks++;
      if (syn !== exp_s[R-1:0] || dout !== exp_d || int'(status) != exp_st) begin
        failures++;
        $display("FAIL (%0d,%0d) e=%h syn=%h dout=%h st=%0d expected %h %h st=%0d",
                 N, K, e, syn, dout, status, exp_s[R-1:0], exp_d, exp_st);
      end
    endtask

    initial begin
      for (int t = 0; t < 20; t++) apply('0, 0);
      for (int a = 0; a < N; a++) begin
        apply(24'(1) << a, 1);
        for (int b = a + 1; b < N; b++) apply((24'(1) << a) | (24'(1) << b), 2);
      end
      for (int t = 0; t < 300; t++) apply(24'($urandom()) & ((24'(1) << N) - 24'(1)), 3);
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

// tb_ecc_syndrome: checks the syndrome computation of all six codes.
//
// One syndrome unit per code. Valid codewords (built by the reference
// encoder) must give a zero syndrome; a codeword with an error vector e
// added must give the reference syndrome of e, i.e. the XOR of the H
// columns of the flipped bits. Errors of weight 1, 2 and 3 and random
// vectors are used.
module tb_ecc_syndrome;
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

    logic [N-1:0] cw;
    logic [R-1:0] syn;

    ecc_syndrome #(.CODE(C)) dut (.codeword_i(cw), .syndrome_o(syn));

    task automatic apply(logic [23:0] e);
      logic [23:0] good;
      logic [7:0]  exp_s;
      good  = encode(c, 16'($urandom()) & ((16'(1) << K) - 16'(1)));
      cw    = N'(good ^ e);
      exp_s = syndrome(c, e & ((24'(1) << N) - 24'(1)));
      #1;
      checks++;
      if (syn !== exp_s[R-1:0]) begin
        failures++;
        $display("FAIL (%0d,%0d) e=%h syn=%h expected %h", N, K, e, syn, exp_s[R-1:0]);
      end
    endtask

    initial begin
      for (int t = 0; t < 50; t++) apply('0);
      for (int a = 0; a < N; a++) begin
        apply(24'(1) << a);
        for (int b = a + 1; b < N; b++) apply((24'(1) << a) | (24'(1) << b));
      end
      for (int t = 0; t < 500; t++) begin
        apply((24'(1) << ($urandom() % N)) ^ (24'(1) << ($urandom() % N))
              ^ (24'(1) << ($urandom() % N)));
        apply(24'($urandom()));
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

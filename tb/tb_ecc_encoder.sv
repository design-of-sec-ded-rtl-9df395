// tb_ecc_encoder: checks the check-bit generator of all six codes.
//
// One encoder per code. Every data word is applied (random words for the
// 16-bit code) and the codeword is compared with the reference encoder,
// which works from a separately typed copy of the H matrices. For (8,3)
// the check bits are also compared with the published equations
// c1 = d1^d2, c2 = d2, c3 = d2^d3, c4 = c5 = d1^d3.
module tb_ecc_encoder;
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

    logic [K-1:0] data;
    logic [R-1:0] check;
    logic [N-1:0] cw;

    ecc_encoder #(.CODE(C)) dut (.data_i(data), .check_o(check), .codeword_o(cw));

    task automatic apply(logic [K-1:0] d);
      logic [23:0] exp_cw;
      data = d;
      #1;
      exp_cw = encode(c, 16'(d));
      checks++;
      if (cw !== exp_cw[N-1:0] || check !== exp_cw[N-1:K]) begin
        failures++;
        $display("FAIL (%0d,%0d) d=%h cw=%h expected %h", N, K, d, cw, exp_cw[N-1:0]);
      end
      if (c == 0) begin
        logic [4:0] eq;
        eq[0] = d[0] ^ d[1];
        eq[1] = d[1];
        eq[2] = d[1] ^ d[2];
        eq[3] = d[0] ^ d[2];
        eq[4] = d[0] ^ d[2];
        checks++;
        if (5'(check) !== eq) begin
          failures++;
          $display("FAIL (8,3) equations d=%b check=%b expected %b", d, check, eq);
        end
      end
    endtask

    initial begin
      if (K <= 8) begin
        for (int v = 0; v < (1 << K); v++) apply(K'(v));
      end else begin
        apply('0);
        apply('1);
        for (int b = 0; b < K; b++) apply(K'(1) << b);
        for (int t = 0; t < 4000; t++) apply(K'($urandom()));
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

// Testbench of dts (L = 8): random candidate metrics, validity and
// thresholds (including +infinity); the keep flags must follow DTS.1-3
// with the band filled in candidate-index order, and frozen leaves must
// keep every valid candidate.
module tb_dts;
  localparam int L = 8, PW = 8;
  logic [PW-1:0] cand_pm [2*L];
  logic          cand_valid [2*L], keep [2*L], frozen;
  logic [PW:0]   at, rt;
  logic [4:0]    n_accept, n_band, n_reject;
  int checks = 0, failures = 0;

  dts #(.L(L), .PM_W(PW)) dut (.*);

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int a, r, acc, room, kept;
      a = $urandom_range(0, 60); r = a + $urandom_range(0, 40);
      if ($urandom_range(0, 9) == 0) a = 256;
      if ($urandom_range(0, 9) == 0) r = 256;
      at = (PW+1)'(a); rt = (PW+1)'(r);
      frozen = ($urandom_range(0, 7) == 0);
      for (int c = 0; c < 2*L; c++) begin
        cand_pm[c] = PW'($urandom_range(0, 100));
        cand_valid[c] = ($urandom_range(0, 7) != 0);
      end
      #1;
      acc = 0;
      for (int c = 0; c < 2*L; c++) if (cand_valid[c] && cand_pm[c] < a) acc++;
      room = (acc < L) ? L - acc : 0;
      kept = 0;
      for (int c = 0; c < 2*L; c++) begin
        bit e;
        if (frozen) e = cand_valid[c];
        else if (cand_valid[c] && cand_pm[c] < a) e = 1;
        else if (cand_valid[c] && cand_pm[c] <= r && room > 0) begin e = 1; room--; end
        else e = 0;
        checks++;
        if (keep[c] !== e) begin failures++; $display("FAIL t=%0d cand %0d keep=%0b exp %0b", t, c, keep[c], e); end
      end
      checks++;
      if (int'(n_accept) != acc) begin failures++; $display("FAIL n_accept"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

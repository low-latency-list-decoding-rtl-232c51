// Testbench of crc_check (N = 64, L = 4, CRC-16): rows are random words,
// some carrying a correct CRC over their information bits; the output must
// be the passing valid row with the smallest metric, or the valid row with
// the smallest metric when none passes, one cycle after start.
module tb_crc_check;
  localparam int N = 64, L = 4, PW = 8;
  logic          clk = 0, start, out_valid, crc_ok;
  logic [N-1:0]  frozen, u_hat;
  logic [N-1:0]  rows [L];
  logic [PW-1:0] pm [L];
  logic          valid [L];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  crc_check #(.N(N), .L(L), .PM_W(PW)) dut (.*);

  function automatic logic [15:0] step(logic [15:0] r, logic b);
    return (r[15] ^ b) ? ((r << 1) ^ 16'h1021) : (r << 1);
  endfunction

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    start = 0;
    for (int t = 0; t < 300; t++) begin
      int ninfo, bp, ba; bit pass [L]; bit fp, fa;
      @(negedge clk);
      for (int i = 0; i < N; i++) frozen[i] = ($urandom_range(0, 2) == 0);
      ninfo = 0;
      for (int i = 0; i < N; i++) if (!frozen[i]) ninfo++;
      for (int l = 0; l < L; l++) begin
        logic [15:0] c; int cnt;
        rows[l] = {$urandom, $urandom};
        for (int i = 0; i < N; i++) if (frozen[i]) rows[l][i] = 0;
        pass[l] = ($urandom_range(0, 2) == 0);
        if (pass[l]) begin
          c = '0; cnt = 0;
          for (int i = 0; i < N; i++) if (!frozen[i]) begin
            if (cnt < ninfo - 16) c = step(c, rows[l][i]);
            else rows[l][i] = c[15 - (cnt - (ninfo - 16))];
            cnt++;
          end
        end
        pm[l] = PW'($urandom_range(0, 20));
        valid[l] = ($urandom_range(0, 4) != 0);
      end
      if (t == 0) for (int l = 0; l < L; l++) valid[l] = 1;
      fp = 0; fa = 0; bp = 0; ba = 0;
      for (int l = 0; l < L; l++) begin
        if (pass[l] && valid[l] && (!fp || pm[l] < pm[bp])) begin bp = l; fp = 1; end
        if (valid[l] && (!fa || pm[l] < pm[ba])) begin ba = l; fa = 1; end
      end
      start = 1;
      @(negedge clk);
      start = 0;
      checks++;
      if (!out_valid || crc_ok != fp || (fa && u_hat !== (fp ? rows[bp] : rows[ba]))) begin
        failures++; $display("FAIL t=%0d crc_ok=%0b exp %0b", t, crc_ok, fp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

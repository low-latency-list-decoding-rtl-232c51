// Testbench of partial_sum_memory (N = 32, L = 2, M = 4). Two paths decide
// random bits leaf by leaf; at each decision the slots take crossed or
// straight parents, and pairs of frozen leaves are sometimes applied as a
// frozen sibling. Before every g node the partial sums read for each path
// must equal the left sibling's bits of that path re-encoded with
// F^{(x)k}, computed here from the model's decided bits.
module tb_partial_sum_memory;
  localparam int N = 32, L = 2, M = 4, LOGN = 5;
  logic            clk = 0, init, copy_en, fs_en;
  logic [LOGN-1:0] leaf, beta_depth, beta_chunk;
  logic            parent [L];
  logic            bit_val [L], slot_valid [L];
  logic            beta [L][M];
  logic [N-1:0]    u [L];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  partial_sum_memory #(.N(N), .L(L), .M(M)) dut (.*);

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic check_g(int i);
    for (int d = 1; d <= LOGN; d++) begin
      int S, j;
      S = N >> d; j = i >> (LOGN - d);
      if ((j % 2 == 1) && (i % S == 0)) begin
        for (int c = 0; c < ((S > M) ? S / M : 1); c++) begin
          beta_depth = LOGN'(d); beta_chunk = LOGN'(c);
          #1;
          for (int l = 0; l < L; l++) begin
            logic [N-1:0] v;
            v = '0;
            for (int q = 0; q < S; q++) v[q] = u[l][(j - 1) * S + q];
            for (int h = 1; h < S; h = h * 2)
              for (int jj = 0; jj < S; jj += 2 * h)
                for (int q = jj; q < jj + h; q++) v[q] = v[q] ^ v[q + h];
            for (int k = 0; k < M && c * M + k < S; k++) begin
              checks++;
              if (beta[l][k] !== v[c * M + k]) begin
                failures++; $display("FAIL leaf %0d depth %0d path %0d lane %0d", i, d, l, c*M+k);
              end
            end
          end
        end
      end
    end
  endtask

  initial begin
    copy_en = 0; fs_en = 0; leaf = '0; beta_depth = 1; beta_chunk = '0;
    for (int s = 0; s < L; s++) begin parent[s] = 0; bit_val[s] = 0; slot_valid[s] = 1; end
    for (int rep = 0; rep < 6; rep++) begin
      int i;
      @(negedge clk); init = 1;
      @(negedge clk); init = 0;
      for (int l = 0; l < L; l++) u[l] = '0;
      i = 0;
      while (i < N) begin
        check_g(i);
        leaf = LOGN'(i);
        if (i % 2 == 0 && $urandom_range(0, 3) == 0) begin
          fs_en = 1;
          @(negedge clk);
          fs_en = 0;
          i += 2;
        end else begin
          logic [N-1:0] m2 [L];
          copy_en = 1;
          for (int s = 0; s < L; s++) begin
            parent[s] = $urandom_range(0, 1); bit_val[s] = $urandom_range(0, 1);
            m2[s] = u[parent[s]]; m2[s][i] = bit_val[s];
          end
          u = m2;
          @(negedge clk);
          copy_en = 0;
          i += 1;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Testbench of llr_memory (N = 32, L = 2, M = 4): loads channel LLRs,
// writes random rows into every depth and chunk of both banks, and reads
// every (parent depth, chunk) back. The expected words come from a model
// that keeps one array per depth, so the packed addressing of the memory
// is checked independently.
module tb_llr_memory;
  localparam int N = 32, L = 2, M = 4, W = 6, LOGN = 5;
  logic                clk = 0;
  logic                ch_we, wr_en;
  logic [LOGN-1:0]     ch_addr, rd_depth, rd_chunk, wr_depth, wr_chunk;
  logic signed [W-1:0] ch_data;
  logic signed [W-1:0] ch_a [M], ch_b [M], bank_a [L][M], bank_b [L][M], wr_data [L][M];
  int model [L][LOGN][N];   // model[l][d][k], depth 0 = channel
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  llr_memory #(.N(N), .L(L), .M(M), .LLR_W(W)) dut (.*);

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    ch_we = 0; wr_en = 0; ch_addr = '0; ch_data = '0; wr_depth = 1; wr_chunk = '0;
    rd_depth = '0; rd_chunk = '0;
    for (int l = 0; l < L; l++) for (int k = 0; k < M; k++) wr_data[l][k] = '0;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      ch_we = 1; ch_addr = LOGN'(i); ch_data = W'($urandom);
      for (int l = 0; l < L; l++) model[l][0][i] = int'(ch_data);
    end
    @(negedge clk); ch_we = 0;
    for (int rep = 0; rep < 2; rep++)
      for (int d = 1; d < LOGN; d++) begin
        int sz, nch;
        sz = N >> d; nch = (sz > M) ? sz / M : 1;
        for (int c = 0; c < nch; c++) begin
          @(negedge clk);
          wr_en = 1; wr_depth = LOGN'(d); wr_chunk = LOGN'(c);
          for (int l = 0; l < L; l++)
            for (int k = 0; k < M; k++) begin
              wr_data[l][k] = W'($urandom);
              if (k < sz) model[l][d][c * M + k] = int'(wr_data[l][k]);
            end
        end
        @(negedge clk); wr_en = 0;
        // read back every parent depth
        for (int p = 0; p <= d; p++) begin
          int half, nc;
          half = N >> (p + 1); nc = (half > M) ? half / M : 1;
          for (int c = 0; c < nc; c++) begin
            rd_depth = LOGN'(p); rd_chunk = LOGN'(c);
            #1;
            for (int k = 0; k < M && k < half; k++) begin
              checks++;
              if (int'(ch_a[k]) != model[0][0][c*M+k] || int'(ch_b[k]) != model[0][0][half+c*M+k]) begin
                failures++; $display("FAIL channel read c=%0d k=%0d", c, k);
              end
              if (p > 0) for (int l = 0; l < L; l++) begin
                checks++;
                if (int'(bank_a[l][k]) != model[l][p][c*M+k] || int'(bank_b[l][k]) != model[l][p][half+c*M+k]) begin
                  failures++; $display("FAIL bank %0d depth %0d chunk %0d lane %0d", l, p, c, k);
                end
              end
            end
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Testbench of controller (N = 64, M = 4): for random frozen masks the
// cycle-by-cycle sequence of states, node depths, chunks and f/g choices is
// compared with a schedule generated here from the depth-first scheduling
// tree, and the decoding latency with 4N + (n-2-log2 M)N/M - 5FS.
module tb_controller;
  import polar_pkg::*;
  localparam int N = 64, M = 4, LOGN = 6;
  logic            clk = 0, rst_n, start;
  logic [N-1:0]    frozen;
  ctrl_state_e     state;
  logic            init, busy, node_en, is_g, mem_we, leaf_we;
  logic [LOGN-1:0] depth, chunk, rd_depth, rd_chunk, leaf;
  logic            frozen_leaf, dts_commit, lcp, fs_en, crc_start;
  int checks = 0, failures = 0;

  typedef struct { ctrl_state_e st; int d; int c; bit g; int lf; } step_t;
  step_t sched [$];

  always #5 clk = ~clk;
  controller #(.N(N), .M(M)) dut (.*);

  initial begin
    #10000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic build_sched(output int fs);
    int i;
    sched.delete();
    fs = 0;
    i = 0;
    while (i < N) begin
      int d0; bit fsib;
      d0 = 1;
      if (i != 0) for (int k = LOGN - 1; k >= 0; k--) if ((i >> k) & 1) d0 = LOGN - k;
      fsib = (i % 2 == 0) && frozen[i] && frozen[i+1];
      for (int d = d0; d <= (fsib ? LOGN - 1 : LOGN); d++) begin
        int sz;
        sz = N >> d;
        for (int c = 0; c < ((sz > M) ? sz / M : 1); c++)
          sched.push_back('{ST_NODE, d, c, ((i >> (LOGN - d)) & 1), i});
      end
      if (fsib) begin
        sched.push_back('{ST_FSPMU, 0, 0, 0, i}); fs++; i += 2;
      end else begin
        sched.push_back('{ST_DTS, 0, 0, 0, i});
        sched.push_back('{ST_LCP, 0, 0, 0, i}); i += 1;
      end
    end
    sched.push_back('{ST_CRC, 0, 0, 0, 0});
  endtask

  initial begin
    start = 0; rst_n = 0; frozen = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 8; t++) begin
      int fs, ncyc;
      for (int i = 0; i < N; i++) frozen[i] = (t == 0) ? 1'b0 : ($urandom_range(0, 1) == 1);
      build_sched(fs);
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      ncyc = 0;
      foreach (sched[s]) begin
        checks++;
        if (state != sched[s].st ||
            (sched[s].st == ST_NODE && (int'(depth) != sched[s].d || int'(chunk) != sched[s].c || is_g != sched[s].g)) ||
            (sched[s].st != ST_CRC && int'(leaf) != sched[s].lf)) begin
          failures++;
          if (failures < 10) $display("FAIL step %0d: state %0d depth %0d chunk %0d g %0b leaf %0d; expected %0d %0d %0d %0b %0d",
                                      s, state, depth, chunk, is_g, leaf, sched[s].st, sched[s].d, sched[s].c, sched[s].g, sched[s].lf);
        end
        if (state != ST_CRC) ncyc++;
        @(negedge clk);
      end
      checks++;
      if (busy || ncyc != 4*N + (LOGN - 2 - $clog2(M)) * N / M - 5 * fs) begin
        failures++; $display("FAIL latency %0d fs %0d", ncyc, fs);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Testbench of lazy_copy (L = 4): random keep masks (also with more than L
// flags); slot s must hold the s-th kept candidate, empty slots must be
// invalid, and after commit the registered parent/bit/valid must match.
module tb_lazy_copy;
  localparam int L = 4;
  logic       clk = 0, commit;
  logic       keep [2*L];
  logic [2:0] sel [L];
  logic       sel_valid [L];
  logic [1:0] parent [L];
  logic       bit_val [L], slot_valid [L];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  lazy_copy #(.L(L)) dut (.*);

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    commit = 0;
    for (int t = 0; t < 500; t++) begin
      int exp_c [L]; bit exp_v [L]; int n;
      @(negedge clk);
      for (int c = 0; c < 2*L; c++) keep[c] = ($urandom_range(0, 2) == 0);
      n = 0;
      for (int s = 0; s < L; s++) begin exp_c[s] = 0; exp_v[s] = 0; end
      for (int c = 0; c < 2*L; c++) if (keep[c] && n < L) begin exp_c[n] = c; exp_v[n] = 1; n++; end
      commit = 1;
      #1;
      for (int s = 0; s < L; s++) begin
        checks++;
        if (sel_valid[s] != exp_v[s] || (exp_v[s] && int'(sel[s]) != exp_c[s])) begin
          failures++; $display("FAIL slot %0d sel=%0d/%0b exp %0d/%0b", s, sel[s], sel_valid[s], exp_c[s], exp_v[s]);
        end
      end
      @(negedge clk);
      commit = 0;
      for (int s = 0; s < L; s++) begin
        checks++;
        if (slot_valid[s] != exp_v[s] ||
            (exp_v[s] && (int'(parent[s]) != exp_c[s] / 2 || bit_val[s] != exp_c[s] % 2))) begin
          failures++; $display("FAIL registered slot %0d", s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Testbench of path_memory (N = 16, L = 4): random parents, bits and
// valid flags for every leaf, rows compared with a model after each copy.
module tb_path_memory;
  localparam int N = 16, L = 4, LOGN = 4;
  logic            clk = 0, init, copy_en;
  logic [LOGN-1:0] leaf;
  logic [1:0]      parent [L];
  logic            bit_val [L], slot_valid [L];
  logic [N-1:0]    rows [L];
  logic [N-1:0]    model [L];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  path_memory #(.N(N), .L(L)) dut (.*);

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    copy_en = 0; leaf = '0;
    for (int s = 0; s < L; s++) begin parent[s] = '0; bit_val[s] = 0; slot_valid[s] = 0; end
    @(negedge clk); init = 1;
    @(negedge clk); init = 0;
    for (int l = 0; l < L; l++) model[l] = '0;
    for (int rep = 0; rep < 20; rep++)
      for (int i = 0; i < N; i++) begin
        logic [N-1:0] m2 [L];
        m2 = model;
        copy_en = 1; leaf = LOGN'(i);
        for (int s = 0; s < L; s++) begin
          parent[s] = 2'($urandom); bit_val[s] = $urandom_range(0, 1);
          slot_valid[s] = ($urandom_range(0, 4) != 0);
          if (slot_valid[s]) begin m2[s] = model[parent[s]]; m2[s][i] = bit_val[s]; end
        end
        model = m2;
        @(negedge clk);
        copy_en = 0;
        for (int l = 0; l < L; l++) begin
          checks++;
          if (rows[l] !== model[l]) begin failures++; $display("FAIL row %0d", l); end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

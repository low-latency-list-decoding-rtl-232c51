// Testbench of pointer_memory (N = 16, L = 4): after init every pointer is
// the path's own bank; random depth writes and random lazy copies are
// applied to the memory and to a model, and all pointers are compared.
module tb_pointer_memory;
  localparam int N = 16, L = 4, LOGN = 4;
  logic            clk = 0, init, node_we, copy_en;
  logic [LOGN-1:0] node_depth, rd_depth;
  logic [1:0]      parent [L], rd_ptr [L];
  logic            slot_valid [L];
  int model [L][LOGN];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  pointer_memory #(.N(N), .L(L)) dut (.*);

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic compare();
    for (int d = 1; d < LOGN; d++) begin
      rd_depth = LOGN'(d);
      #1;
      for (int l = 0; l < L; l++) begin
        checks++;
        if (int'(rd_ptr[l]) != model[l][d]) begin
          failures++; $display("FAIL ptr[%0d][%0d]=%0d exp %0d", l, d, rd_ptr[l], model[l][d]);
        end
      end
    end
  endtask

  initial begin
    node_we = 0; copy_en = 0; node_depth = '0; rd_depth = '0;
    for (int s = 0; s < L; s++) begin parent[s] = '0; slot_valid[s] = 0; end
    @(negedge clk); init = 1;
    @(negedge clk); init = 0;
    for (int l = 0; l < L; l++) for (int d = 0; d < LOGN; d++) model[l][d] = l;
    compare();
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      node_we = 0; copy_en = 0;
      if ($urandom_range(0, 1)) begin
        int m2 [L][LOGN];
        m2 = model;
        copy_en = 1;
        for (int s = 0; s < L; s++) begin
          parent[s] = 2'($urandom); slot_valid[s] = ($urandom_range(0, 3) != 0);
          if (slot_valid[s]) for (int d = 0; d < LOGN; d++) m2[s][d] = model[parent[s]][d];
        end
        model = m2;
      end else begin
        node_we = 1; node_depth = LOGN'($urandom_range(1, LOGN - 1));
        for (int l = 0; l < L; l++) model[l][node_depth] = l;
      end
      @(negedge clk);
      node_we = 0; copy_en = 0;
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

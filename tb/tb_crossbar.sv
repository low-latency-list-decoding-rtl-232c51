// Testbench of crossbar: random bank contents and pointers; every path
// must see the channel LLRs when reading depth 0 and the bank its pointer
// names otherwise.
module tb_crossbar;
  localparam int L = 4, M = 3, W = 6;
  logic                from_channel;
  logic [1:0]          ptr [L];
  logic signed [W-1:0] ch_a [M], ch_b [M];
  logic signed [W-1:0] bank_a [L][M], bank_b [L][M], a [L][M], b [L][M];
  int checks = 0, failures = 0;

  crossbar #(.L(L), .M(M), .LLR_W(W)) dut (.*);

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      from_channel = ($urandom_range(0, 3) == 0);
      for (int k = 0; k < M; k++) begin
        ch_a[k] = W'($urandom); ch_b[k] = W'($urandom);
      end
      for (int l = 0; l < L; l++) begin
        ptr[l] = 2'($urandom);
        for (int k = 0; k < M; k++) begin
          bank_a[l][k] = W'($urandom); bank_b[l][k] = W'($urandom);
        end
      end
      #1;
      for (int l = 0; l < L; l++)
        for (int k = 0; k < M; k++) begin
          checks++;
          if (from_channel ? (a[l][k] !== ch_a[k] || b[l][k] !== ch_b[k])
                           : (a[l][k] !== bank_a[ptr[l]][k] || b[l][k] !== bank_b[ptr[l]][k])) begin
            failures++;
            $display("FAIL path %0d lane %0d", l, k);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

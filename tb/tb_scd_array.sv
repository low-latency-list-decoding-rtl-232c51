// Testbench of scd_array (and pe): random LLR pairs, partial sums and
// operations on every lane of 3 paths x 4 elements, compared with the
// min-sum f and the saturating g computed here with integers.
module tb_scd_array;
  localparam int L = 3, M = 4, W = 6, LMAX = 31;
  logic                is_g;
  logic signed [W-1:0] a [L][M], b [L][M], y [L][M];
  logic                beta [L][M];
  int checks = 0, failures = 0;

  scd_array #(.L(L), .M(M), .LLR_W(W)) dut (.is_g, .a, .b, .beta, .y);

  function automatic int ref_fg(int x, int z, bit bt, bit g);
    int mx, mz, s;
    if (!g) begin
      mx = (x < 0) ? -x : x; mz = (z < 0) ? -z : z;
      if (mx > LMAX) mx = LMAX;
      if (mz > LMAX) mz = LMAX;
      s = (mx < mz) ? mx : mz;
      return ((x < 0) != (z < 0)) ? -s : s;
    end
    s = bt ? z - x : z + x;
    return (s > LMAX) ? LMAX : (s < -LMAX) ? -LMAX : s;
  endfunction

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      is_g = t[0];
      for (int l = 0; l < L; l++)
        for (int k = 0; k < M; k++) begin
          a[l][k] = W'($urandom_range(0, 63));
          b[l][k] = W'($urandom_range(0, 63));
          if (t < 4) begin a[l][k] = -32; b[l][k] = 31 - 2 * k; end
          beta[l][k] = $urandom_range(0, 1);
        end
      #1;
      for (int l = 0; l < L; l++)
        for (int k = 0; k < M; k++) begin
          int e;
          e = ref_fg(int'(a[l][k]), int'(b[l][k]), beta[l][k], is_g);
          checks++;
          if (int'(y[l][k]) != e) begin
            failures++;
            if (failures < 10) $display("FAIL g=%0b a=%0d b=%0d beta=%0b y=%0d exp=%0d",
                                        is_g, a[l][k], b[l][k], beta[l][k], y[l][k], e);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

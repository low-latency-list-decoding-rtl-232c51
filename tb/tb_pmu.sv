// Testbench of pmu (L = 4): random leaf LLRs give candidate metrics that
// must follow eq. (4) with saturation; random slot selections are
// committed and frozen-sibling updates (eq. (12)) applied; the register
// contents, valid flags and +infinity coding are compared with a model.
module tb_pmu;
  localparam int L = 4, W = 6, PW = 8;
  logic                clk = 0, init, leaf_we, frozen_leaf, commit, fs_en;
  logic signed [W-1:0] leaf_llr_in [L], fs_a [L], fs_b [L];
  logic [2:0]          sel [L];
  logic                sel_valid [L];
  logic [PW-1:0]       cand_pm [2*L], pm [L];
  logic                cand_valid [2*L], valid [L];
  logic [PW:0]         pm_inf [L];
  int mpm [L]; bit mval [L]; int lv [L];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  pmu #(.L(L), .LLR_W(W), .PM_W(PW)) dut (.*);

  function automatic int sat(int v); return v > 255 ? 255 : v; endfunction
  function automatic int absn(int v); return v < 0 ? -v : v; endfunction

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic check_regs();
    for (int l = 0; l < L; l++) begin
      checks++;
      if (int'(pm[l]) != mpm[l] || valid[l] != mval[l] ||
          pm_inf[l] != (mval[l] ? (PW+1)'(mpm[l]) : (PW+1)'(256))) begin
        failures++; $display("FAIL reg %0d pm=%0d exp %0d valid=%0b exp %0b", l, pm[l], mpm[l], valid[l], mval[l]);
      end
    end
  endtask

  initial begin
    leaf_we = 0; frozen_leaf = 0; commit = 0; fs_en = 0;
    for (int l = 0; l < L; l++) begin leaf_llr_in[l] = '0; fs_a[l] = '0; fs_b[l] = '0; sel[l] = '0; sel_valid[l] = 0; end
    @(negedge clk); init = 1;
    @(negedge clk); init = 0;
    for (int l = 0; l < L; l++) begin mpm[l] = 0; mval[l] = (l == 0); end
    check_regs();
    for (int t = 0; t < 300; t++) begin
      // load leaf LLRs
      leaf_we = 1;
      for (int l = 0; l < L; l++) begin
        lv[l] = $urandom_range(0, 62) - 31; leaf_llr_in[l] = W'(lv[l]);
      end
      @(negedge clk); leaf_we = 0;
      frozen_leaf = ($urandom_range(0, 3) == 0);
      #1;
      for (int l = 0; l < L; l++) begin
        int e0, e1;
        e0 = sat(mpm[l] + (lv[l] < 0 ? -lv[l] : 0));
        e1 = sat(mpm[l] + (lv[l] < 0 ? 0 : lv[l]));
        checks++;
        if (int'(cand_pm[2*l]) != e0 || int'(cand_pm[2*l+1]) != e1 ||
            cand_valid[2*l] != mval[l] || cand_valid[2*l+1] != (mval[l] && !frozen_leaf)) begin
          failures++; $display("FAIL cand path %0d: %0d %0d exp %0d %0d", l, cand_pm[2*l], cand_pm[2*l+1], e0, e1);
        end
      end
      if ($urandom_range(0, 2) != 0) begin
        int npm [L]; bit nv [L];
        commit = 1;
        for (int s = 0; s < L; s++) begin
          sel[s] = 3'($urandom); sel_valid[s] = $urandom_range(0, 1);
          npm[s] = int'(cand_pm[sel[s]]); nv[s] = sel_valid[s];
        end
        @(negedge clk); commit = 0;
        mpm = npm; mval = nv;
      end else begin
        fs_en = 1;
        for (int l = 0; l < L; l++) begin
          int x, y;
          x = $urandom_range(0, 62) - 31; y = $urandom_range(0, 62) - 31;
          fs_a[l] = W'(x); fs_b[l] = W'(y);
          mpm[l] = sat(mpm[l] + (x < 0 ? -x : 0) + (y < 0 ? -y : 0));
        end
        @(negedge clk); fs_en = 0;
      end
      check_regs();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

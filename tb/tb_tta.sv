// Testbench of tta at L = 16 (second maximum) and L = 8 (maximum): random
// metrics with repeats and +infinity entries; two cycles later AT must be
// the element of rank L/2 of the sorted inputs and RT the element of rank
// L-2 (L = 16) or L-1 (L = 8), taken from an explicit sort.
module tb_tta;
  localparam int PW = 8;
  logic        clk = 0;
  logic [PW:0] pm16 [16], pm8 [8], at16, rt16, at8, rt8;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  tta #(.L(16), .PM_W(PW), .RT_SECOND_MAX(1'b1)) dut16 (.clk, .pm_in(pm16), .at(at16), .rt(rt16));
  tta #(.L(8),  .PM_W(PW), .RT_SECOND_MAX(1'b0)) dut8  (.clk, .pm_in(pm8),  .at(at8),  .rt(rt8));

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int t = 0; t < 1000; t++) begin
      int s16 [16], s8 [8];
      int span;
      span = (t % 3 == 0) ? 8 : 255;
      @(negedge clk);
      for (int i = 0; i < 16; i++) begin
        s16[i] = ($urandom_range(0, 9) == 0) ? 256 : $urandom_range(0, span);
        pm16[i] = (PW+1)'(s16[i]);
      end
      for (int i = 0; i < 8; i++) begin
        s8[i] = ($urandom_range(0, 9) == 0) ? 256 : $urandom_range(0, span);
        pm8[i] = (PW+1)'(s8[i]);
      end
      s16.sort(); s8.sort();
      @(negedge clk); @(negedge clk);
      checks += 2;
      if (int'(at16) != s16[8] || int'(rt16) != s16[14]) begin
        failures++; $display("FAIL L=16 at=%0d exp %0d rt=%0d exp %0d", at16, s16[8], rt16, s16[14]);
      end
      if (int'(at8) != s8[4] || int'(rt8) != s8[7]) begin
        failures++; $display("FAIL L=8 at=%0d exp %0d rt=%0d exp %0d", at8, s8[4], rt8, s8[7]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tta: threshold tracking, AT = pm_{L/2} and RT = pm_{L-2} (or pm_{L-1}).
//
// The L registered path metrics are split into two halves, each sorted by a
// radix-L/2 sorter (first pipeline register). The median network then
// halves the candidate set log2(L) times: at every stage the two halves A
// and B of the current set are each sorted, their elements at position h/2
// (h = half size) are compared, and by the median property of two sorted
// lists the lower half of A and upper half of B are kept when
// A[h/2] > B[h/2], the upper half of A and lower half of B otherwise. The
// last stage keeps the larger of two values, which is the element of rank
// L/2 (0-based) of the L inputs, the acceptance threshold AT. The rejection
// threshold is the maximum of both sorted halves or, with RT_SECOND_MAX = 1,
// the second maximum found by two compare/mux steps on the top two elements
// of each half. Results are registered again, so AT/RT follow a metric
// change after two cycles; the thresholds are needed only at the next leaf,
// at least three cycles later. Values are PM_W+1 bits, an empty list slot
// being +infinity. The structure (two sorters, L-1 muxes, log2(L)
// comparators, and the second-maximum circuit) follows the paper; which
// half is kept on a>b is derived from the median property, and the sorter
// network and the two pipeline registers are this design's choices.
module tta #(
  parameter int unsigned L             = 16,
  parameter int unsigned PM_W          = 8,
  parameter bit          RT_SECOND_MAX = 1'b1
) (
  input  logic          clk,
  input  logic [PM_W:0] pm_in [L],
  output logic [PM_W:0] at,
  output logic [PM_W:0] rt
);
  localparam int unsigned H  = L / 2;
  localparam int unsigned K  = $clog2(L);
  localparam int unsigned DW = PM_W + 1;

  logic [DW-1:0] grp_a [H], grp_b [H];
  logic [DW-1:0] srt_a [H], srt_b [H];
  logic [DW-1:0] reg_a [H], reg_b [H];

  always_comb begin
    for (int i = 0; i < H; i++) begin
      grp_a[i] = pm_in[i];
      grp_b[i] = pm_in[H + i];
    end
  end

  sorter #(.W(H), .DW(DW)) u_sort_a (.in(grp_a), .out(srt_a));
  sorter #(.W(H), .DW(DW)) u_sort_b (.in(grp_b), .out(srt_b));

  always_ff @(posedge clk) begin
    reg_a <= srt_a;
    reg_b <= srt_b;
  end

  // median network: w[k] holds 2^k values, {A (2^(k-1)), B (2^(k-1))}
  logic [DW-1:0] w [K+1][L];
  always_comb begin
    for (int j = 0; j < L; j++) w[K][j] = (j < H) ? reg_a[j] : reg_b[j - H];
    for (int k = K; k >= 2; k--) begin
      int h;
      logic a_gt_b;
      h = 1 << (k - 1);
      a_gt_b = w[k][h/2] > w[k][h + h/2];
      for (int j = 0; j < L; j++) w[k-1][j] = '0;
      for (int j = 0; j < h / 2; j++) begin
        w[k-1][j]       = a_gt_b ? w[k][j]           : w[k][h/2 + j];
        w[k-1][h/2 + j] = a_gt_b ? w[k][h + h/2 + j] : w[k][h + j];
      end
    end
    for (int j = 0; j < L; j++) w[0][j] = '0;
  end

  logic [DW-1:0] at_c, rt_c;
  always_comb begin
    logic          c1, c2;
    logic [DW-1:0] x, y;
    at_c = (w[1][0] > w[1][1]) ? w[1][0] : w[1][1];
    if (!RT_SECOND_MAX || H < 2) begin
      rt_c = (reg_a[H-1] > reg_b[H-1]) ? reg_a[H-1] : reg_b[H-1];
    end else begin
      c1   = reg_a[H-1] > reg_b[H-1];
      x    = c1 ? reg_a[H-2] : reg_a[H-1];
      y    = c1 ? reg_b[H-1] : reg_b[H-2];
      c2   = x > y;
      rt_c = c2 ? x : y;
    end
  end

  always_ff @(posedge clk) begin
    at <= at_c;
    rt <= rt_c;
  end
endmodule

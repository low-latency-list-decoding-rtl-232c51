// pmu: path metric update and the path metric register of the list.
//
// The leaf LLR L_i of every path is captured in leaf_llr when the SC
// datapaths finish a leaf (leaf_we). From it the unit forms the 2L extended
// metrics of eq. (4): candidate 2l+u is pm_l when u equals the hard decision
// of L_i (0 for L_i >= 0) and pm_l + |L_i| otherwise. On a frozen leaf only
// the u = 0 candidates are valid. In the pruning cycle (commit) slot s of
// the register takes candidate sel[s] chosen by the DTS and lazy-copy logic.
// For a frozen sibling (fs_en, both bits of a leaf pair frozen) the metric
// is updated in one cycle from the two parent LLRs fs_a, fs_b of depth n-1
// (eq. (12)): pm += [fs_a<0]|fs_a| + [fs_b<0]|fs_b|. Metrics are PM_W-bit
// unsigned and saturate. Every slot has a valid bit; an empty slot is given
// to the threshold tracker as +infinity (bit PM_W set in pm_inf). init clears
// the metrics and leaves only slot 0 valid.
// Eq. (4) and eq. (12) are the paper's; saturation and the valid bits are
// this design's choices.
module pmu #(
  parameter int unsigned L     = 16,
  parameter int unsigned LLR_W = 6,
  parameter int unsigned PM_W  = 8,
  localparam int unsigned CW   = $clog2(2 * L)
) (
  input  logic                    clk,
  input  logic                    init,
  input  logic                    leaf_we,
  input  logic signed [LLR_W-1:0] leaf_llr_in [L],
  input  logic                    frozen_leaf,
  input  logic                    commit,
  input  logic [CW-1:0]           sel         [L],
  input  logic                    sel_valid   [L],
  input  logic                    fs_en,
  input  logic signed [LLR_W-1:0] fs_a        [L],
  input  logic signed [LLR_W-1:0] fs_b        [L],
  output logic [PM_W-1:0]         cand_pm     [2*L],
  output logic                    cand_valid  [2*L],
  output logic [PM_W-1:0]         pm          [L],
  output logic                    valid       [L],
  output logic [PM_W:0]           pm_inf      [L]
);
  localparam logic [PM_W:0] PM_MAX = (PM_W+1)'((1 << PM_W) - 1);

  logic signed [LLR_W-1:0] leaf_llr [L];

  function automatic logic [LLR_W:0] mag(input logic signed [LLR_W-1:0] x);
    return x[LLR_W-1] ? (LLR_W+1)'(-(LLR_W+1)'(x)) : (LLR_W+1)'(x);
  endfunction

  function automatic logic [PM_W-1:0] sat_add(input logic [PM_W-1:0] p, input logic [LLR_W+1:0] d);
    logic [PM_W+LLR_W+1:0] s;
    s = (PM_W+LLR_W+2)'(p) + (PM_W+LLR_W+2)'(d);
    return (s > (PM_W+LLR_W+2)'(PM_MAX)) ? PM_MAX[PM_W-1:0] : s[PM_W-1:0];
  endfunction

  always_comb begin
    for (int l = 0; l < L; l++) begin
      logic neg;
      neg = leaf_llr[l][LLR_W-1];
      // u = 0 is penalised when the LLR is negative, u = 1 when it is not
      cand_pm[2*l]      = sat_add(pm[l], neg ? (LLR_W+2)'(mag(leaf_llr[l])) : '0);
      cand_pm[2*l+1]    = sat_add(pm[l], neg ? '0 : (LLR_W+2)'(mag(leaf_llr[l])));
      cand_valid[2*l]   = valid[l];
      cand_valid[2*l+1] = valid[l] && !frozen_leaf;
      pm_inf[l]         = valid[l] ? (PM_W+1)'(pm[l]) : (PM_W+1)'(1 << PM_W);
    end
  end

  always_ff @(posedge clk) begin
    if (leaf_we) leaf_llr <= leaf_llr_in;
  end

  always_ff @(posedge clk) begin
    if (init) begin
      for (int l = 0; l < L; l++) begin
        pm[l]    <= '0;
        valid[l] <= (l == 0);
      end
    end else if (commit) begin
      for (int s = 0; s < L; s++) begin
        pm[s]    <= cand_pm[sel[s]];
        valid[s] <= sel_valid[s];
      end
    end else if (fs_en) begin
      for (int l = 0; l < L; l++) begin
        pm[l] <= sat_add(pm[l], (fs_a[l][LLR_W-1] ? (LLR_W+2)'(mag(fs_a[l])) : '0)
                              + (fs_b[l][LLR_W-1] ? (LLR_W+2)'(mag(fs_b[l])) : '0));
      end
    end
  end
endmodule

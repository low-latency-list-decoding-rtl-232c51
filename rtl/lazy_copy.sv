// lazy_copy: turns the pruning decision into copy commands for the memories.
//
// The 2L keep flags from the DTS are packed, in candidate order, into the L
// list slots: slot s receives the s-th kept candidate c = 2*parent + bit.
// sel/sel_valid are the combinational result, used by the metric register in
// the pruning cycle. On commit the slot map is registered and, in the
// following copy cycle (LCP), parent/bit_val/slot_valid tell the pointer
// memory, the partial-sum memory and the path memory which path every slot
// inherits and which bit it appends. If more than L candidates are flagged
// only the first L are used; slots left empty become invalid. The paper
// names this block and its place after the DTS; the packing order is this
// design's choice.
module lazy_copy #(
  parameter int unsigned L  = 16,
  localparam int unsigned CW = $clog2(2 * L),
  localparam int unsigned LW = (L > 1) ? $clog2(L) : 1
) (
  input  logic          clk,
  input  logic          commit,
  input  logic          keep       [2*L],
  output logic [CW-1:0] sel        [L],
  output logic          sel_valid  [L],
  output logic [LW-1:0] parent     [L],
  output logic          bit_val    [L],
  output logic          slot_valid [L]
);
  always_comb begin
    logic [CW:0] cnt;
    for (int s = 0; s < L; s++) begin
      sel[s]       = '0;
      sel_valid[s] = 1'b0;
    end
    cnt = '0;
    for (int c = 0; c < 2 * L; c++) begin
      if (keep[c]) begin
        for (int s = 0; s < L; s++) begin
          if (cnt == (CW+1)'(s)) begin
            sel[s]       = CW'(c);
            sel_valid[s] = 1'b1;
          end
        end
        cnt = cnt + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (commit) begin
      for (int s = 0; s < L; s++) begin
        parent[s]     <= sel[s][CW-1:1];
        bit_val[s]    <= sel[s][0];
        slot_valid[s] <= sel_valid[s];
      end
    end
  end
endmodule

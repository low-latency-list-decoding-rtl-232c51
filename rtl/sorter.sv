// sorter: radix-W sorter used by the threshold tracker.
//
// Sorts W unsigned DW-bit values into ascending order (out[0] smallest) with
// an odd-even transposition network of W compare-exchange rounds. Purely
// combinational. The threshold tracker needs two such radix-L/2 sorters;
// the network chosen for them is this design's choice.
module sorter #(
  parameter int unsigned W  = 8,
  parameter int unsigned DW = 9
) (
  input  logic [DW-1:0] in  [W],
  output logic [DW-1:0] out [W]
);
  for (genvar r = 0; r <= W; r++) begin : g_round
    logic [DW-1:0] v [W];
    if (r == 0) begin : g_in
      assign v = in;
    end else begin : g_cx
      for (genvar i = 0; i < W; i++) begin : g_lane
        if ((i % 2 == (r - 1) % 2) && (i + 1 < W)) begin : g_lo
          assign v[i] = (g_round[r-1].v[i] > g_round[r-1].v[i+1]) ? g_round[r-1].v[i+1] : g_round[r-1].v[i];
        end else if ((i % 2 != (r - 1) % 2) && (i >= 1)) begin : g_hi
          assign v[i] = (g_round[r-1].v[i-1] > g_round[r-1].v[i]) ? g_round[r-1].v[i-1] : g_round[r-1].v[i];
        end else begin : g_pass
          assign v[i] = g_round[r-1].v[i];
        end
      end
    end
  end
  assign out = g_round[W].v;
endmodule

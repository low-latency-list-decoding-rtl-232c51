// path_memory: the decided source bits of every path in the list.
//
// Row l holds u_0 .. u_{N-1} of path l. On the copy cycle (copy_en) new
// slot s takes the row of its parent path parent[s] and writes its decided
// bit bit_val[s] at position leaf. Frozen bits are never written and stay 0
// from init. Rows of unused slots keep their content. All rows are visible
// on rows[] for the CRC check after the last leaf. The paper names this
// memory; the physical row copy in one cycle is this design's choice.
module path_memory #(
  parameter int unsigned N    = 1024,
  parameter int unsigned L    = 16,
  localparam int unsigned LOGN = $clog2(N),
  localparam int unsigned LW   = (L > 1) ? $clog2(L) : 1
) (
  input  logic            clk,
  input  logic            init,
  input  logic            copy_en,
  input  logic [LOGN-1:0] leaf,
  input  logic [LW-1:0]   parent     [L],
  input  logic            bit_val    [L],
  input  logic            slot_valid [L],
  output logic [N-1:0]    rows       [L]
);
  always_ff @(posedge clk) begin
    if (init) begin
      for (int l = 0; l < L; l++) rows[l] <= '0;
    end else if (copy_en) begin
      for (int s = 0; s < L; s++) begin
        if (slot_valid[s]) begin
          rows[s]       <= rows[parent[s]];
          rows[s][leaf] <= bit_val[s];
        end
      end
    end
  end
endmodule

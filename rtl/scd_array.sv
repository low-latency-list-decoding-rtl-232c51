// scd_array: the L successive-cancellation datapaths of the list decoder.
//
// Each of the L paths has its own semi-parallel SC decoder with M processing
// elements (pe). In one cycle all L x M elements evaluate the same node
// operation (f or g, chosen by is_g) on one chunk of up to M outputs of a
// scheduling-tree node; the list decoder runs its L decoders in lock step.
// a/b are the parent LLRs routed by the crossbar, beta the left-sibling
// partial sums of each path. Purely combinational; results are written into
// the LLR memory (or the leaf register of the metric unit) at the clock edge.
// The L x M organisation follows the paper; the per-element rules are in pe.
module scd_array #(
  parameter int unsigned L     = 16,
  parameter int unsigned M     = 64,
  parameter int unsigned LLR_W = 6
) (
  input  logic                    is_g,
  input  logic signed [LLR_W-1:0] a    [L][M],
  input  logic signed [LLR_W-1:0] b    [L][M],
  input  logic                    beta [L][M],
  output logic signed [LLR_W-1:0] y    [L][M]
);
  for (genvar l = 0; l < L; l++) begin : g_path
    for (genvar k = 0; k < M; k++) begin : g_pe
      pe #(.LLR_W(LLR_W)) u_pe (
        .a   (a[l][k]),
        .b   (b[l][k]),
        .beta(beta[l][k]),
        .is_g(is_g),
        .y   (y[l][k])
      );
    end
  end
endmodule

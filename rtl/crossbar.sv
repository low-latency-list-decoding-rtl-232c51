// crossbar: routes parent LLRs to each of the L SC datapaths.
//
// For the parent depth 0 every path reads the shared channel LLRs. For a
// deeper parent, path l reads the bank named by its pointer ptr[l], so that
// paths which were copied lazily share one physical copy of their LLRs.
// Purely combinational: an L-way multiplexer per path and lane. The paper
// shows the crossbar between the LLR memory and the SCDs, steered by the
// pointer memory; the multiplexer form is this design's choice.
module crossbar #(
  parameter int unsigned L     = 16,
  parameter int unsigned M     = 64,
  parameter int unsigned LLR_W = 6,
  localparam int unsigned LW   = (L > 1) ? $clog2(L) : 1
) (
  input  logic                    from_channel,
  input  logic [LW-1:0]           ptr    [L],
  input  logic signed [LLR_W-1:0] ch_a   [M],
  input  logic signed [LLR_W-1:0] ch_b   [M],
  input  logic signed [LLR_W-1:0] bank_a [L][M],
  input  logic signed [LLR_W-1:0] bank_b [L][M],
  output logic signed [LLR_W-1:0] a      [L][M],
  output logic signed [LLR_W-1:0] b      [L][M]
);
  always_comb begin
    for (int l = 0; l < L; l++) begin
      for (int k = 0; k < M; k++) begin
        a[l][k] = from_channel ? ch_a[k] : bank_a[ptr[l]][k];
        b[l][k] = from_channel ? ch_b[k] : bank_b[ptr[l]][k];
      end
    end
  end
endmodule

// pointer_memory: which LLR bank holds each path's LLRs at each depth.
//
// ptr[l][d] names the physical bank that holds the depth-d LLRs of logical
// path l (depths 1..n-1; depth 0 is the shared channel memory). When the SC
// datapaths write depth d (node_we), every path writes its own bank, so
// ptr[l][d] becomes l. On a lazy copy (copy_en, the LCP cycle after pruning)
// new path s inherits all pointers of its parent path parent[s] instead of
// copying the LLRs themselves. init sets every pointer to the path's own
// bank. rd_ptr gives the pointers of depth rd_depth, combinationally.
// Depths are below n, so only the low $clog2(n) bits of a depth are used.
// Copying pointers rather than LLRs is the lazy-copy scheme of the LLR-based
// list decoders the paper builds on; the register layout is this design's.
module pointer_memory #(
  parameter int unsigned N    = 1024,
  parameter int unsigned L    = 16,
  localparam int unsigned LOGN = $clog2(N),
  localparam int unsigned LW   = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned DW   = $clog2(LOGN)
) (
  input  logic            clk,
  input  logic            init,
  input  logic            node_we,
  input  logic [LOGN-1:0] node_depth,
  input  logic            copy_en,
  input  logic [LW-1:0]   parent   [L],
  input  logic            slot_valid [L],
  input  logic [LOGN-1:0] rd_depth,
  output logic [LW-1:0]   rd_ptr   [L]
);
  logic [LW-1:0] ptr [L][LOGN];

  always_ff @(posedge clk) begin
    if (init) begin
      for (int l = 0; l < L; l++)
        for (int d = 0; d < LOGN; d++) ptr[l][d] <= LW'(l);
    end else if (copy_en) begin
      for (int s = 0; s < L; s++)
        if (slot_valid[s])
          for (int d = 0; d < LOGN; d++) ptr[s][d] <= ptr[parent[s]][d];
    end else if (node_we) begin
      for (int l = 0; l < L; l++) ptr[l][node_depth[DW-1:0]] <= LW'(l);
    end
  end

  always_comb begin
    for (int l = 0; l < L; l++) rd_ptr[l] = ptr[l][rd_depth[DW-1:0]];
  end
endmodule

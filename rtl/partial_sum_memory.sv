// partial_sum_memory: left-sibling partial sums of every path.
//
// For the g function at depth d a path needs beta, the re-encoded bits
// (2^(n-d) of them) of the left sibling subtree of the current node. Each
// path keeps one such vector per depth, packed into N-1 bits: depth d starts
// at bit N - 2^(n-d+1). When leaf i is decided with bit u, the new values
// climb the tree: with t the number of trailing ones of i, the levels n,
// n-1, .., n-t+1 are right children and combine as [left ^ right, right]
// (natural-order generator F^{(x)n}); the result is stored at depth n-t.
// On the copy cycle (copy_en) slot s takes its parent's vector and adds its
// own decided bit, so partial sums are physically copied. On a frozen
// sibling (fs_en, leaves i and i+1 both frozen) each path adds the bits 0,0
// in place. beta_depth/beta_chunk select M partial sums per path for the PE
// array. Storing per-depth left-sibling sums is this design's choice; the
// paper only names the block.
module partial_sum_memory #(
  parameter int unsigned N    = 1024,
  parameter int unsigned L    = 16,
  parameter int unsigned M    = 64,
  localparam int unsigned LOGN = $clog2(N),
  localparam int unsigned LW   = (L > 1) ? $clog2(L) : 1
) (
  input  logic            clk,
  input  logic            init,
  input  logic [LOGN-1:0] leaf,        // index of the decided leaf
  input  logic            copy_en,
  input  logic [LW-1:0]   parent     [L],
  input  logic            bit_val    [L],
  input  logic            slot_valid [L],
  input  logic            fs_en,       // leaf is the even leaf of a frozen sibling
  input  logic [LOGN-1:0] beta_depth,
  input  logic [LOGN-1:0] beta_chunk,
  output logic            beta [L][M]
);
  logic [N-1:0] ps [L];

  // number of trailing ones of the (odd, for a frozen sibling) leaf index
  logic [LOGN-1:0] leaf_eff;
  logic [LOGN:0]   t_ones;
  always_comb begin
    leaf_eff = fs_en ? (leaf | LOGN'(1)) : leaf;
    t_ones = '0;
    for (int k = LOGN - 1; k >= 0; k--)
      if (leaf_eff[k]) t_ones = t_ones + 1'b1; else t_ones = '0;
  end

  for (genvar s = 0; s < L; s++) begin : g_slot
    logic [N-1:0] src, nxt;
    logic [N-1:0] cur [LOGN+1];
    logic         u;

    always_comb begin
      src = fs_en ? ps[s] : ps[parent[s]];
      if (fs_en) src[N-2] = 1'b0;   // left leaf of the frozen sibling is 0
      u = fs_en ? 1'b0 : bit_val[s];
    end

    assign cur[0] = {{(N-1){1'b0}}, u};
    for (genvar k = 0; k < LOGN; k++) begin : g_lvl
      // level n-k holds 2^k bits at offset N - 2^(k+1)
      if (k < LOGN - 1) begin : g_comb
        assign cur[k+1] = {{(N - (2 << k)){1'b0}}, cur[k][(1<<k)-1:0],
                           cur[k][(1<<k)-1:0] ^ src[N - (2 << k) +: (1 << k)]};
      end else begin : g_top
        assign cur[k+1] = {cur[k][(1<<k)-1:0], cur[k][(1<<k)-1:0] ^ src[N - (2 << k) +: (1 << k)]};
      end
    end

    for (genvar k = 0; k < LOGN; k++) begin : g_store
      assign nxt[N - (2 << k) +: (1 << k)] = (t_ones == (LOGN+1)'(k)) ? cur[k][(1<<k)-1:0]
                                                                      : src[N - (2 << k) +: (1 << k)];
    end
    assign nxt[N-1] = src[N-1];

    always_ff @(posedge clk) begin
      if (init) ps[s] <= '0;
      else if (fs_en || (copy_en && slot_valid[s])) ps[s] <= nxt;
    end
  end

  always_comb begin
    for (int l = 0; l < L; l++) begin
      for (int k = 0; k < M; k++) begin
        logic [LOGN:0] idx;
        idx = (LOGN+1)'(N) - (((LOGN+1)'(N)) >> (beta_depth - 1))
              + (LOGN+1)'(beta_chunk) * (LOGN+1)'(M) + (LOGN+1)'(k);
        beta[l][k] = (idx < (LOGN+1)'(N)) ? ps[l][LOGN'(idx)] : 1'b0;
      end
    end
  end
endmodule

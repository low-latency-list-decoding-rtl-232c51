// llr_memory: channel LLRs and the per-path internal LLRs of the SC tree.
//
// The N channel LLRs (depth 0 of the scheduling tree) are common to all
// paths and are loaded one word per cycle through ch_we/ch_addr/ch_data.
// Each of the L physical banks holds the LLRs of depths 1..n-1 of one path:
// depth d (2^(n-d) words) starts at word N - 2^(n-d+1), so a bank needs N-2
// words. A read names a parent depth p and a chunk c of the child node; for
// every k < min(M, 2^(n-p-1)) it returns a[k] = word c*M+k and
// b[k] = word 2^(n-p-1)+c*M+k of depth p, from the channel memory and from
// every bank (the crossbar picks one bank per path). Lanes beyond the node
// size read as 0. A write stores M words of depth wr_depth, chunk wr_chunk,
// into every bank l from wr_data[l]. Reads are combinational, writes take
// effect at the rising edge. The block is named in the paper; its
// organisation as one register array per path is this design's choice.
module llr_memory #(
  parameter int unsigned N     = 1024,
  parameter int unsigned L     = 16,
  parameter int unsigned M     = 64,
  parameter int unsigned LLR_W = 6,
  localparam int unsigned LOGN = $clog2(N)
) (
  input  logic                    clk,
  // channel LLR load port
  input  logic                    ch_we,
  input  logic [LOGN-1:0]         ch_addr,
  input  logic signed [LLR_W-1:0] ch_data,
  // read port: parent depth and chunk of the child node
  input  logic [LOGN-1:0]         rd_depth,
  input  logic [LOGN-1:0]         rd_chunk,
  output logic signed [LLR_W-1:0] ch_a   [M],
  output logic signed [LLR_W-1:0] ch_b   [M],
  output logic signed [LLR_W-1:0] bank_a [L][M],
  output logic signed [LLR_W-1:0] bank_b [L][M],
  // write port: depth 1..n-1, chunk, one M-word row per bank
  input  logic                    wr_en,
  input  logic [LOGN-1:0]         wr_depth,
  input  logic [LOGN-1:0]         wr_chunk,
  input  logic signed [LLR_W-1:0] wr_data [L][M]
);
  logic signed [LLR_W-1:0] ch_mem [N];
  logic signed [LLR_W-1:0] mem    [L][N];

  always_ff @(posedge clk) begin
    if (ch_we) ch_mem[ch_addr] <= ch_data;
  end

  // read addressing
  logic [LOGN:0] rd_half;   // size of the child node = 2^(n-p-1)
  logic [LOGN:0] rd_base;   // first word of depth p in a bank
  always_comb begin
    rd_half = (LOGN+1)'(N) >> (rd_depth + 1);
    rd_base = (rd_depth == 0) ? '0 : (LOGN+1)'(N) - ((LOGN+1)'(N) >> (rd_depth - 1));
  end

  always_comb begin
    for (int k = 0; k < M; k++) begin
      logic [LOGN:0] ia, ib;
      ia = (LOGN+1)'(rd_chunk) * (LOGN+1)'(M) + (LOGN+1)'(k);
      ib = ia + rd_half;
      if ((LOGN+1)'(k) < rd_half) begin
        ch_a[k] = ch_mem[ia[LOGN-1:0]];
        ch_b[k] = ch_mem[ib[LOGN-1:0]];
        for (int l = 0; l < L; l++) begin
          bank_a[l][k] = mem[l][LOGN'(rd_base + ia)];
          bank_b[l][k] = mem[l][LOGN'(rd_base + ib)];
        end
      end else begin
        ch_a[k] = '0;
        ch_b[k] = '0;
        for (int l = 0; l < L; l++) begin
          bank_a[l][k] = '0;
          bank_b[l][k] = '0;
        end
      end
    end
  end

  // write addressing
  logic [LOGN:0] wr_size, wr_base;
  always_comb begin
    wr_size = (LOGN+1)'(N) >> wr_depth;
    wr_base = (LOGN+1)'(N) - ((LOGN+1)'(N) >> (wr_depth - 1));
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int k = 0; k < M; k++) begin
        if ((LOGN+1)'(k) < wr_size) begin
          for (int l = 0; l < L; l++) begin
            mem[l][LOGN'(wr_base + (LOGN+1)'(wr_chunk) * (LOGN+1)'(M) + (LOGN+1)'(k))] <= wr_data[l][k];
          end
        end
      end
    end
  end
endmodule

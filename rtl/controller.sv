// controller: schedules the list decoder over the SC scheduling tree.
//
// A start pulse (accepted while idle) initialises the list and walks the
// scheduling tree depth first, leaf by leaf. For leaf i the first node is
// the f node at depth 1 (i = 0) or the g node at depth n - ctz(i), followed
// by f nodes down to depth n. A node at depth d has 2^(n-d) outputs and
// takes max(1, 2^(n-d)/M) cycles (ST_NODE, one chunk of M per cycle).
// After the leaf node come two cycles: ST_DTS (metric update and pruning)
// and ST_LCP (copy of pointers, partial sums and path bits). If leaves i
// and i+1 are both frozen (a frozen sibling), the walk stops at depth n-1
// and one ST_FSPMU cycle updates the metrics for both leaves. After the
// last leaf one ST_CRC cycle starts the CRC check. The decoding latency is
// therefore 4N + (n - 2 - log2 M) N/M - 5 FS cycles (FS = number of frozen
// siblings), counted from the cycle after start to the end of the last
// ST_LCP or ST_FSPMU cycle. The schedule and this latency are the paper's;
// the start/busy handshake is this design's.
module controller
  import polar_pkg::*;
#(
  parameter int unsigned N    = 1024,
  parameter int unsigned M    = 64,
  localparam int unsigned LOGN = $clog2(N),
  localparam int unsigned DW   = $clog2(LOGN + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [N-1:0]    frozen,
  output ctrl_state_e     state,
  output logic            init,
  output logic            busy,
  // node evaluation
  output logic            node_en,
  output logic [LOGN-1:0] depth,
  output logic [LOGN-1:0] chunk,
  output logic            is_g,
  output logic            mem_we,
  output logic            leaf_we,
  output logic [LOGN-1:0] rd_depth,
  output logic [LOGN-1:0] rd_chunk,
  // leaf handling
  output logic [LOGN-1:0] leaf,
  output logic            frozen_leaf,
  output logic            dts_commit,
  output logic            lcp,
  output logic            fs_en,
  output logic            crc_start
);
  logic [LOGN:0]   leaf_q;
  logic [LOGN-1:0] target;

  function automatic logic [LOGN-1:0] ctz(input logic [LOGN:0] x);
    logic [LOGN-1:0] r;
    r = LOGN'(LOGN);
    for (int k = LOGN - 1; k >= 0; k--) if (x[k]) r = LOGN'(k);
    return r;
  endfunction

  function automatic logic fsib(input logic [N-1:0] fz, input logic [LOGN:0] i);
    return !i[0] && fz[LOGN'(i)] && fz[LOGN'(i | 1)];
  endfunction

  logic [LOGN:0] node_size;
  logic [LOGN:0] n_chunks;
  always_comb begin
    node_size = (LOGN+1)'(N) >> depth;
    n_chunks  = (node_size > (LOGN+1)'(M)) ? node_size / (LOGN+1)'(M) : (LOGN+1)'(1);
  end

  assign leaf        = LOGN'(leaf_q);
  assign frozen_leaf = frozen[leaf];
  assign init        = (state == ST_IDLE) && start;
  assign busy        = (state != ST_IDLE);
  assign node_en     = (state == ST_NODE);
  assign is_g        = leaf_q[DW'(LOGN) - depth[DW-1:0]];
  assign mem_we      = node_en && (depth < LOGN'(LOGN));
  assign leaf_we     = node_en && (depth == LOGN'(LOGN));
  assign rd_depth    = (state == ST_FSPMU) ? LOGN'(LOGN - 1) : depth - 1'b1;
  assign rd_chunk    = (state == ST_FSPMU) ? '0 : chunk;
  assign dts_commit  = (state == ST_DTS);
  assign lcp         = (state == ST_LCP);
  assign fs_en       = (state == ST_FSPMU);
  assign crc_start   = (state == ST_CRC);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= ST_IDLE;
      leaf_q <= '0;
      depth  <= '0;
      chunk  <= '0;
      target <= '0;
    end else begin
      unique case (state)
        ST_IDLE: if (start) begin
          state  <= ST_NODE;
          leaf_q <= '0;
          depth  <= LOGN'(1);
          chunk  <= '0;
          target <= fsib(frozen, '0) ? LOGN'(LOGN - 1) : LOGN'(LOGN);
        end
        ST_NODE: begin
          if ((LOGN+1)'(chunk) + 1'b1 < n_chunks) begin
            chunk <= chunk + 1'b1;
          end else begin
            chunk <= '0;
            if (depth == target) state <= (target == LOGN'(LOGN)) ? ST_DTS : ST_FSPMU;
            else                 depth <= depth + 1'b1;
          end
        end
        ST_DTS: state <= ST_LCP;
        ST_LCP, ST_FSPMU: begin
          logic [LOGN:0] nxt;
          nxt = leaf_q + ((state == ST_FSPMU) ? (LOGN+1)'(2) : (LOGN+1)'(1));
          if (nxt == (LOGN+1)'(N)) begin
            state <= ST_CRC;
          end else begin
            state  <= ST_NODE;
            leaf_q <= nxt;
            depth  <= LOGN'(LOGN) - ctz(nxt);
            target <= fsib(frozen, nxt) ? LOGN'(LOGN - 1) : LOGN'(LOGN);
          end
        end
        ST_CRC: state <= ST_IDLE;
        default: state <= ST_IDLE;
      endcase
    end
  end
endmodule

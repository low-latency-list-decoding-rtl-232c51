// polar_list_decoder: LLR-based list SC decoder for polar codes with
// double-thresholding list pruning.
//
// L successive-cancellation datapaths (scd_array, M processing elements
// each) walk the scheduling tree in lock step under the controller. Their
// parent LLRs come from the LLR memory through the crossbar, steered by the
// pointer memory; g nodes take their partial sums from the partial-sum
// memory. At each leaf the metric unit (pmu) forms 2L extended metrics, the
// dts keeps L of them by comparing against the acceptance and rejection
// thresholds AT/RT that the threshold tracker (tta) derived from the
// previous metrics, and lazy_copy packs the survivors into list slots; the
// next cycle copies pointers, partial sums and path bits. Frozen siblings
// take a single metric-update cycle. After the last leaf crc_check returns
// the CRC-passing path with the best metric.
//
// Interface: load the N channel LLRs (LLR_W-bit two's complement, within
// +-(2^(LLR_W-1)-1)) with ch_we/ch_addr/ch_data, hold the frozen mask
// (bit i = 1: u_i frozen to 0) stable, pulse start while busy is low.
// Decoding takes 4N + (n-2-log2 M)N/M - 5FS cycles; one cycle after
// that done pulses with u_hat (all N source bits) and crc_ok.
// The block structure is that of the paper's Fig. 4; see the individual
// modules for what is taken from the paper and what is chosen here.
module polar_list_decoder
  import polar_pkg::*;
#(
  parameter int unsigned N             = N_DEFAULT,
  parameter int unsigned L             = L_DEFAULT,
  parameter int unsigned M             = M_DEFAULT,
  parameter int unsigned LLR_W         = LLR_W_DEFAULT,
  parameter int unsigned PM_W          = PM_W_DEFAULT,
  parameter bit          RT_SECOND_MAX = 1'b1,
  parameter int unsigned CRC_W         = CRC_W_DEFAULT,
  parameter logic [CRC_W-1:0] CRC_POLY = CRC_W'(CRC_POLY_DEFAULT),
  localparam int unsigned LOGN = $clog2(N)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    ch_we,
  input  logic [LOGN-1:0]         ch_addr,
  input  logic signed [LLR_W-1:0] ch_data,
  input  logic [N-1:0]            frozen,
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  output logic [N-1:0]            u_hat,
  output logic                    crc_ok
);
  localparam int unsigned LW   = (L > 1) ? $clog2(L) : 1;
  localparam int unsigned CW   = $clog2(2 * L);
  localparam int unsigned CNTW = $clog2(2 * L) + 1;

  // controller
  ctrl_state_e     state;
  logic            init, node_en, is_g, mem_we, leaf_we;
  logic [LOGN-1:0] depth, chunk, rd_depth, rd_chunk, leaf;
  logic            frozen_leaf, dts_commit, lcp, fs_en, crc_start;

  controller #(.N(N), .M(M)) u_ctrl (
    .clk, .rst_n, .start, .frozen, .state, .init, .busy,
    .node_en, .depth, .chunk, .is_g, .mem_we, .leaf_we, .rd_depth, .rd_chunk,
    .leaf, .frozen_leaf, .dts_commit, .lcp, .fs_en, .crc_start
  );

  // LLR memory, pointer memory and crossbar
  logic signed [LLR_W-1:0] ch_a [M], ch_b [M];
  logic signed [LLR_W-1:0] bank_a [L][M], bank_b [L][M];
  logic signed [LLR_W-1:0] pa [L][M], pb [L][M];
  logic signed [LLR_W-1:0] pe_y [L][M];
  logic [LW-1:0]           rd_ptr [L];

  llr_memory #(.N(N), .L(L), .M(M), .LLR_W(LLR_W)) u_llr_mem (
    .clk, .ch_we, .ch_addr, .ch_data,
    .rd_depth, .rd_chunk, .ch_a, .ch_b, .bank_a, .bank_b,
    .wr_en(mem_we), .wr_depth(depth), .wr_chunk(chunk), .wr_data(pe_y)
  );

  // lazy copy slot map
  logic [CW-1:0] sel [L];
  logic          sel_valid [L];
  logic [LW-1:0] parent [L];
  logic          bit_val [L];
  logic          slot_valid [L];

  pointer_memory #(.N(N), .L(L)) u_ptr_mem (
    .clk, .init, .node_we(mem_we), .node_depth(depth),
    .copy_en(lcp), .parent, .slot_valid, .rd_depth, .rd_ptr
  );

  crossbar #(.L(L), .M(M), .LLR_W(LLR_W)) u_xbar (
    .from_channel(rd_depth == '0), .ptr(rd_ptr),
    .ch_a, .ch_b, .bank_a, .bank_b, .a(pa), .b(pb)
  );

  // partial sums and the SC datapaths
  logic beta [L][M];

  partial_sum_memory #(.N(N), .L(L), .M(M)) u_ps_mem (
    .clk, .init, .leaf, .copy_en(lcp), .parent, .bit_val, .slot_valid,
    .fs_en, .beta_depth(depth), .beta_chunk(chunk), .beta
  );

  scd_array #(.L(L), .M(M), .LLR_W(LLR_W)) u_scd (
    .is_g, .a(pa), .b(pb), .beta, .y(pe_y)
  );

  // path metrics, thresholds and pruning
  logic signed [LLR_W-1:0] leaf_llr [L], fs_a [L], fs_b [L];
  logic [PM_W-1:0]         cand_pm [2*L];
  logic                    cand_valid [2*L];
  logic [PM_W-1:0]         pm [L];
  logic                    valid [L];
  logic [PM_W:0]           pm_inf [L];
  logic [PM_W:0]           at, rt;
  logic                    keep [2*L];
  logic [CNTW-1:0]         n_accept, n_band, n_reject;
  logic [N-1:0]            rows [L];

  always_comb begin
    for (int l = 0; l < L; l++) begin
      leaf_llr[l] = pe_y[l][0];
      fs_a[l]     = pa[l][0];
      fs_b[l]     = pb[l][0];
    end
  end

  pmu #(.L(L), .LLR_W(LLR_W), .PM_W(PM_W)) u_pmu (
    .clk, .init, .leaf_we, .leaf_llr_in(leaf_llr), .frozen_leaf,
    .commit(dts_commit), .sel, .sel_valid, .fs_en, .fs_a, .fs_b,
    .cand_pm, .cand_valid, .pm, .valid, .pm_inf
  );

  tta #(.L(L), .PM_W(PM_W), .RT_SECOND_MAX(RT_SECOND_MAX)) u_tta (
    .clk, .pm_in(pm_inf), .at, .rt
  );

  dts #(.L(L), .PM_W(PM_W)) u_dts (
    .cand_pm, .cand_valid, .at, .rt, .frozen(frozen_leaf),
    .keep, .n_accept, .n_band, .n_reject
  );

  lazy_copy #(.L(L)) u_lcp (
    .clk, .commit(dts_commit), .keep, .sel, .sel_valid,
    .parent, .bit_val, .slot_valid
  );

  path_memory #(.N(N), .L(L)) u_path_mem (
    .clk, .init, .copy_en(lcp), .leaf, .parent, .bit_val, .slot_valid,
    .rows(rows)
  );

  crc_check #(.N(N), .L(L), .PM_W(PM_W), .CRC_W(CRC_W), .CRC_POLY(CRC_POLY)) u_crc (
    .clk, .start(crc_start), .frozen, .rows(rows), .pm, .valid,
    .out_valid(done), .u_hat, .crc_ok
  );

  // the list always holds at most L paths: DTS.1 alone never exceeds L
  a_dts_list_size: assert property (@(posedge clk) disable iff (!rst_n)
    (dts_commit && !frozen_leaf) |-> (n_accept <= CNTW'(L)))
    else $error("DTS.1 kept more than L paths");
endmodule

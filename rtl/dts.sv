// dts: double thresholding list pruning.
//
// Given the 2L extended path metrics and the two thresholds of the previous
// depth, acceptance threshold AT = pm_{L/2} and rejection threshold RT
// (pm_{L-2} or pm_{L-1}), every candidate is classified in parallel:
//   DTS.1  pm <  AT          kept;
//   DTS.2  pm >  RT          pruned;
//   DTS.3  AT <= pm <= RT    kept in candidate-index order (a priority
//                            encoder) until the list holds L paths.
// Thresholds are PM_W+1 bits; a value with bit PM_W set is +infinity (the
// list is not yet full). On a frozen leaf (frozen = 1) the list is not
// doubled and every valid candidate is kept. Purely combinational, so the
// metric update and the pruning fit in one cycle. The rules are the paper's;
// the paper says DTS.3 chooses "randomly" but implements it with a priority
// encoder, which is what is built here. n_accept/n_band/n_reject count the
// candidates in each class, for observation.
module dts #(
  parameter int unsigned L    = 16,
  parameter int unsigned PM_W = 8,
  localparam int unsigned CNTW = $clog2(2 * L) + 1
) (
  input  logic [PM_W-1:0] cand_pm    [2*L],
  input  logic            cand_valid [2*L],
  input  logic [PM_W:0]   at,
  input  logic [PM_W:0]   rt,
  input  logic            frozen,
  output logic            keep       [2*L],
  output logic [CNTW-1:0] n_accept,
  output logic [CNTW-1:0] n_band,
  output logic [CNTW-1:0] n_reject
);
  logic acc  [2*L];
  logic band [2*L];

  always_comb begin
    logic [CNTW-1:0] room;
    n_accept = '0;
    n_band   = '0;
    n_reject = '0;
    for (int c = 0; c < 2 * L; c++) begin
      acc[c]  = cand_valid[c] && ((PM_W+1)'(cand_pm[c]) <  at);
      band[c] = cand_valid[c] && ((PM_W+1)'(cand_pm[c]) >= at) && ((PM_W+1)'(cand_pm[c]) <= rt);
      if (acc[c]) n_accept = n_accept + 1'b1;
      if (band[c]) n_band = n_band + 1'b1;
      if (cand_valid[c] && ((PM_W+1)'(cand_pm[c]) > rt)) n_reject = n_reject + 1'b1;
    end
    // DTS.3: priority fill of the band, lowest candidate index first
    room = (n_accept < CNTW'(L)) ? CNTW'(L) - n_accept : '0;
    for (int c = 0; c < 2 * L; c++) begin
      if (frozen) begin
        keep[c] = cand_valid[c];
      end else if (acc[c]) begin
        keep[c] = 1'b1;
      end else if (band[c] && room != 0) begin
        keep[c] = 1'b1;
        room    = room - 1'b1;
      end else begin
        keep[c] = 1'b0;
      end
    end
  end
endmodule

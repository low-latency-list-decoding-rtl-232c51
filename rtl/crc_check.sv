// crc_check: selects the decoded word from the final list by its CRC.
//
// After the last leaf the path memory holds L candidate source words. The
// information bits of each (positions not in the frozen mask, in index
// order) are run through a CRC_W-bit CRC, MSB first, zero initial value; a
// word whose last CRC_W information bits are the CRC of the ones before
// leaves a zero remainder. On start all L remainders are computed in
// parallel and, one cycle later (out_valid), u_hat is the valid path with a
// zero remainder and the smallest path metric (lowest slot on a tie), or
// the valid path with the smallest metric if none passes; crc_ok tells
// which case occurred. That the CRC picks the result follows the paper; the
// polynomial, the bit order and the fallback are this design's choices.
module crc_check #(
  parameter int unsigned N        = 1024,
  parameter int unsigned L        = 16,
  parameter int unsigned PM_W     = 8,
  parameter int unsigned CRC_W    = 16,
  parameter logic [CRC_W-1:0] CRC_POLY = CRC_W'(16'h1021)
) (
  input  logic            clk,
  input  logic            start,
  input  logic [N-1:0]    frozen,
  input  logic [N-1:0]    rows  [L],
  input  logic [PM_W-1:0] pm    [L],
  input  logic            valid [L],
  output logic            out_valid,
  output logic [N-1:0]    u_hat,
  output logic            crc_ok
);
  localparam int unsigned LW = (L > 1) ? $clog2(L) : 1;

  logic pass [L];

  // One remainder per path, each a chain of N conditional shift-XOR steps.
  for (genvar l = 0; l < L; l++) begin : g_rem
    logic [CRC_W-1:0] rem;
    always_comb begin
      rem = '0;
      for (int i = 0; i < N; i++) begin
        if (!frozen[i]) begin
          if (rem[CRC_W-1] ^ rows[l][i]) rem = (rem << 1) ^ CRC_POLY;
          else                           rem = rem << 1;
        end
      end
    end
    assign pass[l] = valid[l] && (rem == '0);
  end

  always_ff @(posedge clk) begin
    out_valid <= start;
    if (start) begin
      logic          found_pass, found_any;
      logic [LW-1:0] best_pass, best_any;
      found_pass = 1'b0;
      found_any  = 1'b0;
      best_pass  = '0;
      best_any   = '0;
      for (int l = 0; l < L; l++) begin
        if (pass[l] && (!found_pass || pm[l] < pm[best_pass])) begin
          best_pass  = LW'(l);
          found_pass = 1'b1;
        end
        if (valid[l] && (!found_any || pm[l] < pm[best_any])) begin
          best_any  = LW'(l);
          found_any = 1'b1;
        end
      end
      u_hat  <= found_pass ? rows[best_pass] : rows[best_any];
      crc_ok <= found_pass;
    end
  end
endmodule

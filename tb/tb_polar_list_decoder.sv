// End-to-end testbench of polar_list_decoder at a reduced size
// (N = 128, L = 8, M = 8): several frames, noiseless and noisy, compared
// bit for bit with a reference list decoder, with the latency formula
// checked on every frame. See tb_polar_common.svh for the checks.
module tb_polar_list_decoder;
  localparam int N       = 128;
  localparam int L       = 8;
  localparam int M       = 8;
  localparam int NFRAMES = 12;

  logic                  clk = 1'b0;
  logic                  rst_n;
  logic                  ch_we;
  logic [$clog2(N)-1:0]  ch_addr;
  logic signed [5:0]     ch_data;
  logic [N-1:0]          frozen;
  logic                  start, busy, done, crc_ok;
  logic [N-1:0]          u_hat;

  always #5 clk = ~clk;

  polar_list_decoder #(.N(N), .L(L), .M(M)) dut (
    .clk, .rst_n, .ch_we, .ch_addr, .ch_data, .frozen, .start,
    .busy, .done, .u_hat, .crc_ok
  );

  initial begin
    #(10 * 200000);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  `include "tb_polar_common.svh"
endmodule

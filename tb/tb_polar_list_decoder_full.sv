// Full-size testbench of polar_list_decoder with every parameter at its
// default (N = 1024, L = 16, M = 64): one noiseless and 23 noisy frames,
// each compared bit for bit with the reference list decoder and checked
// against the latency formula. See tb_polar_common.svh for the checks.
module tb_polar_list_decoder_full;
  localparam int N       = 1024;
  localparam int L       = 16;
  localparam int M       = 64;
  localparam int NFRAMES = 24;

  logic                  clk = 1'b0;
  logic                  rst_n;
  logic                  ch_we;
  logic [$clog2(N)-1:0]  ch_addr;
  logic signed [5:0]     ch_data;
  logic [N-1:0]          frozen;
  logic                  start, busy, done, crc_ok;
  logic [N-1:0]          u_hat;

  always #5 clk = ~clk;

  polar_list_decoder dut (
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

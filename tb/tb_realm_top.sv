// tb_realm_top: end-to-end test of realm_top at N = 16 (twelve tiles on both
// dataflows, see realm_top_driver for what is checked).
module tb_realm_top;
  import realm_pkg::*;
  localparam int N = 16;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, w_load, os_start, os_busy, stat_busy, res_valid, recover;
  dataflow_e mode;
  logic signed [7:0]  w_bus [N], x_bus [N];
  logic               w_vld [N], x_vld [N], y_vld [N];
  logic [N-1:0]       inj_flip;
  logic [4:0]         inj_bit;
  logic [7:0]         a;
  theta_t             b, theta_mag;
  logic [4:0]         theta_freq, freq_eff;
  logic [35:0]        msd;
  logic signed [31:0] y_out [N];

  realm_top #(.N(N)) dut (.*);
  realm_top_driver #(.N(N), .TILES(12)) drv (.*);

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", drv.checks, drv.failures + 1);
    $finish;
  end
endmodule

// tb_log2_linear: self-checking test of the Log2LinearFunction unit.
// Random MSD values over the whole 40-bit range (and the corner cases 0, 1,
// powers of two, all ones) with random slopes a and intercepts b are applied;
// theta_mag is compared one cycle later with tb_golden_pkg::g_theta.
module tb_log2_linear;
  import realm_pkg::*;
  import tb_golden_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, out_valid;
  logic [39:0] msd;
  logic [7:0]  a;
  theta_t      b, theta_mag;

  log2_linear #(.MSD_W(40)) dut (.clk, .rst_n, .in_valid, .msd, .a, .b, .out_valid, .theta_mag);

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int exp_t;
    in_valid = 0; msd = 0; a = 8'h18; b = 16'sd400;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      case (t % 8)
        0: msd = 0;
        1: msd = 40'd1 << ($urandom % 40);
        2: msd = '1;
        default: msd = {8'($urandom), 32'($urandom)} >> ($urandom % 40);
      endcase
      a = 8'($urandom);
      if (t % 3 == 0) a = 8'd16 + 8'($urandom % 48);   // 1.0 .. 4.0
      b = theta_t'($signed(16'($urandom)) >>> ($urandom % 8));
      in_valid = 1;
      exp_t = g_theta(64'(msd), int'(a), int'(b));
      @(negedge clk);
      checks++;
      if (!out_valid || int'(theta_mag) != exp_t) begin
        failures++;
        $display("FAIL msd=%0d a=%0d b=%0d theta=%0d exp=%0d", msd, a, b, theta_mag, exp_t);
      end
      in_valid = 0;
      msd = 40'($urandom);
      @(negedge clk);
      checks++;
      if (out_valid || int'(theta_mag) != exp_t) begin
        failures++; $display("FAIL hold");
      end
    end
    // a worked example: MSD = 2^24, a = 1.5, b = 20 -> 20 - 0.5*24 = 8.0
    msd = 40'd1 << 24; a = 8'd24; b = 16'sd320; in_valid = 1;
    @(negedge clk);
    checks++;
    if (theta_mag != 16'sd128) begin failures++; $display("FAIL example %0d", theta_mag); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_countif: self-checking test of the parallel countif unit.
// Fills the N magnitudes with a random mix of zeros, small values and values
// around the threshold, sweeps theta_mag (negative, zero, mid-range,
// saturating) and compares freq_eff with a count made here against
// tb_golden_pkg::g_thr.
module tb_countif;
  import realm_pkg::*;
  import tb_golden_pkg::*;
  localparam int N = 256;
  int checks = 0, failures = 0;

  logic [31:0] mag [N];
  theta_t      theta_mag;
  logic [8:0]  freq_eff;

  countif #(.N(N), .MW(32)) dut (.mag, .theta_mag, .freq_eff);

  initial begin
    #1000000;
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int exp_cnt;
    longint unsigned thr;
    for (int t = 0; t < 400; t++) begin
      case (t % 5)
        0: theta_mag = -16'sd5;
        1: theta_mag = 16'sd0;
        2: theta_mag = 16'sd1000;
        default: theta_mag = theta_t'($urandom % 520);
      endcase
      thr = g_thr(int'(theta_mag));
      for (int i = 0; i < N; i++) begin
        case ($urandom % 4)
          0: mag[i] = 0;
          1: mag[i] = 32'($urandom % 4);
          2: mag[i] = 32'(thr) + 32'($urandom % 3) - 1;
          default: mag[i] = 32'($urandom) >> ($urandom % 32);
        endcase
        if (t == 7) mag[i] = 32'h8000_0000;
      end
      #1;
      exp_cnt = 0;
      for (int i = 0; i < N; i++) if (64'(mag[i]) > thr) exp_cnt++;
      checks++;
      if (int'(freq_eff) != exp_cnt) begin
        failures++;
        $display("FAIL theta=%0d thr=%0d cnt=%0d exp=%0d", theta_mag, thr, freq_eff, exp_cnt);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

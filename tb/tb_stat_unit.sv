// tb_stat_unit: self-checking test of the statistical unit (N = 16).
// Each tile delivers N checksum pairs, with random gaps, where a random
// subset carries a deviation: small ones, large ones and the extreme
// -2^31.  The testbench works out MSD, theta_mag, freq_eff and recover
// itself and checks them, and checks that res_valid comes exactly three
// cycles after the cycle with the N-th pair.  Both outcomes (recover and
// no recover with errors present) must occur.
module tb_stat_unit;
  import realm_pkg::*;
  import tb_golden_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic      in_valid, busy, res_valid, recover;
  cks_pair_t in_pair;
  logic [7:0] a;
  theta_t    b, theta_mag;
  logic [4:0] theta_freq, freq_eff;
  logic [35:0] msd;

  stat_unit #(.N(N)) dut (.clk, .rst_n, .in_valid, .in_pair, .a, .b, .theta_freq,
    .busy, .res_valid, .recover, .freq_eff, .msd, .theta_mag);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint unsigned mags [N];
    longint unsigned m_sum, thr;
    int th, cnt, n_rec = 0, n_tol = 0, lat;
    longint d;
    in_valid = 0; in_pair = '0; a = 8'd24; b = 16'sd320; theta_freq = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int tile = 0; tile < 200; tile++) begin
      a = 8'd16 + 8'($urandom % 40);
      b = theta_t'(16 * (10 + $urandom % 30));
      theta_freq = 5'($urandom % 4);
      m_sum = 0;
      for (int i = 0; i < N; i++) begin
        while (($urandom % 4) == 0) begin in_valid = 0; @(negedge clk); end
        case ($urandom % 6)
          0, 1, 2: d = 0;
          3: d = longint'($urandom % 64) - 32;
          4: d = (longint'(1) << (10 + $urandom % 20)) * (($urandom % 2) ? 1 : -1);
          default: d = longint'($urandom % 200000) - 100000;
        endcase
        if (tile == 3 && i == 0) d = -(longint'(1) << 31);
        in_pair.etwx = 32'($urandom);
        in_pair.ety  = in_pair.etwx + 32'(d);
        mags[i] = (d < 0) ? 64'(-d) : 64'(d);
        m_sum += mags[i];
        in_valid = 1;
        chk(!busy, "not busy while collecting");
        @(negedge clk);
      end
      in_valid = 0;
      th  = g_theta(m_sum, int'(a), int'(b));
      thr = g_thr(th);
      cnt = 0;
      for (int i = 0; i < N; i++) if (mags[i] > thr) cnt++;
      lat = 1;
      while (!res_valid && lat < 10) begin @(negedge clk); lat++; end
      chk(lat == 3, $sformatf("result latency %0d", lat));
      chk(64'(msd) == m_sum, "msd");
      chk(int'(theta_mag) == th, $sformatf("theta %0d exp %0d", theta_mag, th));
      chk(int'(freq_eff) == cnt, $sformatf("freq_eff %0d exp %0d", freq_eff, cnt));
      chk(recover == (cnt > int'(theta_freq)), "recover");
      if (recover) n_rec++;
      else if (m_sum != 0) n_tol++;
      @(negedge clk);
      chk(!res_valid, "res_valid is a pulse");
    end
    chk(n_rec > 0, "recovery requested at least once");
    chk(n_tol > 0, "errors tolerated at least once");
    $display("recover=%0d tolerated=%0d", n_rec, n_tol);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// realm_top_driver: stimulus and checking for realm_top, shared by the
// end-to-end testbenches (instantiated next to the core, which the
// testbench instantiates itself).
//
// It runs a list of GEMM tiles Y = W X with random INT8 operands, each on
// the dataflow its scenario names, with bit flips injected into chosen
// outputs, and checks every output value and cycle, the statistical unit's
// MSD, theta_mag, freq_eff and recover (worked out here with
// tb_golden_pkg), and the cycle of res_valid.  The scenarios make each
// mechanism happen: WS tiles (with their weight loads), OS tiles (with
// their drains), a switch of dataflow in both directions, a recovery
// request, errors tolerated below theta_freq, errors ignored below
// theta_mag, and a clean tile.  A mechanism that never occurs counts as a
// failure.  The driver prints the TB_RESULT line and ends the simulation.
module realm_top_driver
  import realm_pkg::*;
  import tb_golden_pkg::*;
#(
  parameter int N     = 16,
  parameter int TILES = 8
) (
  input  logic                 clk,
  output logic                 rst_n,
  output dataflow_e            mode,
  output logic                 w_load,
  output logic                 os_start,
  output logic signed [7:0]    w_bus [N],
  output logic                 w_vld [N],
  output logic signed [7:0]    x_bus [N],
  output logic                 x_vld [N],
  output logic [N-1:0]         inj_flip,
  output logic [4:0]           inj_bit,
  output logic [7:0]           a,
  output theta_t               b,
  output logic [$clog2(N+1)-1:0] theta_freq,
  input  logic signed [31:0]   y_out [N],
  input  logic                 y_vld [N],
  input  logic                 os_busy,
  input  logic                 stat_busy,
  input  logic                 res_valid,
  input  logic                 recover,
  input  logic [$clog2(N+1)-1:0] freq_eff,
  input  logic [CKW+$clog2(N)-1:0] msd,
  input  theta_t               theta_mag
);

  int checks = 0, failures = 0;
  int n_ws = 0, n_os = 0, n_switch = 0, n_recover = 0, n_tolerated = 0;
  int n_ignored = 0, n_clean = 0, n_wload = 0, n_drain = 0;

  int W [N][N];     // W[out][in]
  int X [N][N];     // X[in][col]
  int Y [N][N];     // Y[out][col]
  bit F [N][N];     // bit flip on Y[out][col]

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  function automatic int yerr(input int i, input int j);
    return F[i][j] ? (Y[i][j] ^ (1 << inj_bit)) : Y[i][j];
  endfunction

  task automatic make_tile(input int nflips, input int bitpos);
    for (int p = 0; p < N; p++)
      for (int q = 0; q < N; q++) begin
        W[p][q] = int'($signed(8'($urandom)));
        X[p][q] = int'($signed(8'($urandom)));
        F[p][q] = 1'b0;
      end
    for (int p = 0; p < N; p++)
      for (int q = 0; q < N; q++) begin
        Y[p][q] = 0;
        for (int k = 0; k < N; k++) Y[p][q] += W[p][k] * X[k][q];
      end
    for (int f = 0; f < nflips; f++) F[$urandom % N][$urandom % N] = 1'b1;
    inj_bit = 5'(bitpos);
  endtask

  task automatic idle_inputs();
    w_load = 0; os_start = 0; inj_flip = '0;
    for (int r = 0; r < N; r++) begin w_bus[r] = 0; w_vld[r] = 0; x_bus[r] = 0; x_vld[r] = 0; end
  endtask

  // expected statistics of the current tile
  task automatic check_result(input int wait_cycles);
    longint unsigned mags [N];
    longint unsigned m_sum, thr;
    longint dd;
    int th, cnt, nz;
    m_sum = 0; nz = 0;
    for (int j = 0; j < N; j++) begin
      dd = 0;
      for (int i = 0; i < N; i++) dd += longint'(yerr(i, j)) - longint'(Y[i][j]);
      dd = longint'($signed(32'(dd)));     // the checksums are 32-bit words
      mags[j] = (dd < 0) ? 64'(-dd) : 64'(dd);
      m_sum += mags[j];
      if (mags[j] != 0) nz++;
    end
    th  = g_theta(m_sum, int'(a), int'(b));
    thr = g_thr(th);
    cnt = 0;
    for (int j = 0; j < N; j++) if (mags[j] > thr) cnt++;
    for (int c = 0; c < wait_cycles; c++) begin
      chk(!res_valid, "res_valid early");
      @(negedge clk);
    end
    chk(res_valid, "res_valid on time");
    chk(64'(msd) == m_sum, $sformatf("msd %0d exp %0d", msd, m_sum));
    chk(int'(theta_mag) == th, $sformatf("theta %0d exp %0d", theta_mag, th));
    chk(int'(freq_eff) == cnt, $sformatf("freq_eff %0d exp %0d", freq_eff, cnt));
    chk(recover == (cnt > int'(theta_freq)), "recover");
    if (m_sum == 0) n_clean++;
    else if (recover) n_recover++;
    else n_tolerated++;
    if (nz > cnt) n_ignored++;
    @(negedge clk);
  endtask

  task automatic set_mode(input dataflow_e m);
    if (m != mode) n_switch++;
    mode = m;
    @(negedge clk);
  endtask

  task automatic run_ws();
    int j;
    set_mode(DF_WS);
    n_ws++;
    for (int k = 0; k < N; k++) begin
      w_load = 1;
      for (int c = 0; c < N; c++) w_bus[c] = 8'(W[c][N-1-k]);
      @(negedge clk);
    end
    w_load = 0; n_wload++;
    for (int t = 0; t < 3 * N; t++) begin
      for (int r = 0; r < N; r++) begin
        j = t - r;
        x_vld[r] = (j >= 0 && j < N);
        x_bus[r] = x_vld[r] ? 8'(X[r][j]) : 8'($urandom);
      end
      for (int c = 0; c < N; c++) begin
        j = t - N - c;
        inj_flip[c] = (j >= 0 && j < N) ? F[c][j] : 1'b0;
      end
      #1;
      for (int c = 0; c < N; c++) begin
        j = t - N - c;
        if (j >= 0 && j < N) chk(y_vld[c] && y_out[c] == yerr(c, j), $sformatf("WS y[%0d][%0d]", c, j));
        else chk(!y_vld[c], "WS stray y_vld");
      end
      @(negedge clk);
    end
    idle_inputs();
    // last pair in cycle 3N-1 -> result three cycles later
    check_result(2);
  endtask

  task automatic run_os();
    int k, d;
    set_mode(DF_OS);
    n_os++;
    for (int t = 0; t < 5 * N; t++) begin
      os_start = (t == 0);
      for (int r = 0; r < N; r++) begin
        k = t - 1 - r;
        w_vld[r] = (k >= 0 && k < N);
        w_bus[r] = w_vld[r] ? 8'(W[r][k]) : 8'($urandom);
        x_vld[r] = (k >= 0 && k < N);
        x_bus[r] = x_vld[r] ? 8'(X[k][r]) : 8'($urandom);
      end
      d = t - 3 * N;
      for (int j = 0; j < N; j++) inj_flip[j] = (d >= 0 && d < N) ? F[N-1-d][j] : 1'b0;
      #1;
      if (d >= 0 && d < N) begin
        if (d == 0) n_drain++;
        for (int j = 0; j < N; j++)
          chk(y_vld[j] && y_out[j] == yerr(N-1-d, j), $sformatf("OS y[%0d][%0d]", N-1-d, j));
      end else chk(!y_vld[0], "OS stray y_vld");
      if (t > 0) chk(os_busy, "OS busy");
      @(negedge clk);
    end
    idle_inputs();
    check_result(2);
    chk(!os_busy, "OS idle after tile");
  endtask

  initial begin
    rst_n = 0; mode = DF_WS; a = 8'd24; b = 16'sd320; theta_freq = '0; inj_bit = 0;
    idle_inputs();
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int tile = 0; tile < TILES; tile++) begin
      case (tile % 6)
        0: begin   // clean WS tile
          make_tile(0, 0); a = 8'd24; b = 16'sd320; theta_freq = '0;
          run_ws();
        end
        1: begin   // few large errors, sensitive-layer rule (theta_freq = 0)
          make_tile(3, 30); a = 8'd24; b = 16'sd320; theta_freq = '0;
          run_ws();
        end
        2: begin   // many small errors below theta_mag: ignored
          make_tile(N / 2, 3); a = 8'd16; b = 16'sd208; theta_freq = '0;
          run_os();
        end
        3: begin   // medium errors, a few counted but tolerated
          make_tile(2, 20); a = 8'd16; b = 16'sd16; theta_freq = 4;
          run_os();
        end
        4: begin   // many medium errors: recovery
          make_tile(N, 22); a = 8'd20; b = 16'sd240; theta_freq = 1;
          run_os();
        end
        default: begin
          make_tile($urandom % N, 4 + $urandom % 27);
          a = 8'd16 + 8'($urandom % 32); b = theta_t'(16 * ($urandom % 24));
          theta_freq = ($clog2(N+1))'($urandom % 4);
          run_ws();
        end
      endcase
    end
    $display("tiles: ws=%0d os=%0d switches=%0d weight_loads=%0d drains=%0d", n_ws, n_os, n_switch, n_wload, n_drain);
    $display("outcomes: clean=%0d recover=%0d tolerated=%0d ignored_small=%0d", n_clean, n_recover, n_tolerated, n_ignored);
    chk(n_ws > 0 && n_wload > 0, "WS tile and weight load happened");
    chk(n_os > 0 && n_drain > 0, "OS tile and drain happened");
    chk(n_switch >= 2, "dataflow switched both ways");
    chk(n_clean > 0, "clean tile happened");
    chk(n_recover > 0, "recovery requested");
    chk(n_tolerated > 0, "errors tolerated");
    chk(n_ignored > 0, "small errors ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

// tb_os_abft_array: self-checking test of the output-stationary ABFT array
// (N = 8).
// For several tiles: start, then random INT8 weight rows and input columns
// streamed with the systolic skew (element k on row i / column j in cycle
// s+1+k+i / s+1+k+j).  Checked every cycle: y_valid only in the N drain
// cycles starting at s+3N, y_out[j] = y_(N-1-d),j in drain cycle d with the
// injected bit flips, the N pairs in cycles s+4N+j with e^T Y = the sum of
// the flipped column and e^T W X = the exact column sum, and busy.
module tb_os_abft_array;
  import realm_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, y_valid, pair_valid, busy;
  logic signed [7:0]  w_in [N], x_in [N];
  logic               w_valid [N], x_valid [N];
  logic [N-1:0]       inj_flip;
  logic [4:0]         inj_bit;
  logic signed [31:0] y_out [N];
  cks_pair_t          pair;

  os_abft_array #(.N(N)) dut (.clk, .rst_n, .start, .w_in, .w_valid, .x_in, .x_valid,
    .inj_flip, .inj_bit, .y_out, .y_valid, .pair_valid, .pair, .busy);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int W [N][N];   // W[i][k]
  int X [N][N];   // X[k][j]
  int Y [N][N];
  bit F [N][N];   // flip of y_ij

  initial begin
    int k, i, d, ety, etwx, n_flips;
    start = 0; inj_flip = '0; inj_bit = 0;
    for (int r = 0; r < N; r++) begin w_in[r] = 0; x_in[r] = 0; w_valid[r] = 0; x_valid[r] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    n_flips = 0;
    for (int tile = 0; tile < 5; tile++) begin
      for (int a = 0; a < N; a++)
        for (int b = 0; b < N; b++) begin
          W[a][b] = int'($signed(8'($urandom)));
          X[a][b] = int'($signed(8'($urandom)));
          F[a][b] = (tile > 0) && (($urandom % 6) == 0);
        end
      if (tile == 1) for (int a = 0; a < N; a++) begin W[a][0] = -128; X[0][a] = -128; end
      for (int a = 0; a < N; a++)
        for (int b = 0; b < N; b++) begin
          Y[a][b] = 0;
          for (int kk = 0; kk < N; kk++) Y[a][b] += W[a][kk] * X[kk][b];
        end
      inj_bit = 5'(tile == 0 ? 0 : 4 + $urandom % 27);
      // cycle t = 0 is the start cycle s
      for (int t = 0; t < 5 * N + 3; t++) begin
        start = (t == 0);
        for (int r = 0; r < N; r++) begin
          k = t - 1 - r;
          w_valid[r] = (k >= 0 && k < N);
          w_in[r]    = w_valid[r] ? 8'(W[r][k]) : 8'($urandom);
          x_valid[r] = (k >= 0 && k < N);
          x_in[r]    = x_valid[r] ? 8'(X[k][r]) : 8'($urandom);
        end
        d = t - 3 * N;
        for (int j = 0; j < N; j++) inj_flip[j] = (d >= 0 && d < N) ? F[N-1-d][j] : 1'b0;
        #1;
        if (t > 0) chk(busy == (t < 5 * N), $sformatf("busy at %0d", t));
        if (d >= 0 && d < N) begin
          i = N - 1 - d;
          for (int j = 0; j < N; j++) begin
            if (F[i][j]) n_flips++;
            chk(y_valid && y_out[j] == (F[i][j] ? (Y[i][j] ^ (1 << inj_bit)) : Y[i][j]),
                $sformatf("y[%0d][%0d]", i, j));
          end
        end else chk(!y_valid, "no stray y_valid");
        d = t - 4 * N;
        if (d >= 0 && d < N) begin
          ety = 0; etwx = 0;
          for (int a = 0; a < N; a++) begin
            etwx += Y[a][d];
            ety  += F[a][d] ? (Y[a][d] ^ (1 << inj_bit)) : Y[a][d];
          end
          chk(pair_valid && pair.ety == ety && pair.etwx == etwx,
              $sformatf("pair %0d: %0d/%0d exp %0d/%0d", d, pair.ety, pair.etwx, ety, etwx));
        end else chk(!pair_valid, "no stray pair_valid");
        @(negedge clk);
      end
    end
    chk(n_flips > 0, "flips injected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_ws_abft_array: self-checking test of the weight-stationary ABFT array
// (N = 8).
// For several tiles: random INT8 W is loaded row by row (array row N-1
// first), N random input columns are streamed with the systolic skew, and a
// few outputs get a bit flipped.  Checked every cycle: each y_out[c] is
// valid exactly in cycle t_j + N + c and equals (W x_j)_c with the injected
// flip; each checksum pair arrives exactly in cycle t_j + 2N with
// e^T Y = sum of the (flipped) outputs and e^T W X = the exact sum.
module tb_ws_abft_array;
  import realm_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic w_load;
  logic signed [7:0]  w_row [N], x_in [N];
  logic               x_valid [N];
  logic [N-1:0]       inj_flip;
  logic [4:0]         inj_bit;
  logic signed [31:0] y_out [N];
  logic               y_valid [N];
  logic               pair_valid;
  cks_pair_t          pair;

  ws_abft_array #(.N(N)) dut (.clk, .rst_n, .w_load, .w_row, .x_in, .x_valid, .inj_flip,
    .inj_bit, .y_out, .y_valid, .pair_valid, .pair);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int W [N][N];   // W[c][r]: output index c, input index r
  int X [N][N];   // X[r][j]
  bit F [N][N];   // flip of output c of column j

  initial begin
    int Y, t0, j, ety, etwx, n_pairs, n_flips;
    w_load = 0; inj_flip = '0; inj_bit = 0;
    for (int r = 0; r < N; r++) begin w_row[r] = 0; x_in[r] = 0; x_valid[r] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    n_flips = 0;
    for (int tile = 0; tile < 6; tile++) begin
      for (int c = 0; c < N; c++)
        for (int r = 0; r < N; r++) begin
          W[c][r] = int'($signed(8'($urandom)));
          X[c][r] = int'($signed(8'($urandom)));
          F[c][r] = (tile > 0) && (($urandom % 6) == 0);
        end
      if (tile == 1) for (int c = 0; c < N; c++) begin W[c][0] = -128; X[0][c] = -128; end
      inj_bit = 5'(tile == 0 ? 0 : 4 + $urandom % 27);
      // load weights: array row N-1 first
      for (int k = 0; k < N; k++) begin
        w_load = 1;
        for (int c = 0; c < N; c++) w_row[c] = 8'(W[c][N-1-k]);
        @(negedge clk);
      end
      w_load = 0;
      // stream: cycle t (t = 0 .. 3N+1) relative to t0
      n_pairs = 0;
      for (int t = 0; t < 3 * N + 2; t++) begin
        for (int r = 0; r < N; r++) begin
          j = t - r;
          x_valid[r] = (j >= 0 && j < N);
          x_in[r]    = x_valid[r] ? 8'(X[r][j]) : 8'($urandom);
        end
        for (int c = 0; c < N; c++) begin
          j = t - N - c;
          inj_flip[c] = (j >= 0 && j < N) ? F[c][j] : 1'b0;
        end
        #1;
        for (int c = 0; c < N; c++) begin
          j = t - N - c;
          if (j >= 0 && j < N) begin
            Y = 0;
            for (int r = 0; r < N; r++) Y += W[c][r] * X[r][j];
            if (F[c][j]) begin Y = Y ^ (1 << inj_bit); n_flips++; end
            chk(y_valid[c] && y_out[c] == Y, $sformatf("y[%0d] of column %0d", c, j));
          end else begin
            chk(!y_valid[c], "no stray y_valid");
          end
        end
        j = t - 2 * N;
        if (j >= 0 && j < N) begin
          ety = 0; etwx = 0;
          for (int c = 0; c < N; c++) begin
            Y = 0;
            for (int r = 0; r < N; r++) Y += W[c][r] * X[r][j];
            etwx += Y;
            ety  += F[c][j] ? (Y ^ (1 << inj_bit)) : Y;
          end
          chk(pair_valid && pair.ety == ety && pair.etwx == etwx,
              $sformatf("pair %0d: %0d/%0d exp %0d/%0d", j, pair.ety, pair.etwx, ety, etwx));
          n_pairs++;
        end else begin
          chk(!pair_valid, "no stray pair_valid");
        end
        @(negedge clk);
      end
      chk(n_pairs == N, "N pairs per tile");
    end
    chk(n_flips > 0, "flips injected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

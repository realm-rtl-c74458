// os_abft_array: output-stationary systolic array with ABFT checksums.
//
// The N x N array computes one N x N output tile Y = W X with K = N.  Row i
// receives the weights W[i][k] from the left, column j the inputs X[k][j]
// from the top, and PE (i,j) accumulates y_ij in place.  Following the
// paper, three things are added:
//   * a column of N adders on the left, chained top to bottom, that sums the
//     weights entering the rows into (e^T W)[k] (16 bits);
//   * a row of N checksum PEs under the array (16-bit weights) that receive
//     (e^T W)[k] from the left end, pass it rightward and multiply it with
//     the inputs leaving the bottom of the columns: PE j holds (e^T W X)_j;
//   * a row of N accumulators that add up the outputs of each column as
//     they are shifted out of the array: e^T Y_j (32 bits).
// The N pairs (e^T Y_j, e^T W X_j) then go to the statistical unit.
//
// Choices of this design where the paper is silent:
//   * One register per adder of the left column keeps (e^T W)[k] aligned
//     with the skewed streams; its last register is the one drawn between
//     the column and the checksum row.
//   * A small controller sequences a tile.  start (only while idle) clears
//     all accumulators.  Element k must then arrive on w_in[i] in cycle
//     s + 1 + k + i and on x_in[j] in cycle s + 1 + k + j, where s is the
//     start cycle (the caller applies the systolic skew).  From cycle
//     s + N + 2N the outputs drain: for N cycles every column shifts down
//     one row, the bottom row first, so y_out[j] carries y_(N-1-d),j in
//     drain cycle d with y_valid high, and the e^T Y accumulators add them.
//     Then for N cycles pair_valid is high and pair carries the pair of
//     column 0, 1, ... N-1.  busy is high from the cycle after start until
//     the last pair has left.
//   * inj_flip/inj_bit flip bit inj_bit of the drained y_out[j] for the
//     columns whose inj_flip bit is set, before the e^T Y accumulators: the
//     paper's bit-flip model of timing errors in INT32 results, used to
//     exercise the checking path.
//
// Size: the paper's arrays are 256 x 256.  The default here is N = 128
// because a Verilator lint of the two 256 x 256 arrays and the core side by
// side needs more than 32 GB (measured 0.47 GB per array at N = 64 and
// 3.5 GB for the core at N = 128, growing with the PE count).  N = 256 is a
// legal parameter value and all widths are chosen for it.
module os_abft_array
  import realm_pkg::*;
#(
  parameter int unsigned N = 128   // 256 in the paper, see the note above
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [DW-1:0] w_in    [N],   // row i weight stream
  input  logic                 w_valid [N],
  input  logic signed [DW-1:0] x_in    [N],   // column j input stream
  input  logic                 x_valid [N],
  input  logic [N-1:0]         inj_flip,
  input  logic [4:0]           inj_bit,
  output logic signed [PW-1:0] y_out   [N],
  output logic                 y_valid,
  output logic                 pair_valid,
  output cks_pair_t            pair,
  output logic                 busy
);

  localparam int unsigned K       = N;
  localparam int unsigned COMP_CY = K + 2 * N - 1;   // cycles in S_COMP
  localparam int unsigned CNT_W   = $clog2(COMP_CY + 1);

  typedef enum logic [1:0] {S_IDLE, S_COMP, S_DRAIN, S_SEND} state_e;

  state_e             state;
  logic [CNT_W-1:0]   cnt;
  logic               drain;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt   <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          state <= S_COMP;
          cnt   <= '0;
        end
        S_COMP: if (cnt == CNT_W'(COMP_CY - 1)) begin
          state <= S_DRAIN;
          cnt   <= '0;
        end else cnt <= cnt + 1'b1;
        S_DRAIN: if (cnt == CNT_W'(N - 1)) begin
          state <= S_SEND;
          cnt   <= '0;
        end else cnt <= cnt + 1'b1;
        default: if (cnt == CNT_W'(N - 1)) begin
          state <= S_IDLE;
          cnt   <= '0;
        end else cnt <= cnt + 1'b1;
      endcase
    end
  end

  assign drain = (state == S_DRAIN);
  assign busy  = (state != S_IDLE);

  // ---- left column of adders: (e^T W)[k] ----
  logic signed [CSW-1:0] c_q  [N];
  logic                  cv_q [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < N; i++) begin
        c_q[i]  <= '0;
        cv_q[i] <= 1'b0;
      end
    end else begin
      c_q[0]  <= w_valid[0] ? CSW'(w_in[0]) : '0;
      cv_q[0] <= w_valid[0];
      for (int unsigned i = 1; i < N; i++) begin
        c_q[i]  <= c_q[i-1] + (w_valid[i] ? CSW'(w_in[i]) : CSW'(0));
        cv_q[i] <= w_valid[i];
      end
    end
  end

  // ---- PE grid ----
  logic signed [DW-1:0]  w_h  [N][N+1];
  logic                  wv_h [N][N+1];
  logic signed [DW-1:0]  x_v  [N+1][N];
  logic                  xv_v [N+1][N];
  logic signed [PW-1:0]  y_v  [N+1][N];    // y_v[i+1][j] = accumulator of PE (i,j)

  for (genvar j = 0; j < N; j++) begin : g_top
    assign x_v[0][j]  = x_in[j];
    assign xv_v[0][j] = x_valid[j];
    assign y_v[0][j]  = '0;
  end

  for (genvar i = 0; i < N; i++) begin : g_row
    assign w_h[i][0]  = w_in[i];
    assign wv_h[i][0] = w_valid[i];
    for (genvar j = 0; j < N; j++) begin : g_col
      pe_os #(.DW(DW), .WW(DW), .PW(PW)) u_pe (
        .clk         (clk),
        .rst_n       (rst_n),
        .clear       (start),
        .drain       (drain),
        .w_in        (w_h[i][j]),
        .w_valid_in  (wv_h[i][j]),
        .w_out       (w_h[i][j+1]),
        .w_valid_out (wv_h[i][j+1]),
        .x_in        (x_v[i][j]),
        .x_valid_in  (xv_v[i][j]),
        .x_out       (x_v[i+1][j]),
        .x_valid_out (xv_v[i+1][j]),
        .y_in        (y_v[i][j]),
        .y_out       (y_v[i+1][j])
      );
    end
  end

  // ---- checksum row: e^T W X ----
  logic signed [CSW-1:0] cw_h  [N+1];
  logic                  cwv_h [N+1];
  logic signed [CKW-1:0] etwx  [N];
  logic signed [DW-1:0]  cx_unused  [N];
  logic                  cxv_unused [N];

  assign cw_h[0]  = c_q[N-1];
  assign cwv_h[0] = cv_q[N-1];

  for (genvar j = 0; j < N; j++) begin : g_cks
    pe_os #(.DW(DW), .WW(CSW), .PW(CKW)) u_cpe (
      .clk         (clk),
      .rst_n       (rst_n),
      .clear       (start),
      .drain       (1'b0),
      .w_in        (cw_h[j]),
      .w_valid_in  (cwv_h[j]),
      .w_out       (cw_h[j+1]),
      .w_valid_out (cwv_h[j+1]),
      .x_in        (x_v[N][j]),
      .x_valid_in  (xv_v[N][j]),
      .x_out       (cx_unused[j]),
      .x_valid_out (cxv_unused[j]),
      .y_in        ('0),
      .y_out       (etwx[j])
    );
  end

  // ---- drained outputs, injected flips, e^T Y accumulators ----
  logic signed [CKW-1:0] ety_q [N];

  for (genvar j = 0; j < N; j++) begin : g_out
    assign y_out[j] = y_v[N][j] ^ (inj_flip[j] ? (PW'(1) << inj_bit) : PW'(0));
  end
  assign y_valid = drain;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned j = 0; j < N; j++) ety_q[j] <= '0;
    end else begin
      for (int unsigned j = 0; j < N; j++) begin
        if (start)      ety_q[j] <= '0;
        else if (drain) ety_q[j] <= ety_q[j] + CKW'(y_out[j]);
      end
    end
  end

  // ---- pairs, one column per cycle ----
  assign pair_valid = (state == S_SEND);
  assign pair.ety   = ety_q[cnt[$clog2(N)-1:0]];
  assign pair.etwx  = etwx[cnt[$clog2(N)-1:0]];

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE)
    else $error("os_abft_array: start while a tile is in flight");

endmodule

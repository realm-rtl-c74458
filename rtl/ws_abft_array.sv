// ws_abft_array: weight-stationary systolic array with ABFT checksums.
//
// The N x N array computes Y = W X one column of X at a time.  PE (r,c)
// (row r, column c) holds W[c][r]; element r of an input column x_j enters
// row r from the left, travels right, and column c accumulates
// y_c = sum_r W[c][r] x_r downward, leaving at the bottom.  Following the
// paper, two things are added:
//   * a column of N checksum PEs on the right, 16 bits wide, whose PE in
//     row r stores sum_c W[c][r]; it receives the inputs after they have
//     crossed the array and produces e^T W x_j (32 bits) at its bottom;
//   * a row of N adders under the array, chained left to right, that sums
//     the N outputs of x_j into e^T Y_j (32 bits).
// Both reach the right edge in the same cycle and leave as one checksum
// pair for the statistical unit: N pairs for a tile of N input columns.
//
// Choices of this design where the paper is silent: weights are loaded by
// shifting them down the columns (w_load high for N cycles, the weights of
// array row N-1 first); the checksum weight of a row is summed from the
// same weight row while it is loaded, by an adder tree at the top of the
// checksum column.  Inputs are expected already skewed: element r of x_j
// must arrive on x_in[r] in cycle t_j + r (x_valid[r] marks it).  Output
// y_c of x_j appears on y_out[c] with y_valid[c] in cycle t_j + N + c, and
// the checksum pair of x_j in cycle t_j + 2N.
//
// inj_flip/inj_bit flip bit inj_bit of y_out[c] for the columns whose
// inj_flip bit is set, before the e^T Y adders see it.  It models the
// timing errors in the INT32 accumulation results that the paper's error
// model assumes, and exists so that the checking path can be exercised.
//
// Size: the paper's arrays are 256 x 256.  The default here is N = 128
// because a Verilator lint of the two 256 x 256 arrays and the core side by
// side needs more than 32 GB (measured 0.47 GB per array at N = 64 and
// 3.5 GB for the core at N = 128, growing with the PE count).  N = 256 is a
// legal parameter value and all widths are chosen for it.
module ws_abft_array
  import realm_pkg::*;
#(
  parameter int unsigned N = 128   // 256 in the paper, see the note above
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 w_load,
  input  logic signed [DW-1:0] w_row   [N],   // W[c][r] for c = 0..N-1, one array row
  input  logic signed [DW-1:0] x_in    [N],
  input  logic                 x_valid [N],
  input  logic [N-1:0]         inj_flip,
  input  logic [4:0]           inj_bit,
  output logic signed [PW-1:0] y_out   [N],
  output logic                 y_valid [N],
  output logic                 pair_valid,
  output cks_pair_t            pair
);

  // weight chains (vertical), inputs (horizontal), partial sums (vertical)
  logic signed [DW-1:0]  w_v   [N+1][N];
  logic signed [CSW-1:0] wc_v  [N+1];
  logic signed [DW-1:0]  x_h   [N][N+2];
  logic                  xv_h  [N][N+2];
  logic signed [PW-1:0]  p_v   [N+1][N+1];
  logic                  pv_v  [N+1][N+1];
  logic signed [CSW-1:0] wsum;

  // checksum weight of the row being loaded: e^T W for that row
  always_comb begin
    wsum = '0;
    for (int unsigned c = 0; c < N; c++) wsum = wsum + CSW'(w_row[c]);
  end

  assign wc_v[0] = wsum;

  for (genvar c = 0; c < N; c++) begin : g_top
    assign w_v[0][c] = w_row[c];
  end
  for (genvar c = 0; c <= N; c++) begin : g_ptop
    assign p_v[0][c]  = '0;
    assign pv_v[0][c] = 1'b0;
  end

  for (genvar r = 0; r < N; r++) begin : g_row
    assign x_h[r][0]  = x_in[r];
    assign xv_h[r][0] = x_valid[r];
    for (genvar c = 0; c < N; c++) begin : g_col
      pe_ws #(.DW(DW), .WW(DW), .PW(PW)) u_pe (
        .clk         (clk),
        .rst_n       (rst_n),
        .w_load      (w_load),
        .w_in        (w_v[r][c]),
        .w_out       (w_v[r+1][c]),
        .x_in        (x_h[r][c]),
        .x_valid_in  (xv_h[r][c]),
        .x_out       (x_h[r][c+1]),
        .x_valid_out (xv_h[r][c+1]),
        .p_in        (p_v[r][c]),
        .p_out       (p_v[r+1][c]),
        .p_valid_out (pv_v[r+1][c])
      );
    end
    // checksum column PE (stores an element of e^T W)
    pe_ws #(.DW(DW), .WW(CSW), .PW(CKW)) u_cpe (
      .clk         (clk),
      .rst_n       (rst_n),
      .w_load      (w_load),
      .w_in        (wc_v[r]),
      .w_out       (wc_v[r+1]),
      .x_in        (x_h[r][N]),
      .x_valid_in  (xv_h[r][N]),
      .x_out       (x_h[r][N+1]),
      .x_valid_out (xv_h[r][N+1]),
      .p_in        (p_v[r][N]),
      .p_out       (p_v[r+1][N]),
      .p_valid_out (pv_v[r+1][N])
    );
  end

  // outputs with optional injected bit flips
  for (genvar c = 0; c < N; c++) begin : g_out
    assign y_out[c]   = p_v[N][c] ^ (inj_flip[c] ? (PW'(1) << inj_bit) : PW'(0));
    assign y_valid[c] = pv_v[N][c];
  end

  // bottom row of adders: e^T Y, passed left to right one column per cycle
  logic signed [CKW-1:0] s_q  [N];
  logic                  sv_q [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned c = 0; c < N; c++) begin
        s_q[c]  <= '0;
        sv_q[c] <= 1'b0;
      end
    end else begin
      s_q[0]  <= CKW'(y_out[0]);
      sv_q[0] <= y_valid[0];
      for (int unsigned c = 1; c < N; c++) begin
        s_q[c]  <= s_q[c-1] + CKW'(y_out[c]);
        sv_q[c] <= y_valid[c];
      end
    end
  end

  assign pair_valid = sv_q[N-1];
  assign pair.ety   = s_q[N-1];
  assign pair.etwx  = p_v[N][N];

  // the e^T Y chain and the checksum column must stay in step
  a_pair_aligned: assert property (@(posedge clk) disable iff (!rst_n) sv_q[N-1] == pv_v[N][N])
    else $error("ws_abft_array: e^T Y and e^T W X out of step");

endmodule

// stat_unit: the statistical unit of statistical ABFT.
//
// An array delivers, for every tile, N checksum pairs (e^T Y, e^T W X), one
// per cycle at most.  For each pair the subtractor forms the deviation
// d = e^T Y - e^T W X; its magnitude |d| is written to the next of N buffer
// entries and added to the accumulator, so that after the N-th pair the
// accumulator holds the matrix sum deviation MSD = sum |d|.  The
// Log2LinearFunction unit then derives theta_mag = b - (a-1) log2(MSD), the
// countif unit counts the buffer entries above 2^theta_mag (freq_eff), and
// recovery is requested when freq_eff > theta_freq.  This is the structure
// of the paper's unit: subtractor, accumulator, Log2LinearFunction, n
// buffers and a comparator-based countif.
//
// Choices of this design: the accumulator sums magnitudes |d| (the paper
// says the differences are accumulated; with signed sums errors of opposite
// sign could cancel); theta_freq is compared with freq_eff itself, as in the
// text, not with log2(freq_eff).  a, b and theta_freq are run-time inputs
// because the paper fits them per network component (theta_freq = 0 gives
// the rule for sensitive components).
//
// Interface and timing: in_valid/in_pair deliver pairs; the tile ends with
// the N-th pair.  res_valid pulses for one cycle, three cycles after the
// cycle that carried the N-th pair, with
// freq_eff and recover; msd, theta_mag and freq_eff stay stable until the
// next tile ends.  in_valid must stay low while busy (the two cycles in between).
module stat_unit
  import realm_pkg::*;
#(
  parameter int unsigned N     = 256,
  parameter int unsigned MSD_W = CKW + $clog2(N),
  parameter int unsigned CW    = $clog2(N + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  cks_pair_t        in_pair,
  input  logic [A_W-1:0]   a,
  input  theta_t           b,
  input  logic [CW-1:0]    theta_freq,
  output logic             busy,
  output logic             res_valid,
  output logic             recover,
  output logic [CW-1:0]    freq_eff,
  output logic [MSD_W-1:0] msd,
  output theta_t           theta_mag
);

  typedef enum logic [1:0] {S_COLLECT, S_THETA, S_COUNT} state_e;

  state_e                  state;
  logic [$clog2(N)-1:0]    idx;
  logic [CKW-1:0]          buf_q [N];
  logic signed [CKW-1:0]   d;
  logic [CKW-1:0]          mag;
  logic                    th_valid;
  logic [CW-1:0]           cnt;

  // subtractor and magnitude (|-2^31| = 2^31 fits the unsigned word)
  assign d   = in_pair.ety - in_pair.etwx;
  assign mag = d[CKW-1] ? CKW'(-d) : CKW'(d);
  assign busy = (state != S_COLLECT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_COLLECT;
      idx   <= '0;
      msd   <= '0;
    end else begin
      case (state)
        S_COLLECT: if (in_valid) begin
          msd <= (idx == '0) ? MSD_W'(mag) : msd + MSD_W'(mag);
          if (idx == $clog2(N)'(N - 1)) begin
            idx   <= '0;
            state <= S_THETA;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        S_THETA: state <= S_COUNT;
        default: state <= S_COLLECT;
      endcase
    end
  end

  // difference buffer: plain registers, all read in parallel by countif
  always_ff @(posedge clk) begin
    if (state == S_COLLECT && in_valid) buf_q[idx] <= mag;
  end

  log2_linear #(.MSD_W(MSD_W)) u_log2 (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (state == S_THETA),
    .msd       (msd),
    .a         (a),
    .b         (b),
    .out_valid (th_valid),
    .theta_mag (theta_mag)
  );

  countif #(.N(N), .MW(CKW), .CW(CW)) u_countif (
    .mag       (buf_q),
    .theta_mag (theta_mag),
    .freq_eff  (cnt)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid <= 1'b0;
      recover   <= 1'b0;
      freq_eff  <= '0;
    end else begin
      res_valid <= th_valid;
      if (th_valid) begin
        freq_eff <= cnt;
        recover  <= cnt > theta_freq;
      end
    end
  end

  // pairs may not arrive while the result is being formed
  a_no_pair_when_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !in_valid)
    else $error("stat_unit: checksum pair delivered while busy");

endmodule

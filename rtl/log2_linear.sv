// log2_linear: the Log2LinearFunction unit of the statistical unit.
//
// It turns the matrix sum deviation MSD of a tile into the magnitude
// threshold of the paper's detection rule,
//     theta_mag = b - (a - 1) * log2(MSD),
// where a > 1 is the fitted slope and -b the fitted intercept of the
// boundary line log2(freq) = a*log2(MSD) - b of the critical error region.
// theta_mag is a log2 magnitude: a single error counts as significant when
// log2|error| exceeds it.
//
// Number formats (this design's choice; the paper gives none): a is unsigned
// Q4.4, b and theta_mag are signed Q11.4, log2(MSD) is computed with
// realm_pkg::log2_fx (leading-one position plus LOG_FRAC mantissa bits).
// The product is truncated toward minus infinity and the result saturated to
// THETA_W bits.  An MSD of zero means no deviation at all; theta_mag is then
// the largest representable value so that nothing is counted.
//
// Timing: one register stage; theta_mag and out_valid follow in_valid by one
// cycle.
module log2_linear
  import realm_pkg::*;
#(
  parameter int unsigned MSD_W = 40   // width of the MSD accumulator
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [MSD_W-1:0] msd,
  input  logic [A_W-1:0]   a,          // slope, unsigned Q4.4
  input  theta_t           b,          // intercept magnitude, signed Q11.4
  output logic             out_valid,
  output theta_t           theta_mag
);

  localparam int unsigned PRODW = A_W + 2 + LOG_W;

  log_fx_t                  l2;
  logic signed [A_W+1:0]    am1;
  logic signed [PRODW-1:0]  prod;
  logic signed [PRODW-1:0]  diff;
  theta_t                   theta_d;

  localparam theta_t THETA_MAX = theta_t'({1'b0, {(THETA_W-1){1'b1}}});
  localparam theta_t THETA_MIN = theta_t'({1'b1, {(THETA_W-1){1'b0}}});

  always_comb begin
    l2   = log2_fx(64'(msd));
    am1  = $signed({2'b00, a}) - $signed((A_W+2)'(1 << LOG_FRAC));
    prod = PRODW'(am1) * PRODW'(l2);                       // Q.8
    diff = PRODW'(b) - (prod >>> LOG_FRAC);                // Q.4
    if (msd == '0)
      theta_d = THETA_MAX;
    else if (diff > PRODW'(THETA_MAX))
      theta_d = THETA_MAX;
    else if (diff < PRODW'(THETA_MIN))
      theta_d = THETA_MIN;
    else
      theta_d = theta_t'(diff);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      theta_mag <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) theta_mag <= theta_d;
    end
  end

endmodule

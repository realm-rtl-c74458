// countif: parallel comparator bank and population count of the statistical
// unit.
//
// All N buffered error magnitudes are compared at once with the magnitude
// threshold, and the number that exceed it is the effective error frequency
// freq_eff = countif(|d_i| > 2^theta_mag).  The paper's unit is
// "comparator-based" and evaluates the buffer in parallel; comparing in the
// linear domain against one threshold 2^theta_mag (built once with
// realm_pkg::antilog_fx) instead of taking N logarithms is this design's
// choice.  A zero magnitude is never counted.
//
// Purely combinational: freq_eff follows the inputs in the same cycle.
module countif
  import realm_pkg::*;
#(
  parameter int unsigned N  = 256,          // buffer entries, one per checksum pair
  parameter int unsigned MW = 32,           // magnitude width
  parameter int unsigned CW = $clog2(N + 1) // count width
) (
  input  logic [MW-1:0] mag [N],
  input  theta_t        theta_mag,
  output logic [CW-1:0] freq_eff
);

  logic [63:0] thr;
  logic [N-1:0] hit;

  assign thr = antilog_fx(theta_mag);

  always_comb begin
    freq_eff = '0;
    for (int unsigned i = 0; i < N; i++) begin
      hit[i]   = 64'(mag[i]) > thr;
      freq_eff = freq_eff + CW'(hit[i]);
    end
  end

endmodule

// realm_pkg: widths, types and the fixed-point log2 shared by the statistical
// ABFT systolic-array design.
//
// Data follow the INT8-in / INT32-out GEMM convention: operands are signed
// 8-bit, products and partial sums are 32-bit two's complement.  The checksum
// weights e^T W are 16 bits wide (a sum of 256 INT8 weights), the checksums
// e^T Y and e^T W X are 32 bits wide, as printed in the array figure of the
// paper.
//
// The statistical unit works in the log2 domain.  Log values are signed
// fixed-point numbers with LOG_FRAC fractional bits.  log2_fx() returns the
// position of the leading one as the integer part and the next LOG_FRAC bits
// below it as the fraction (Mitchell's piecewise-linear approximation
// log2(1+f) ~= f).  The fraction width and the approximation are choices of
// this design; the paper only names a "Log2LinearFunction" unit.
package realm_pkg;

  localparam int unsigned DW       = 8;   // INT8 operands
  localparam int unsigned PW       = 32;  // INT32 partial sums and outputs
  localparam int unsigned CSW      = 16;  // e^T W checksum weights ("16bit e^T W")
  localparam int unsigned CKW      = 32;  // e^T Y and e^T W X ("32bit")
  localparam int unsigned LOG_FRAC = 4;   // fractional bits of log-domain values
  localparam int unsigned LOG_W    = 12;  // width of a log2 value, signed Q7.4
  localparam int unsigned THETA_W  = 16;  // width of theta_mag, signed Q11.4
  localparam int unsigned A_W      = 8;   // slope a, unsigned Q4.4

  typedef logic signed [LOG_W-1:0]   log_fx_t;
  typedef logic signed [THETA_W-1:0] theta_t;

  // One checksum pair as delivered by an array to the statistical unit.
  typedef struct packed {
    logic signed [CKW-1:0] ety;   // e^T Y  : sum of the computed outputs
    logic signed [CKW-1:0] etwx;  // e^T WX : checksum computed from e^T W
  } cks_pair_t;

  // Dataflow selected for a GEMM tile.
  typedef enum logic {
    DF_WS = 1'b0,   // weight stationary
    DF_OS = 1'b1    // output stationary
  } dataflow_e;

  // floor-ish log2 of a non-zero unsigned value, LOG_FRAC fraction bits.
  // Returns 0 for v == 0; callers treat zero separately.
  function automatic log_fx_t log2_fx(input logic [63:0] v);
    int unsigned   msb;
    logic [63:0]   norm;
    logic [LOG_FRAC-1:0] frac;
    msb = 0;
    for (int unsigned i = 0; i < 64; i++) begin
      if (v[i]) msb = i;
    end
    norm = v << (63 - msb);
    frac = norm[62 -: LOG_FRAC];
    return log_fx_t'({msb[LOG_W-LOG_FRAC-1:0], frac});
  endfunction

  // Linear magnitude threshold 2^theta for a log-domain theta (inverse of
  // log2_fx on its grid): (1.f) << int.  Negative theta gives 0 (every
  // non-zero error exceeds it); very large theta saturates.
  function automatic logic [63:0] antilog_fx(input theta_t theta);
    logic signed [THETA_W-1:0] ip;
    logic [LOG_FRAC:0]         mant;
    logic [63:0]               t;
    ip   = theta >>> LOG_FRAC;
    mant = {1'b1, theta[LOG_FRAC-1:0]};
    if (theta < 0)       t = '0;
    else if (ip > 58)    t = '1;
    else                 t = (64'(mant) << ip) >> LOG_FRAC;
    return t;
  endfunction

endpackage

// pe_os: output-stationary processing element.
//
// Weights travel left to right and inputs top to bottom, each through one
// register per PE; the product of the pair meeting in the PE is added to the
// accumulator that stays in place, as in the OS array of the paper.  A slot
// adds only when both w_valid_in and x_valid_in are high.
//
// The same module with WW = 16 is the checksum PE of the extra bottom row,
// which multiplies e^T W by X and so accumulates one element of e^T W X.
//
// Clearing and draining are this design's choice (the paper says only that
// outputs are accumulated vertically to form e^T Y): clear zeroes the
// accumulator; while drain is high the accumulator takes y_in, the value of
// the PE above, so a column of outputs shifts down one row per cycle and
// leaves at the bottom.  clear has priority over drain, drain over compute.
//
// Timing: w_out, x_out and their valid bits are registered (one cycle);
// y_out is the accumulator register itself.
module pe_os #(
  parameter int unsigned DW = 8,    // input width
  parameter int unsigned WW = 8,    // weight width (16 in the checksum row)
  parameter int unsigned PW = 32    // accumulator width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 drain,
  input  logic signed [WW-1:0] w_in,
  input  logic                 w_valid_in,
  output logic signed [WW-1:0] w_out,
  output logic                 w_valid_out,
  input  logic signed [DW-1:0] x_in,
  input  logic                 x_valid_in,
  output logic signed [DW-1:0] x_out,
  output logic                 x_valid_out,
  input  logic signed [PW-1:0] y_in,
  output logic signed [PW-1:0] y_out
);

  logic signed [WW+DW-1:0] prod;
  logic signed [PW-1:0]    acc_q;

  assign prod  = w_in * x_in;
  assign y_out = acc_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_out       <= '0;
      w_valid_out <= 1'b0;
      x_out       <= '0;
      x_valid_out <= 1'b0;
      acc_q       <= '0;
    end else begin
      w_out       <= w_in;
      w_valid_out <= w_valid_in;
      x_out       <= x_in;
      x_valid_out <= x_valid_in;
      if (clear)
        acc_q <= '0;
      else if (drain)
        acc_q <= y_in;
      else if (w_valid_in && x_valid_in)
        acc_q <= acc_q + {{(PW-WW-DW){prod[WW+DW-1]}}, prod};
    end
  end

endmodule

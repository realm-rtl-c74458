// pe_ws: weight-stationary processing element.
//
// The PE keeps one signed weight.  Every cycle it forwards the input x to its
// right-hand neighbour through a register and adds w*x to the partial sum
// arriving from the PE above, registering the result towards the PE below.
// An input slot whose x_valid_in is low adds nothing.  This follows the WS
// array of the paper: weights stored in the PEs, inputs moving left to right,
// partial sums moving downward.
//
// The same module, instantiated with WW = 16, is the checksum PE of the extra
// right-hand column: it stores one element of e^T W and forms e^T W X.
//
// Weight loading is this design's choice (the paper does not say how weights
// enter the array): while w_load is high the weights shift one row down per
// cycle, w_out being the stored weight handed to the PE below.
//
// Timing: x_out, x_valid_out, p_out and p_valid_out are registered, one cycle
// after the inputs.  Reset is asynchronous, active low, and
// clears every register.
module pe_ws #(
  parameter int unsigned DW = 8,    // input width
  parameter int unsigned WW = 8,    // weight width (16 in the checksum column)
  parameter int unsigned PW = 32    // partial-sum width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 w_load,
  input  logic signed [WW-1:0] w_in,
  output logic signed [WW-1:0] w_out,
  input  logic signed [DW-1:0] x_in,
  input  logic                 x_valid_in,
  output logic signed [DW-1:0] x_out,
  output logic                 x_valid_out,
  input  logic signed [PW-1:0] p_in,
  output logic signed [PW-1:0] p_out,
  output logic                 p_valid_out
);

  logic signed [WW-1:0]    w_q;
  logic signed [WW+DW-1:0] prod;

  assign prod  = w_q * x_in;
  assign w_out = w_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q         <= '0;
      x_out       <= '0;
      x_valid_out <= 1'b0;
      p_out       <= '0;
      p_valid_out <= 1'b0;
    end else begin
      if (w_load) w_q <= w_in;
      x_out       <= x_in;
      x_valid_out <= x_valid_in;
      p_valid_out <= x_valid_in;
      p_out       <= x_valid_in ? p_in + {{(PW-WW-DW){prod[WW+DW-1]}}, prod} : p_in;
    end
  end

endmodule

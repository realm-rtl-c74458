// tb_pe_ws: self-checking test of the weight-stationary PE.
// Loads random weights (8- and 16-bit instances), streams random inputs and
// partial sums with random valid bits and checks every registered output
// one cycle later against w*x + p computed here.
module tb_pe_ws;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic w_load;
  logic signed [7:0]  w_in, x_in, x_out, w_out;
  logic signed [15:0] cw_in, cw_out;
  logic signed [7:0]  cx_out;
  logic xv, xv_out, pv_out, cxv_out, cpv_out;
  logic signed [31:0] p_in, p_out, cp_out;

  pe_ws #(.DW(8), .WW(8),  .PW(32)) dut  (.clk, .rst_n, .w_load, .w_in, .w_out,
    .x_in, .x_valid_in(xv), .x_out, .x_valid_out(xv_out), .p_in, .p_out, .p_valid_out(pv_out));
  pe_ws #(.DW(8), .WW(16), .PW(32)) dutc (.clk, .rst_n, .w_load, .w_in(cw_in), .w_out(cw_out),
    .x_in, .x_valid_in(xv), .x_out(cx_out), .x_valid_out(cxv_out), .p_in, .p_out(cp_out), .p_valid_out(cpv_out));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic signed [7:0]  w_ref, x_prev;
    logic signed [15:0] cw_ref;
    logic signed [31:0] p_prev;
    logic xv_prev;
    w_load = 0; w_in = 0; cw_in = 0; x_in = 0; xv = 0; p_in = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      @(negedge clk);
      w_load = 1; w_in = 8'($urandom); cw_in = 16'($urandom);
      if (t == 0) begin w_in = -8'sd128; cw_in = -16'sd32768; end
      @(negedge clk);
      w_load = 0; w_ref = w_in; cw_ref = cw_in;
      chk(w_out == w_ref && cw_out == cw_ref, "weight load");
      for (int k = 0; k < 10; k++) begin
        x_in = 8'($urandom); xv = ($urandom % 4) != 0; p_in = 32'($urandom);
        if (k == 0) x_in = -8'sd128;
        w_in = 8'($urandom);  // must be ignored while w_load is low
        x_prev = x_in; xv_prev = xv; p_prev = p_in;
        @(negedge clk);
        chk(x_out == x_prev && xv_out == xv_prev && pv_out == xv_prev, "x pass");
        chk(p_out == (xv_prev ? p_prev + 32'(int'(w_ref) * int'(x_prev)) : p_prev), "psum");
        chk(cp_out == (xv_prev ? p_prev + 32'(int'(cw_ref) * int'(x_prev)) : p_prev), "checksum psum");
        chk(w_out == w_ref, "weight held");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_pe_os: self-checking test of the output-stationary PE.
// Drives random weight/input pairs with random valid bits and random clear
// and drain pulses, keeps its own accumulator and checks the accumulator and
// the forwarded operands every cycle, for the 8-bit and the 16-bit weight
// instance.
module tb_pe_os;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, drain, wv, xv;
  logic signed [7:0]  w_in, x_in, w_out, x_out, cx_out;
  logic signed [15:0] cw_in, cw_out;
  logic wv_out, xv_out, cwv_out, cxv_out;
  logic signed [31:0] y_in, y_out, cy_out;

  pe_os #(.DW(8), .WW(8),  .PW(32)) dut  (.clk, .rst_n, .clear, .drain, .w_in, .w_valid_in(wv),
    .w_out, .w_valid_out(wv_out), .x_in, .x_valid_in(xv), .x_out, .x_valid_out(xv_out), .y_in, .y_out);
  pe_os #(.DW(8), .WW(16), .PW(32)) dutc (.clk, .rst_n, .clear, .drain, .w_in(cw_in), .w_valid_in(wv),
    .w_out(cw_out), .w_valid_out(cwv_out), .x_in, .x_valid_in(xv), .x_out(cx_out), .x_valid_out(cxv_out),
    .y_in, .y_out(cy_out));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic signed [31:0] acc, cacc;
    int n_clear = 0, n_drain = 0, n_mac = 0;
    clear = 0; drain = 0; wv = 0; xv = 0; w_in = 0; cw_in = 0; x_in = 0; y_in = 0;
    acc = 0; cacc = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      clear = ($urandom % 50) == 0;
      drain = ($urandom % 20) == 0;
      wv = ($urandom % 5) != 0; xv = ($urandom % 5) != 0;
      w_in = 8'($urandom); cw_in = 16'($urandom); x_in = 8'($urandom); y_in = 32'($urandom);
      if (clear) begin acc = 0; cacc = 0; n_clear++; end
      else if (drain) begin acc = y_in; cacc = y_in; n_drain++; end
      else if (wv && xv) begin
        acc  = acc  + 32'(int'(w_in)  * int'(x_in));
        cacc = cacc + 32'(int'(cw_in) * int'(x_in));
        n_mac++;
      end
      @(negedge clk);
      chk(y_out == acc && cy_out == cacc, "accumulator");
      chk(w_out == w_in && wv_out == wv && x_out == x_in && xv_out == xv && cw_out == cw_in, "forwarding");
    end
    chk(n_clear > 0 && n_drain > 0 && n_mac > 0, "all modes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

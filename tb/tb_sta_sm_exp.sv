// tb_sta_sm_exp: self-checking test of the softmax exponential unit.
// Sweeps the input over [-8, 8) (and beyond, to see the clamping) with a
// valid beat every cycle, and compares each output, two cycles later, with
// e^x from the real-valued $exp, allowing the error of the table-plus-linear
// approximation (0.2 % relative) plus 2 LSBs.
module tb_sta_sm_exp;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic signed [15:0] x;
  logic valid, valid_o;
  logic [23:0] e;
  sta_sm_exp dut (.clk_i(clk), .rst_ni(rst_n), .x_i(x), .valid_i(valid), .e_o(e), .valid_o(valid_o));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int xs [$];
  initial begin
    x = 0; valid = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int v = -2048; v < 2048; v += 3) xs.push_back(v);
    xs.push_back(-3000); xs.push_back(3000);
    for (int i = 0; i < xs.size() + 2; i++) begin
      @(negedge clk);
      valid = (i < xs.size());
      x = (i < xs.size()) ? 16'(xs[i]) : '0;
      if (i >= 2) begin
        real xv, ref_v, got;
        xv = real'(xs[i-2]) / 256.0;
        if (xv < -8.0) xv = -8.0;
        if (xv > 7.99609375) xv = 7.99609375;
        ref_v = $exp(xv) * 4096.0;
        got = real'(e);
        check(valid_o, "valid latency 2");
        check((got - ref_v < ref_v * 0.002 + 2.0) && (ref_v - got < ref_v * 0.002 + 2.0),
              $sformatf("x=%0d got %0d want %f", xs[i-2], e, ref_v));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sta_vector_unit: self-checking test of the vector unit.
// Random accumulator values, bias and residual words and random settings of
// bias/residual/ReLU enables and of the output shift, including values that
// must saturate.  Each output beat must appear exactly one cycle after its
// input and match a reference model (add bias and residual at the
// accumulator's scale, ReLU, round-half-up shift, saturate to 16 bits).
module tb_sta_vector_unit;
  localparam int L = 32;
  int checks = 0, failures = 0, sats = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  sta_pkg::vec_cfg_t cfg;
  logic valid, valid_o, sat;
  logic [L-1:0][31:0] acc;
  logic [L-1:0][15:0] bias, res, y;
  sta_vector_unit #(.LANES(L)) dut (.clk_i(clk), .rst_ni(rst_n), .cfg_i(cfg), .valid_i(valid),
    .acc_i(acc), .bias_i(bias), .res_i(res), .y_o(y), .valid_o(valid_o), .sat_o(sat));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0; valid = 0; acc = '0; bias = '0; res = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      logic [L-1:0][15:0] want;
      logic want_sat;
      @(negedge clk);
      cfg.bias_en = 1'($urandom); cfg.res_en = 1'($urandom); cfg.relu_en = 1'($urandom);
      cfg.qshift = 5'($urandom_range(0, 12));
      valid = 1'($urandom_range(0, 3) != 0);
      want_sat = 0;
      for (int l = 0; l < L; l++) begin
        longint v;
        acc[l] = (t % 4 == 0) ? 32'($urandom) : 32'($urandom_range(0, 1 << 20) - (1 << 19));
        bias[l] = 16'($urandom); res[l] = 16'($urandom);
        v = longint'($signed(acc[l]));
        if (cfg.bias_en) v += longint'($signed(bias[l])) * 256;
        if (cfg.res_en) v += longint'($signed(res[l])) * 256;
        if (cfg.relu_en && v < 0) v = 0;
        if (cfg.qshift != 0) v += longint'(1) << (cfg.qshift - 1);
        v = v >>> cfg.qshift;
        if (v > 32767) begin v = 32767; want_sat = 1; end
        if (v < -32768) begin v = -32768; want_sat = 1; end
        want[l] = 16'(v);
      end
      @(posedge clk); #1;
      check(valid_o == valid, "valid latency 1");
      check(y == want, $sformatf("beat %0d data", t));
      check(sat == (valid & want_sat), "saturation flag");
      if (sat) sats++;
    end
    check(sats > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

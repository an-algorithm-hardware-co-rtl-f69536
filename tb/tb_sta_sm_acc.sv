// tb_sta_sm_acc: self-checking test of the configurable partial-sum
// accumulator.  Random vector lengths (cfg_acc_len) and random beats with
// gaps; checks the sum, that done rises exactly after the last beat, and that
// beats after done are ignored.
module tb_sta_sm_acc;
  localparam int P = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, valid, done;
  logic [15:0] len;
  logic [P-1:0][23:0] e;
  logic [33:0] sum;
  sta_sm_acc #(.P(P)) dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .cfg_acc_len_i(len),
    .e_i(e), .valid_i(valid), .sum_o(sum), .done_o(done));

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
    start = 0; valid = 0; len = 0; e = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int v = 0; v < 40; v++) begin
      longint ref_s;
      int L;
      ref_s = 0; L = $urandom_range(1, 64);
      @(negedge clk); start = 1; len = 16'(L);
      @(negedge clk); start = 0;
      for (int b = 0; b < L; b++) begin
        if ($urandom_range(0, 3) == 0) begin valid = 0; @(negedge clk); end
        valid = 1;
        for (int p = 0; p < P; p++) begin e[p] = 24'($urandom); ref_s += e[p]; end
        check(!done, "done not before last beat");
        @(negedge clk);
      end
      valid = 1;                            // an extra beat after the end
      for (int p = 0; p < P; p++) e[p] = 24'hffffff;
      check(done, "done after last beat");
      check(sum == 34'(ref_s), $sformatf("vector %0d sum", v));
      @(negedge clk); valid = 0;
      check(sum == 34'(ref_s), "beats after done ignored");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

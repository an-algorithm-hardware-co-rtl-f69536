// tb_sta_nzes: self-checking test of the non-zero element selector.
// Two instances: the default 2:8 selector with random masks of 0..N set bits,
// and a 3:4 selector driven with the paper's example mask 1101, whose one-hot
// masks must be 0001, 0100, 1000.  The reference picks the n-th set bit by
// scanning the mask from bit 0.
module tb_sta_nzes;
  localparam int N = 2, M = 8, W = 16;
  int checks = 0, failures = 0;

  logic [M-1:0]          mask;
  logic [M-1:0][W-1:0]   act;
  logic [N-1:0][W-1:0]   sel;
  logic [N-1:0][M-1:0]   oh;
  sta_nzes #(.N(N), .M(M), .DATA_W(W)) dut (.mask_i(mask), .act_i(act), .sel_o(sel), .onehot_o(oh));

  logic [3:0]          mask4;
  logic [3:0][W-1:0]   act4;
  logic [2:0][W-1:0]   sel4;
  logic [2:0][3:0]     oh4;
  sta_nzes #(.N(3), .M(4), .DATA_W(W)) dut4 (.mask_i(mask4), .act_i(act4), .sel_o(sel4), .onehot_o(oh4));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Paper example
    mask4 = 4'b1101;
    for (int m = 0; m < 4; m++) act4[m] = W'(100 + m);
    #1;
    check(oh4[0] == 4'b0001 && oh4[1] == 4'b0100 && oh4[2] == 4'b1000, "example one-hot masks");
    check(sel4[0] == 100 && sel4[1] == 102 && sel4[2] == 103, "example selection");

    for (int t = 0; t < 2000; t++) begin
      int k, cnt;
      mask = '0;
      k = $urandom_range(0, N);
      while ($countones(mask) < k) mask[$urandom_range(0, M-1)] = 1'b1;
      for (int m = 0; m < M; m++) act[m] = W'($urandom);
      #1;
      cnt = 0;
      for (int n = 0; n < N; n++) begin
        logic [W-1:0] exp_v;
        logic [M-1:0] exp_oh;
        exp_v = '0; exp_oh = '0; cnt = 0;
        for (int m = 0; m < M; m++) if (mask[m]) begin
          if (cnt == n) begin exp_v = act[m]; exp_oh[m] = 1'b1; end
          cnt++;
        end
        check(sel[n] == exp_v && oh[n] == exp_oh, $sformatf("mask %b lane %0d", mask, n));
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

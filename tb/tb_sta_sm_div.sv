// tb_sta_sm_div: self-checking test of the Q-stage pipelined divider.
// A new division every cycle (a <= b, random); each quotient must appear
// exactly Q cycles later and equal floor(a * 2^(Q-1) / b).
module tb_sta_sm_div;
  localparam int Q = 16, AW = 34;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [AW-1:0] a, b;
  logic valid, valid_o;
  logic [Q-1:0] q;
  sta_sm_div #(.Q(Q), .A_W(AW)) dut (.clk_i(clk), .rst_ni(rst_n), .a_i(a), .b_i(b), .valid_i(valid),
    .q_o(q), .valid_o(valid_o));

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

  longint qa [$], qb [$];
  initial begin
    a = '0; b = 1; valid = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3000 + Q; i++) begin
      @(negedge clk);
      if (i >= Q) begin
        longint ea, eb;
        ea = qa.pop_front(); eb = qb.pop_front();
        check(valid_o, "valid after Q cycles");
        check(q == Q'((ea << (Q-1)) / eb), $sformatf("%0d / %0d got %0d", ea, eb, q));
      end
      if (i < 3000) begin
        longint bb, aa;
        bb = (i % 3 == 0) ? longint'($urandom_range(1, 1000)) : ((longint'($urandom) << 1) | 1);
        aa = (i % 7 == 0) ? bb : (bb * longint'($urandom_range(0, 65535))) / 65536;
        a = AW'(aa); b = AW'(bb); valid = 1;
        qa.push_back(aa); qb.push_back(bb);
      end else valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sta_softmax: self-checking test of the scalable softmax module.
// Vectors of random length (1..BUF_DEPTH beats of P elements) with inputs in
// [-6, 6) are streamed in one beat per cycle.  Checks:
//  * every output element against e^x / sum e^x from real arithmetic
//    (Q-1 = 15 fraction bits; tolerance 0.5 % relative + 3 LSB, covering the
//    exponential approximation);
//  * the outputs come one beat per cycle, in input order;
//  * the first output appears exactly 5 + Q cycles after the last input beat
//    (2 exponential stages, sum register, division start, buffer read, Q
//    divider stages) and done_o follows the last output beat by one cycle.
module tb_sta_softmax;
  localparam int P = 16, Q = 16, DEPTH = 64;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, valid, valid_o, done;
  logic [15:0] len;
  logic [P-1:0][15:0] x;
  logic [P-1:0][Q-1:0] y;
  int cyc = 0;
  always @(posedge clk) cyc++;

  sta_softmax #(.P(P), .Q(Q), .BUF_DEPTH(DEPTH)) dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start),
    .cfg_acc_len_i(len), .x_i(x), .valid_i(valid), .y_o(y), .valid_o(valid_o), .done_o(done));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int xv [DEPTH][P];
  initial begin
    start = 0; valid = 0; len = 0; x = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int v = 0; v < 30; v++) begin
      int L, last_in, first_out, ob;
      real s;
      L = (v == 0) ? DEPTH : (v == 1) ? 1 : $urandom_range(1, DEPTH);
      s = 0.0;
      for (int b = 0; b < L; b++) for (int p = 0; p < P; p++) begin
        xv[b][p] = $urandom_range(0, 3071) - 1536;
        s += $exp(real'(xv[b][p]) / 256.0);
      end
      @(negedge clk); start = 1; len = 16'(L);
      @(negedge clk); start = 0;
      for (int b = 0; b < L; b++) begin
        valid = 1;
        for (int p = 0; p < P; p++) x[p] = 16'(xv[b][p]);
        last_in = cyc;
        @(negedge clk);
      end
      valid = 0;
      ob = 0; first_out = -1;
      while (ob < L) begin
        @(posedge clk); #1;
        if (valid_o) begin
          if (ob == 0) first_out = cyc;
          else check(cyc == first_out + ob, "one output beat per cycle");
          for (int p = 0; p < P; p++) begin
            real want, got;
            want = $exp(real'(xv[ob][p]) / 256.0) / s * 32768.0;
            got = real'(y[p]);
            check((got - want < want * 0.005 + 3.0) && (want - got < want * 0.005 + 3.0),
                  $sformatf("vec %0d beat %0d elem %0d got %0d want %f", v, ob, p, y[p], want));
          end
          ob++;
        end
      end
      check(first_out - last_in == 5 + Q, $sformatf("latency %0d", first_out - last_in));
      @(posedge clk); #1;
      check(done, "done one cycle after last output");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

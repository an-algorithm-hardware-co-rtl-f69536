// tb_sta_softmax_ctrl: self-checking test of the softmax controller driving
// a real softmax module, with a behavioural intermediate memory (one-cycle
// synchronous read) in this file.  Random vectors of 1..16 words (64
// elements each) at random source and destination bases; every written
// element is compared with e^x / sum e^x (Q1.15, 0.5 % + 3 LSB), the
// destination words must each be written exactly once, no word outside the
// destination may change, and done_o must pulse once at the end.
module tb_sta_softmax_ctrl;
  import sta_pkg::*;
  localparam int WE = H_DEF * R_DEF * N_DEF, TA = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic go, re, we, sm_start, sm_in_v, sm_out_v, sm_fin, busy, done;
  instr_t ins;
  logic [TA-1:0] raddr, waddr;
  logic [WE-1:0][15:0] rdata, wdata;
  logic [15:0] sm_len;
  logic [SM_P_DEF-1:0][15:0] sm_x;
  logic [SM_P_DEF-1:0][SM_Q_DEF-1:0] sm_y;

  sta_softmax_ctrl #(.TMEM_AW(TA)) dut (.clk_i(clk), .rst_ni(rst_n), .go_i(go), .instr_i(ins),
    .tmem_re_o(re), .tmem_raddr_o(raddr), .tmem_rdata_i(rdata), .tmem_we_o(we),
    .tmem_waddr_o(waddr), .tmem_wdata_o(wdata), .sm_start_o(sm_start), .sm_len_o(sm_len),
    .sm_x_o(sm_x), .sm_valid_o(sm_in_v), .sm_y_i(sm_y), .sm_valid_i(sm_out_v),
    .sm_done_i(sm_fin), .busy_o(busy), .done_o(done));
  sta_softmax u_sm (.clk_i(clk), .rst_ni(rst_n), .start_i(sm_start), .cfg_acc_len_i(sm_len),
    .x_i(sm_x), .valid_i(sm_in_v), .y_o(sm_y), .valid_o(sm_out_v), .done_o(sm_fin));

  logic [WE-1:0][15:0] mem [1 << TA];
  int wcount [1 << TA];
  always @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we) begin mem[waddr] <= wdata; wcount[waddr]++; end
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [WE-1:0][15:0] orig [1 << TA];
  initial begin
    go = 0; ins = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      int W, src, dst, nd;
      real s;
      W = (t == 0) ? 16 : $urandom_range(1, 16);
      src = $urandom_range(0, 100); dst = src + W + $urandom_range(0, 50);
      foreach (mem[a]) for (int e = 0; e < WE; e++) mem[a][e] = 16'($urandom_range(0, 4095) - 2048);
      foreach (wcount[a]) wcount[a] = 0;
      orig = mem;
      s = 0.0;
      for (int w = 0; w < W; w++) for (int e = 0; e < WE; e++) s += $exp(real'($signed(mem[src + w][e])) / 256.0);
      @(negedge clk);
      ins = '0; ins.op = OP_SOFTMAX; ins.a = AF_W'(src); ins.b = AF_W'(dst); ins.c = AF_W'(W);
      go = 1; @(negedge clk); go = 0;
      nd = 0;
      while (!done) begin @(negedge clk); check(busy || done, "busy while running"); end
      @(negedge clk);
      check(!done && !busy, "done is one pulse");
      foreach (mem[a]) begin
        if (a >= dst && a < dst + W) begin
          check(wcount[a] == 1, $sformatf("word %0d written once", a));
          for (int e = 0; e < WE; e++) begin
            real want;
            want = $exp(real'($signed(orig[src + a - dst][e])) / 256.0) / s * 32768.0;
            check((real'(mem[a][e]) - want < want * 0.005 + 3.0) && (want - real'(mem[a][e]) < want * 0.005 + 3.0),
                  $sformatf("word %0d elem %0d got %0d want %f", a, e, mem[a][e], want));
          end
        end else check(wcount[a] == 0 && mem[a] == orig[a], $sformatf("word %0d untouched", a));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

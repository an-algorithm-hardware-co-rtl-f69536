// tb_sta_matmul_ctrl: self-checking test of the MatMul controller phases.
// For random group counts G, a cycle-by-cycle trace after go is compared
// with the expected schedule: STREAM for G cycles (g = 0..G-1),
// dmme_valid one cycle behind it (first on group 0), DRAIN for R+C cycles,
// C shift-read cycles (j = 0..C-1), C shift / vector-valid cycles starting
// one cycle after the first shift read, then done one cycle after the
// (randomly delayed) write-back completion.
module tb_sta_matmul_ctrl;
  import sta_pkg::*;
  localparam int R = R_DEF, C = C_DEF;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic go, stream, shift_rd, dvalid, dfirst, dshift, vvalid, wb_done, busy, done;
  logic [AF_W-1:0] groups, g, j;
  sta_matmul_ctrl #(.R(R), .C(C)) dut (.clk_i(clk), .rst_ni(rst_n), .go_i(go), .groups_i(groups),
    .stream_o(stream), .g_o(g), .shift_rd_o(shift_rd), .j_o(j), .dmme_valid_o(dvalid),
    .dmme_first_o(dfirst), .dmme_shift_o(dshift), .vec_valid_o(vvalid), .wb_done_i(wb_done),
    .busy_o(busy), .done_o(done));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    go = 0; groups = '0; wb_done = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int G, D, S0, cyc, wb_at;
      G = (t == 0) ? 1 : $urandom_range(1, 300);
      D = G + R + C;                 // first shift-read cycle
      S0 = D + 1;                    // first shift cycle
      wb_at = S0 + C + $urandom_range(1, 10);
      @(negedge clk); go = 1; groups = AF_W'(G);
      @(negedge clk); go = 0;
      cyc = 0;                       // cycle 0: first cycle after go
      while (1) begin
        wb_done = (cyc == wb_at);
        #1;
        check(stream == (cyc < G), $sformatf("G=%0d stream at %0d", G, cyc));
        if (cyc < G) check(g == AF_W'(cyc), "group index");
        check(dvalid == (cyc >= 1 && cyc <= G), $sformatf("G=%0d dmme_valid at %0d", G, cyc));
        check(dfirst == (cyc == 1), "dmme_first");
        check(shift_rd == (cyc >= D && cyc < D + C), $sformatf("G=%0d shift_rd at %0d", G, cyc));
        if (shift_rd) check(j == AF_W'(cyc - D), "shift step");
        check(dshift == (cyc >= S0 && cyc < S0 + C), $sformatf("G=%0d shift at %0d", G, cyc));
        check(vvalid == dshift, "vector valid with shift");
        check(busy, "busy");
        @(negedge clk); cyc++;
        if (cyc > wb_at) break;
      end
      wb_done = 0; #1;
      check(done, "done one cycle after write-back");
      @(negedge clk);
      check(!busy && !done, "idle after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sta_top_ctrl: self-checking test of the top controller.
// Random programs of LOAD/STORE/MATMUL/SOFTMAX instructions ending in END
// are written into the instruction buffer; stub units answer each go pulse
// with a done pulse after a random delay.  Checks that every instruction is
// dispatched once, in order, to the right unit with instr_o equal to the
// stored instruction, that nothing is dispatched while a unit is busy, and
// that done_o pulses once at END with busy_o high in between.
module tb_sta_top_ctrl;
  import sta_pkg::*;
  localparam int IAW = $clog2(IBUF_DEPTH_DEF);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic we, start, busy, done, dma_go, dma_done, mm_go, mm_done, sm_go, sm_done;
  logic [IAW-1:0] waddr;
  instr_t wdata, instr;
  sta_top_ctrl dut (.clk_i(clk), .rst_ni(rst_n), .ibuf_we_i(we), .ibuf_waddr_i(waddr),
    .ibuf_wdata_i(wdata), .start_i(start), .busy_o(busy), .done_o(done), .instr_o(instr),
    .dma_go_o(dma_go), .dma_done_i(dma_done), .mm_go_o(mm_go), .mm_done_i(mm_done),
    .sm_go_o(sm_go), .sm_done_i(sm_done));

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

  // stub units
  int pending = -1, n_done = 0;
  int unit_q;                     // 0 dma, 1 mm, 2 sm
  instr_t prog [$];
  int idx;
  always @(posedge clk) begin
    dma_done <= 0; mm_done <= 0; sm_done <= 0;
    if (done) n_done++;
    if (!rst_n) ;
    else if (dma_go || mm_go || sm_go) begin
      check($onehot({dma_go, mm_go, sm_go}), "one go at a time");
      check(pending < 0, "no dispatch while a unit is busy");
      check(idx < prog.size() && instr == prog[idx], $sformatf("instruction %0d dispatched in order", idx));
      case (prog[idx].op)
        OP_LOAD, OP_STORE: check(dma_go, "LOAD/STORE go to the DMA");
        OP_MATMUL:         check(mm_go, "MATMUL goes to the MatMul controller");
        default:           check(sm_go, "SOFTMAX goes to the softmax controller");
      endcase
      unit_q = dma_go ? 0 : mm_go ? 1 : 2;
      pending = $urandom_range(0, 6);
      idx++;
    end else if (pending == 0) begin
      if (unit_q == 0) dma_done <= 1; else if (unit_q == 1) mm_done <= 1; else sm_done <= 1;
      pending = -1;
    end else if (pending > 0) pending--;
  end

  initial begin
    we = 0; waddr = '0; wdata = '0; start = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      int len, d0;
      len = $urandom_range(0, 20);
      prog.delete();
      for (int i = 0; i < len; i++) begin
        instr_t x;
        x = '0;
        for (int q = 0; q < 4; q++) x[q * 32 +: 32] = $urandom;
        x.op = opcode_e'($urandom_range(1, 4));
        prog.push_back(x);
      end
      for (int i = 0; i <= len; i++) begin
        @(negedge clk); we = 1; waddr = IAW'(i); wdata = (i < len) ? prog[i] : '0;
      end
      @(negedge clk); we = 0; idx = 0; d0 = n_done;
      start = 1; @(negedge clk); start = 0;
      while (n_done == d0) begin
        @(negedge clk);
        if (n_done == d0) check(busy || done, "busy while running");
      end
      check(idx == len, $sformatf("all %0d instructions dispatched (%0d)", len, idx));
      @(negedge clk);
      check(!busy && n_done == d0 + 1, "done once, then idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

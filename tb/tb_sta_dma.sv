// tb_sta_dma: self-checking test of the DMA engine.
// A behavioural external memory (random request stalls, random read
// latency, one outstanding read) and three behavioural on-chip memories with
// one-cycle reads live in this file.  Random LOADs into each memory are
// checked word by word against the external beats (word k = beats
// ext + k*BEATS .. + BEATS-1, lowest bits first); random STOREs are checked
// beat by beat in external memory.  Each instruction must issue exactly
// words*BEATS requests and pulse done_o once.  A request held without
// ready must stay stable (also asserted inside the DMA).
module tb_sta_dma;
  import sta_pkg::*;
  localparam int WW = 1280, IW = 2048, TW = 1024, AW = 6;
  localparam int BEATS [3] = '{10, 16, 8};
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic go, busy, done, req_valid, req_ready, req_we, rsp_valid;
  instr_t ins;
  logic [31:0] req_addr;
  logic [127:0] req_wdata, rsp_rdata;
  logic wwe, wre, iwe, ire, twe, tre;
  logic [AW-1:0] wa, ia, ta;
  logic [WW-1:0] wrd;
  logic [IW-1:0] ird;
  logic [TW-1:0] trd;
  logic [2047:0] wdata;

  sta_dma #(.WMEM_AW(AW), .IMEM_AW(AW), .TMEM_AW(AW)) dut (.clk_i(clk), .rst_ni(rst_n), .go_i(go),
    .instr_i(ins), .busy_o(busy), .done_o(done), .ext_req_valid_o(req_valid),
    .ext_req_ready_i(req_ready), .ext_req_we_o(req_we), .ext_req_addr_o(req_addr),
    .ext_req_wdata_o(req_wdata), .ext_rsp_valid_i(rsp_valid), .ext_rsp_rdata_i(rsp_rdata),
    .wmem_we_o(wwe), .wmem_addr_o(wa), .wmem_re_o(wre), .wmem_rdata_i(wrd),
    .imem_we_o(iwe), .imem_addr_o(ia), .imem_re_o(ire), .imem_rdata_i(ird),
    .tmem_we_o(twe), .tmem_addr_o(ta), .tmem_re_o(tre), .tmem_rdata_i(trd), .wdata_o(wdata));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // on-chip memories
  logic [2047:0] om [3][1 << AW];
  always @(posedge clk) begin
    if (wwe) om[0][wa] <= 2048'(wdata[WW-1:0]);
    if (iwe) om[1][ia] <= 2048'(wdata[IW-1:0]);
    if (twe) om[2][ta] <= 2048'(wdata[TW-1:0]);
    if (wre) wrd <= om[0][wa][WW-1:0];
    if (ire) ird <= om[1][ia][IW-1:0];
    if (tre) trd <= om[2][ta][TW-1:0];
  end

  // external memory
  logic [127:0] ext [int];
  int rsp_wait = -1, n_req = 0;
  logic [31:0] rsp_addr;
  logic held = 0;
  logic [31:0] held_addr;
  always @(posedge clk) begin
    rsp_valid <= 1'b0;
    if (rsp_wait == 0) begin rsp_valid <= 1'b1; rsp_rdata <= ext[int'(rsp_addr)]; end
    if (rsp_wait >= 0) rsp_wait <= rsp_wait - 1;
    if (held) check(req_valid && req_addr == held_addr, "request held stable");
    held = req_valid && !req_ready;
    held_addr = req_addr;
    if (req_valid && req_ready) begin
      n_req++;
      if (req_we) ext[int'(req_addr)] = req_wdata;
      else begin
        check(rsp_wait < 0, "one read outstanding");
        rsp_addr <= req_addr; rsp_wait <= $urandom_range(0, 4);
      end
    end
    req_ready <= ($urandom_range(0, 2) != 0);
  end

  int n_done = 0;
  always @(posedge clk) if (done) n_done++;

  initial begin
    go = 0; ins = '0; req_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int m, words, a, e, d0, r0, bw;
      logic st;
      m = $urandom_range(0, 2); words = $urandom_range(1, 6);
      a = $urandom_range(0, (1 << AW) - words); e = $urandom_range(0, 5000);
      st = (t >= 10) && $urandom_range(0, 1);
      bw = (m == 0) ? WW : (m == 1) ? IW : TW;
      if (!st) for (int b = 0; b < words * BEATS[m]; b++)
        ext[e + b] = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk);
      ins = '0; ins.op = st ? OP_STORE : OP_LOAD; ins.mem = mem_e'(m);
      ins.a = AF_W'(a); ins.c = AF_W'(words); ins.ext = 24'(e);
      d0 = n_done; r0 = n_req;
      go = 1; @(negedge clk); go = 0;
      while (n_done == d0) @(negedge clk);
      check(!busy, "idle after done");
      check(n_req - r0 == words * BEATS[m], $sformatf("%0d requests", n_req - r0));
      for (int k = 0; k < words; k++) for (int b = 0; b < BEATS[m]; b++) begin
        logic [127:0] want;
        want = 128'(om[m][a + k] >> (b * 128));
        if ((b + 1) * 128 > bw) want &= (128'd1 << (bw - b * 128)) - 1;
        check(ext[e + k * BEATS[m] + b] == want,
              $sformatf("%s mem %0d word %0d beat %0d", st ? "STORE" : "LOAD", m, k, b));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sta_addr_gen: self-checking test of the MatMul address generator.
// Random MatMul instructions and controller states; the memory enables and
// addresses are compared with the instruction semantics: while streaming,
// west base a + g (weight memory if sparse, intermediate memory if dense)
// and north base b + g; while shift-reading, the bias word d (if bias is on)
// and residual word e + C-1-j (if residual is on); write address f + w.
module tb_sta_addr_gen;
  import sta_pkg::*;
  localparam int C = C_DEF;
  localparam int WA = $clog2(WMEM_DEPTH_DEF), IA = $clog2(IMEM_DEPTH_DEF), TA = $clog2(TMEM_DEPTH_DEF);
  int checks = 0, failures = 0;

  instr_t ins;
  logic stream, shift_rd, wre, ire, tre;
  logic [AF_W-1:0] g, j, w;
  logic [WA-1:0] waddr;
  logic [IA-1:0] iaddr;
  logic [TA-1:0] traddr, twaddr;
  sta_addr_gen dut (.instr_i(ins), .stream_i(stream), .g_i(g), .shift_rd_i(shift_rd), .j_i(j),
    .w_i(w), .wmem_re_o(wre), .wmem_raddr_o(waddr), .imem_re_o(ire), .imem_raddr_o(iaddr),
    .tmem_re_o(tre), .tmem_raddr_o(traddr), .tmem_waddr_o(twaddr));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 5000; t++) begin
      int ph;
      ins = '0; ins.op = OP_MATMUL;
      ins.sparse = 1'($urandom); ins.bias_en = 1'($urandom); ins.res_en = 1'($urandom);
      ins.a = AF_W'($urandom); ins.b = AF_W'($urandom); ins.c = AF_W'($urandom);
      ins.d = AF_W'($urandom); ins.e = AF_W'($urandom); ins.f = AF_W'($urandom);
      ph = $urandom_range(0, 2);
      stream = (ph == 1); shift_rd = (ph == 2);
      g = AF_W'($urandom_range(0, 500)); j = AF_W'($urandom_range(0, C - 1)); w = AF_W'($urandom_range(0, 7));
      #1;
      check(twaddr == TA'(ins.f + w), "write address");
      if (ph == 1) begin
        check(wre == ins.sparse && tre == !ins.sparse && ire, "stream enables");
        if (ins.sparse) check(waddr == WA'(ins.a + g), "weight address");
        else            check(traddr == TA'(ins.a + g), "intermediate address");
        check(iaddr == IA'(ins.b + g), "input address");
      end else if (ph == 2) begin
        check(wre == ins.bias_en && ire == ins.res_en && !tre, "shift-read enables");
        if (ins.bias_en) check(waddr == WA'(ins.d), "bias address");
        if (ins.res_en)  check(iaddr == IA'(ins.e + AF_W'(C - 1) - j), "residual address");
      end else begin
        check(!wre && !ire && !tre, "idle enables");
      end
      #9;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sta_weight_mem: self-checking test of the weight memory at its default
// size.  Random writes, then random reads (with simultaneous writes to other
// addresses) checked against a shadow copy; data must appear exactly one
// cycle after the read enable, and must hold while the read enable is low.
module tb_sta_weight_mem;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int AW = $clog2(sta_pkg::WMEM_DEPTH_DEF);
  localparam int DW = sta_pkg::H_DEF * sta_pkg::R_DEF * (sta_pkg::N_DEF * sta_pkg::DATA_W + sta_pkg::M_DEF);
  localparam int DEPTH = 1 << AW;
  logic re, we;
  logic [AW-1:0] raddr, waddr;
  logic [DW-1:0] rdata, wdata, held;

  sta_weight_mem dut (.clk_i(clk), .re_i(re), .raddr_i(raddr), .rdata_o(rdata), .we_i(we),
    .waddr_i(waddr), .wdata_i(wdata));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [DW-1:0] rnd();
    logic [DW-1:0] v;
    for (int i = 0; i < DW; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [DW-1:0] shadow [int];
  initial begin
    re = 0; we = 0; raddr = '0; waddr = '0; wdata = '0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      we = 1; waddr = (i < 4) ? AW'(i * (DEPTH / 4 + 1) % DEPTH) : AW'($urandom_range(0, DEPTH - 1));
      if (i == 1) waddr = AW'(DEPTH - 1);
      wdata = rnd(); shadow[int'(waddr)] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 3000; i++) begin
      int k, a;
      k = $urandom_range(0, shadow.num() - 1);
      void'(shadow.first(a));
      repeat (k % 64) void'(shadow.next(a));
      @(negedge clk);
      re = 1'($urandom_range(0, 3) != 0); raddr = AW'(a);
      we = 1'($urandom); waddr = AW'(a) ^ AW'(1); wdata = rnd();
      if (we) shadow[int'(waddr)] = wdata;
      held = rdata;
      @(posedge clk); #1;
      if (re) check(rdata == shadow[a], $sformatf("read %0d", a));
      else    check(rdata == held, "data holds without read enable");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

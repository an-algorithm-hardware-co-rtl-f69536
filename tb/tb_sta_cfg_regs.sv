// tb_sta_cfg_regs: self-checking test of the configuration registers.
// Loads random instructions through IDATA0..3 and checks the buffer write
// (one pulse, full 128-bit word, address auto-increment, IADDR write and
// read-back); checks that start pulses once and is refused while busy; and
// that the done bit and interrupt are sticky until the next start.
module tb_sta_cfg_regs;
  import sta_pkg::*;
  localparam int IAW = $clog2(IBUF_DEPTH_DEF);
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic we, start, ibuf_we, busy, done, irq;
  logic [3:0] addr;
  logic [31:0] wdata, rdata;
  logic [IAW-1:0] ibuf_waddr;
  logic [INSTR_W-1:0] ibuf_wdata;
  sta_cfg_regs dut (.clk_i(clk), .rst_ni(rst_n), .reg_we_i(we), .reg_addr_i(addr),
    .reg_wdata_i(wdata), .reg_rdata_o(rdata), .start_o(start), .ibuf_we_o(ibuf_we),
    .ibuf_waddr_o(ibuf_waddr), .ibuf_wdata_o(ibuf_wdata), .busy_i(busy), .done_i(done), .irq_o(irq));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  int n_we = 0, n_start = 0;
  logic [IAW-1:0] last_a;
  logic [INSTR_W-1:0] last_d;
  always @(posedge clk) begin
    if (ibuf_we) begin n_we++; last_a = ibuf_waddr; last_d = ibuf_wdata; end
    if (start) n_start++;
  end

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk); we = 1; addr = 4'(a); wdata = d;
    @(negedge clk); we = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; addr = '0; wdata = '0; busy = 0; done = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      logic [127:0] v;
      int base, k;
      logic [IAW-1:0] ea;
      base = $urandom_range(0, (1 << IAW) - 1);
      wr(2, 32'(base));
      addr = 2; #1; check(rdata == 32'(base), "IADDR read-back");
      k = $urandom_range(1, 3);
      for (int i = 0; i < k; i++) begin
        int we0;
        for (int q = 0; q < 4; q++) v[q * 32 +: 32] = $urandom;
        we0 = n_we;
        for (int q = 0; q < 3; q++) wr(3 + q, v[q * 32 +: 32]);
        addr = 4; #1; check(rdata == v[63:32], "IDATA1 read-back");
        check(n_we == we0, "no buffer write before IDATA3");
        wr(6, v[127:96]);
        @(posedge clk); #1;                   // buffer write is registered
        check(n_we == we0 + 1, "one buffer write");
        check(last_d == v && last_a == IAW'(base + i), "buffer word and address");
      end
      ea = IAW'(base + k);
      addr = 2; #1; check(rdata == 32'(ea), "IADDR advanced");
    end
    // start, busy, done, irq
    for (int t = 0; t < 20; t++) begin
      int s0;
      s0 = n_start;
      wr(0, 1);
      @(posedge clk); #1;
      check(n_start == s0 + 1, "start pulse");
      busy = 1;
      wr(0, 1);
      @(posedge clk); #1;
      check(n_start == s0 + 1, "start refused while busy");
      addr = 1; #1; check(rdata[1:0] == 2'b01, "status busy");
      check(!irq, "no interrupt while busy");
      @(negedge clk); done = 1; busy = 0;
      @(negedge clk); done = 0;
      repeat ($urandom_range(1, 5)) @(negedge clk);
      addr = 1; #1; check(rdata[1:0] == 2'b10, "status done (sticky)");
      check(irq, "interrupt sticky");
    end
    wr(0, 1);
    addr = 1; #1; check(rdata[1] == 1'b0 && !irq, "start clears done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

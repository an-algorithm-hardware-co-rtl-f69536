// tb_sta_nmac: self-checking test of the N-parallel MAC.
// Streams random tiles of beats (first beat with clear), compares the
// accumulator with a reference sum of products two edges after each beat,
// checks the two-cycle latency and the load (shift) path.
module tb_sta_nmac;
  localparam int N = 2, W = 16, A = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0][W-1:0] a, b;
  logic valid, clear, load;
  logic signed [A-1:0] csum_i, csum_o;
  sta_nmac #(.N(N), .DATA_W(W), .ACC_W(A)) dut (.clk_i(clk), .rst_ni(rst_n), .a_i(a), .b_i(b),
    .valid_i(valid), .clear_i(clear), .load_i(load), .csum_i(csum_i), .csum_o(csum_o));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ref_q [$];
    longint acc;
    valid = 0; clear = 0; load = 0; a = '0; b = '0; csum_i = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int tile = 0; tile < 50; tile++) begin
      int g;
      g = $urandom_range(1, 12);
      acc = 0;
      for (int k = 0; k < g; k++) begin
        @(negedge clk);
        valid = 1; clear = (k == 0);
        for (int n = 0; n < N; n++) begin
          a[n] = W'($urandom); b[n] = W'($urandom);
          acc += longint'($signed(a[n])) * longint'($signed(b[n]));
        end
        // value must not be there after one edge, must be after two
        @(posedge clk); #1;
        valid = 0; clear = 0;
        @(posedge clk); #1;
        check(csum_o == A'(acc), $sformatf("tile %0d beat %0d", tile, k));
      end
      // latency: one more idle beat must not change the sum
      @(posedge clk); #1;
      check(csum_o == A'(acc), "hold when idle");
    end
    // shift mode: load
    @(negedge clk); load = 1; csum_i = 32'sd12345;
    @(posedge clk); #1; load = 0;
    check(csum_o == 32'sd12345, "load");
    // exact two-edge latency
    @(negedge clk); valid = 1; clear = 1; a = '0; b = '0; a[0] = 16'd3; b[0] = 16'd7;
    @(posedge clk); #1; valid = 0; clear = 0;
    check(csum_o == 32'sd12345, "not after one edge");
    @(posedge clk); #1;
    check(csum_o == 32'sd21, "after two edges");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

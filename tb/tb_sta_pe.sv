// tb_sta_pe: self-checking test of one unified systolic PE.
// Streams G back-to-back beats in dense-dense and sparse-dense mode, checks
// the east/south forwarding (one cycle), the result two edges after the last
// beat, and the shifting mode (c_o takes c_i).  The reference computes the
// dot products directly from the dense view of the operands.
module tb_sta_pe;
  localparam int N = 2, M = 8, W = 16, A = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sparse, shift, valid, first, valid_o, first_o;
  logic [M-1:0][W-1:0] a_i, a_o;
  logic [N-1:0][W-1:0] b_i, b_o;
  logic [M-1:0] mask_i, mask_o;
  logic signed [A-1:0] c_i, c_o;

  sta_pe #(.N(N), .M(M)) dut (.clk_i(clk), .rst_ni(rst_n), .sparse_i(sparse), .shift_i(shift),
    .a_i(a_i), .a_o(a_o), .b_i(b_i), .mask_i(mask_i), .valid_i(valid), .first_i(first),
    .b_o(b_o), .mask_o(mask_o), .valid_o(valid_o), .first_o(first_o), .c_i(c_i), .c_o(c_o));

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
    longint acc;
    sparse = 0; shift = 0; valid = 0; first = 0; a_i = '0; b_i = '0; mask_i = '0; c_i = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int tile = 0; tile < 40; tile++) begin
      int g;
      g = $urandom_range(1, 10);
      sparse = tile[0];
      acc = 0;
      for (int k = 0; k < g; k++) begin
        logic [M-1:0][W-1:0] a_prev;
        logic [N-1:0][W-1:0] b_prev;
        @(negedge clk);
        valid = 1; first = (k == 0);
        for (int m = 0; m < M; m++) a_i[m] = W'($urandom);
        for (int n = 0; n < N; n++) b_i[n] = W'($urandom);
        mask_i = '0;
        if (sparse) begin
          while ($countones(mask_i) < N) mask_i[$urandom_range(0, M-1)] = 1'b1;
          begin
            int n;
            n = 0;
            for (int m = 0; m < M; m++) if (mask_i[m]) begin
              acc += longint'($signed(a_i[m])) * longint'($signed(b_i[n])); n++;
            end
          end
        end else begin
          mask_i = M'($urandom);          // must be ignored in dense mode
          for (int n = 0; n < N; n++) acc += longint'($signed(a_i[n])) * longint'($signed(b_i[n]));
        end
        a_prev = a_i; b_prev = b_i;
        @(posedge clk); #1;
        check(a_o == a_prev && b_o == b_prev && valid_o && first_o == (k == 0), "forwarding");
      end
      @(negedge clk); valid = 0; first = 0;
      @(posedge clk); #1;
      @(posedge clk); #1;
      check(c_o == A'(acc), $sformatf("tile %0d sparse %0d result", tile, sparse));
      @(posedge clk); #1;
      check(c_o == A'(acc), "stable");
    end
    // shifting mode
    @(negedge clk); shift = 1; c_i = 32'sd777;
    @(posedge clk); #1;
    check(c_o == 32'sd777, "shift loads c_i");
    @(negedge clk); c_i = -32'sd5;
    @(posedge clk); #1; shift = 0;
    check(c_o == -32'sd5, "shift again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

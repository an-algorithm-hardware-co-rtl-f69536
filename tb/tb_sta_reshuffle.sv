// tb_sta_reshuffle: self-checking test of the reshuffle network.
// Tiles of C columns arrive last column first (as the DMME shifts them out),
// with random gaps; afterwards C/N writes must follow back to back, one per
// cycle starting the cycle after the last column, word w holding columns
// w*N .. w*N+N-1 for every lane, and done_o with the last write.  Every other
// tile uses the input-memory layout instead: LANES/M writes, word w holding
// lanes w*M .. w*M+M-1 of every column.
module tb_sta_reshuffle;
  localparam int L = 32, C = 16, N = 2, M = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [L-1:0][15:0] col;
  logic valid, wr, done, lay;
  logic [C-1:0][M-1:0][15:0] iwdata;
  logic [$clog2(C/N+1)-1:0] waddr;
  logic [L-1:0][N-1:0][15:0] wdata;
  sta_reshuffle #(.LANES(L), .C(C), .N(N), .M(M)) dut (.clk_i(clk), .rst_ni(rst_n), .col_i(col),
    .valid_i(valid), .in_layout_i(lay), .wr_o(wr), .waddr_o(waddr), .wdata_o(wdata),
    .iwdata_o(iwdata), .done_o(done));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] tile [C][L];
  initial begin
    col = '0; valid = 0; lay = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      foreach (tile[c, l]) tile[c][l] = 16'($urandom);
      lay = t[0];
      for (int j = 0; j < C; j++) begin
        @(negedge clk);
        if ($urandom_range(0, 3) == 0) begin
          valid = 0; check(!wr, "no write while collecting"); @(negedge clk);
        end
        valid = 1;
        for (int l = 0; l < L; l++) col[l] = tile[C-1-j][l];
        check(!wr, "no write while collecting");
      end
      for (int w = 0; w < (lay ? L / M : C / N); w++) begin
        @(negedge clk); valid = 0;
        check(wr && waddr == w, $sformatf("tile %0d write %0d in its cycle", t, w));
        check(done == (w == (lay ? L / M : C / N) - 1), "done with last write");
        if (!lay) begin
          for (int l = 0; l < L; l++) for (int n = 0; n < N; n++)
            check(wdata[l][n] == tile[w * N + n][l], $sformatf("tile %0d word %0d lane %0d n %0d", t, w, l, n));
        end else begin
          for (int c = 0; c < C; c++) for (int m = 0; m < M; m++)
            check(iwdata[c][m] == tile[c][w * M + m], $sformatf("tile %0d input word %0d col %0d m %0d", t, w, c, m));
        end
      end
      @(negedge clk);
      check(!wr, "writes end");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

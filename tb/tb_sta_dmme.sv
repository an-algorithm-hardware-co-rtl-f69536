// tb_sta_dmme: self-checking test of the diverse MatMul engine with the
// settings of the paper's input-memory figure (N=2, M=4, H=2, C=4; R=2 rows).
// Sparse-dense tiles give each head its own 2:4 weights and multicast the
// bank words; dense-dense tiles give head h the elements h*N..h*N+N-1 of each
// bank word.  Results of every head are shifted out and compared with a
// reference product.
module tb_sta_dmme;
  localparam int N = 2, M = 4, H = 2, R = 2, C = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic sparse, shift, valid, first;
  logic [H-1:0][R-1:0][N-1:0][15:0] wd;
  logic [H-1:0][R-1:0][M-1:0] wm;
  logic [C-1:0][M-1:0][15:0] nd;
  logic [H-1:0][R-1:0][31:0] res;

  sta_dmme #(.N(N), .M(M), .H(H), .R(R), .C(C)) dut (.clk_i(clk), .rst_ni(rst_n), .sparse_i(sparse),
    .shift_i(shift), .valid_i(valid), .first_i(first), .west_data_i(wd), .west_mask_i(wm),
    .north_i(nd), .res_o(res));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sparse = 0; shift = 0; valid = 0; first = 0; wd = '0; wm = '0; nd = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int tile = 0; tile < 40; tile++) begin
      int G;
      longint out [H][R][C];
      sparse = tile[0];
      G = $urandom_range(1, 8);
      foreach (out[h, r, c]) out[h][r][c] = 0;
      for (int g = 0; g < G + R + C + 1; g++) begin
        @(negedge clk);
        valid = (g < G); first = (g == 0);
        wd = '0; wm = '0; nd = '0;
        if (g < G) begin
          for (int c = 0; c < C; c++) for (int m = 0; m < M; m++) nd[c][m] = 16'($urandom_range(0, 2000) - 1000);
          for (int h = 0; h < H; h++) for (int r = 0; r < R; r++) begin
            for (int n = 0; n < N; n++) wd[h][r][n] = 16'($urandom_range(0, 2000) - 1000);
            if (sparse) while ($countones(wm[h][r]) < $urandom_range(1, N)) wm[h][r][$urandom_range(0, M-1)] = 1'b1;
            for (int c = 0; c < C; c++) begin
              if (sparse) begin
                int n; n = 0;
                for (int m = 0; m < M; m++) if (wm[h][r][m]) begin
                  out[h][r][c] += longint'($signed(wd[h][r][n])) * longint'($signed(nd[c][m])); n++;
                end
              end else begin
                for (int n = 0; n < N; n++)
                  out[h][r][c] += longint'($signed(wd[h][r][n])) * longint'($signed(nd[c][h*N + n]));
              end
            end
          end
        end
      end
      @(negedge clk); valid = 0; first = 0;
      for (int j = 0; j < C; j++) begin
        shift = 1; #1;
        for (int h = 0; h < H; h++) for (int r = 0; r < R; r++)
          check(res[h][r] == 32'(out[h][r][C-1-j]),
                $sformatf("tile %0d sparse %0d h %0d r %0d c %0d G %0d got %0d want %0d", tile, sparse, h, r, C-1-j, G, $signed(res[h][r]), out[h][r][C-1-j]));
        @(negedge clk);
      end
      shift = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

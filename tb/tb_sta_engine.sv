// tb_sta_engine: self-checking test of the unified MatMul computing engine.
// Two arrays: the paper's dataflow example (N:M = 1:2, 2x2 PEs, a 2x4 by 4x2
// dense MatMul, i.e. 4 groups, and the same weights compressed to 2 groups in
// sparse mode), and the default 2:8, 8x16 array with random tiles.  For each
// tile the testbench checks that the last PE's result is complete exactly
// G+R+C cycles after the first beat and not one cycle earlier (the systolic
// wavefront of G+R+C-3 cycles -- 5 dense, 3 sparse in the example -- plus the
// pipeline), then shifts the results out and compares every column with a
// reference product.
module tb_sta_engine;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- generic driver, instantiated twice
  `define ENGINE_TEST(NAME, NN, MM, RR, CC)                                                   \
  logic NAME``_sparse, NAME``_shift, NAME``_valid, NAME``_first;                                  \
  logic [RR-1:0][NN-1:0][15:0] NAME``_wd;                                                        \
  logic [RR-1:0][MM-1:0] NAME``_wm;                                                              \
  logic [CC-1:0][MM-1:0][15:0] NAME``_nd;                                                        \
  logic [RR-1:0][31:0] NAME``_res;                                                               \
  sta_engine #(.N(NN), .M(MM), .R(RR), .C(CC)) NAME (.clk_i(clk), .rst_ni(rst_n),                \
    .sparse_i(NAME``_sparse), .shift_i(NAME``_shift), .valid_i(NAME``_valid),                   \
    .first_i(NAME``_first), .west_data_i(NAME``_wd), .west_mask_i(NAME``_wm),                   \
    .north_i(NAME``_nd), .res_o(NAME``_res));

  `ENGINE_TEST(s, 1, 2, 2, 2)
  `ENGINE_TEST(b,  2, 8, 8, 16)

  // Runs one tile on the small engine.  W: R x K dense weights, A: K x C.
  task automatic run_small(input bit sp, input int K, input int W [2][8], input int A [8][2]);
    int G, out [2][2];
    int t;
    G = sp ? K / 2 : K;
    for (int r = 0; r < 2; r++) for (int c = 0; c < 2; c++) begin
      out[r][c] = 0;
      for (int k = 0; k < K; k++) out[r][c] += W[r][k] * A[k][c];
    end
    @(negedge clk);
    s_sparse = sp; s_shift = 0;
    for (int g = 0; g < G + 3 + 2 + 2; g++) begin
      s_valid = (g < G); s_first = (g == 0);
      for (int r = 0; r < 2; r++) begin
        s_wm[r] = '0; s_wd[r] = '0;
        if (g < G) begin
          if (sp) begin
            // group of M=2 holds one non-zero (1:2)
            for (int m = 0; m < 2; m++) if (W[r][2*g+m] != 0 && s_wm[r] == 0) begin
              s_wm[r][m] = 1'b1; s_wd[r][0] = 16'(W[r][2*g+m]);
            end
          end else s_wd[r][0] = 16'(W[r][g]);
        end
      end
      for (int c = 0; c < 2; c++) begin
        s_nd[c] = '0;
        if (g < G) begin
          if (sp) begin s_nd[c][0] = 16'(A[2*g][c]); s_nd[c][1] = 16'(A[2*g+1][c]); end
          else s_nd[c][0] = 16'(A[g][c]);
        end
      end
      @(posedge clk); #1;
      t = g + 1;   // cycles since the first beat, at this point in time
      if (t == G + 2 + 2 - 1) begin
        // one cycle early the last group is still missing
        int part;
        part = out[1][1];
        for (int k = (sp ? 2*(G-1) : G-1); k < K; k++) part -= W[1][k] * A[k][1];
        check($signed(s_res[1]) == part, "small: one cycle before G+R+C the last group is missing");
      end
      if (t == G + 2 + 2) check($signed(s_res[1]) == out[1][1], "small: complete at G+R+C");
      @(negedge clk);
    end
    s_valid = 0; s_first = 0;
    for (int j = 0; j < 2; j++) begin
      s_shift = 1; #1;
      for (int r = 0; r < 2; r++)
        check($signed(s_res[r]) == out[r][1-j], $sformatf("small sp=%0d r=%0d col=%0d", sp, r, 1-j));
      @(negedge clk);
    end
    s_shift = 0;
  endtask

  initial begin
    int W [2][8], A [8][2];
    s_sparse = 0; s_shift = 0; s_valid = 0; s_first = 0;
    s_wd = '0; s_wm = '0; s_nd = '0;
    b_sparse = 0; b_shift = 0; b_valid = 0; b_first = 0;
    b_wd = '0; b_wm = '0; b_nd = '0;
    repeat (2) @(posedge clk); rst_n = 1;

    // Paper example: sparse rows 0 3 2 0 / 0 -2 0 2 (1:2), activations 4x2.
    W[0][0:3] = '{0, 3, 2, 0};  W[1][0:3] = '{0, -2, 0, 2};
    A[0] = '{-2, 2}; A[1] = '{-2, 1}; A[2] = '{1, 1}; A[3] = '{2, -3};
    run_small(1'b0, 4, W, A);   // dense-dense: 4 groups
    run_small(1'b1, 4, W, A);   // sparse-dense: 2 groups
    for (int i = 0; i < 20; i++) begin
      for (int r = 0; r < 2; r++) for (int k = 0; k < 8; k++) W[r][k] = $urandom_range(0, 20) - 10;
      for (int k = 0; k < 8; k++) for (int c = 0; c < 2; c++) A[k][c] = $urandom_range(0, 20) - 10;
      // make W 1:2 sparse for the sparse run
      for (int r = 0; r < 2; r++) for (int g = 0; g < 4; g++) W[r][2*g + $urandom_range(0,1)] = 0;
      run_small(i[0], 8, W, A);
    end

    // Default-size array, random sparse and dense tiles.
    for (int tile = 0; tile < 6; tile++) begin
      localparam int RR = 8, CC = 16, NN = 2, MM = 8;
      int G;
      longint out [RR][CC];
      bit sp;
      sp = tile[0];
      G = $urandom_range(1, 6);
      foreach (out[r, c]) out[r][c] = 0;
      @(negedge clk);
      b_sparse = sp;
      for (int g = 0; g < G + RR + CC; g++) begin
        b_valid = (g < G); b_first = (g == 0);
        b_wd = '0; b_wm = '0; b_nd = '0;
        if (g < G) begin
          for (int c = 0; c < CC; c++) for (int m = 0; m < MM; m++) b_nd[c][m] = 16'($urandom_range(0, 200) - 100);
          for (int r = 0; r < RR; r++) begin
            for (int n = 0; n < NN; n++) b_wd[r][n] = 16'($urandom_range(0, 200) - 100);
            if (sp) while ($countones(b_wm[r]) < NN) b_wm[r][$urandom_range(0, MM-1)] = 1'b1;
            for (int c = 0; c < CC; c++) begin
              int n = 0;
              for (int m = 0; m < MM; m++) begin
                if (sp && b_wm[r][m]) begin
                  out[r][c] += longint'($signed(b_wd[r][n])) * longint'($signed(b_nd[c][m])); n++;
                end
              end
              if (!sp) for (int k = 0; k < NN; k++)
                out[r][c] += longint'($signed(b_wd[r][k])) * longint'($signed(b_nd[c][k]));
            end
          end
        end
        @(posedge clk); #1;
        if (g + 1 == G + RR + CC - 1) check(b_res[RR-1] != 32'(out[RR-1][CC-1]) || out[RR-1][CC-1] == 0,
                                            "big: not complete one cycle early");
        @(negedge clk);
      end
      b_valid = 0; b_first = 0;
      for (int j = 0; j < CC; j++) begin
        b_shift = 1; #1;
        for (int r = 0; r < RR; r++)
          check(b_res[r] == 32'(out[r][CC-1-j]), $sformatf("big tile %0d r=%0d c=%0d", tile, r, CC-1-j));
        @(negedge clk);
      end
      b_shift = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

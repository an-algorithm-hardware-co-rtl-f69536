// tb_sta_top: end-to-end test of the accelerator at its default size
// (2:8 sparsity, H=4 engines of R=8 x C=16 PEs, 16-lane softmax).
//
// The host side programs a small transformer-like sequence through the
// 32-bit register port and starts it; a behavioural external memory answers
// the DMA with random request stalls and random read latency.  The program:
//   1. LOAD  sparse weights (4 compact groups) and a bias word -> weight mem
//   2. LOAD  activations, residual words and a second operand  -> input mem
//   3. MATMUL sparse x dense, with bias, residual, ReLU, shift 8
//      (one weight element is made huge so that one result saturates)
//      -> intermediate words 0..7, reshuffled
//   4. MATMUL dense x dense: the stored result (west) times a per-head
//      dense operand, shift 12 -> intermediate words 8..15
//   5. SOFTMAX over the 512 values of step 4 -> intermediate words 16..23
//   6. MATMUL as step 3 but written back to the input memory (words 48..51,
//      the layout of a next layer's input), then STORE of those words
//   7. STORE intermediate words 0..23 -> external memory
//   8. END   (done bit and interrupt)
// A reference model in this file computes every stored value; MatMul words
// must match exactly (also the input-memory copy), softmax words within
// 0.5 % + 3 LSB.  The test also
// checks that each MatMul streams exactly G groups on consecutive cycles and
// shifts out exactly C columns, and counts every mechanism (sparse and dense
// MatMul, result shifting, bias, residual, ReLU, saturation, softmax, DMA
// loads and stores, interrupt); any mechanism that never happened is a
// failure.
module tb_sta_top;
  import sta_pkg::*;
  localparam int N = N_DEF, M = M_DEF, H = H_DEF, R = R_DEF, C = C_DEF;
  localparam int L = H * R;                   // vector lanes
  localparam int WB = 10, IB = 16, TB = 8;    // beats per word of each memory
  localparam int EXT_W_B = 0, EXT_I_B = 1000, EXT_OUT = 5000;
  localparam int G1 = 4, G2 = C / N;          // groups of the two MatMuls
  localparam int BIAS_W = 4, RES_I = 16, B2_I = 32, WB_I = 48, EXT_WB = 9000;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        reg_we;
  logic [3:0]  reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  logic        irq;
  logic        req_valid, req_ready, req_we, rsp_valid;
  logic [31:0] req_addr;
  logic [127:0] req_wdata, rsp_rdata;

  sta_top dut (.clk_i(clk), .rst_ni(rst_n), .reg_we_i(reg_we), .reg_addr_i(reg_addr),
    .reg_wdata_i(reg_wdata), .reg_rdata_o(reg_rdata), .irq_o(irq),
    .ext_req_valid_o(req_valid), .ext_req_ready_i(req_ready), .ext_req_we_o(req_we),
    .ext_req_addr_o(req_addr), .ext_req_wdata_o(req_wdata), .ext_rsp_valid_i(rsp_valid),
    .ext_rsp_rdata_i(rsp_rdata));

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ external memory
  logic [127:0] ext [int];
  int rsp_wait = -1;
  logic [31:0] rsp_addr;
  int n_rd_beats = 0, n_wr_beats = 0;
  always @(posedge clk) begin
    rsp_valid <= 1'b0;
    if (rsp_wait == 0) begin
      rsp_valid <= 1'b1;
      rsp_rdata <= ext.exists(int'(rsp_addr)) ? ext[int'(rsp_addr)] : 128'd0;
    end
    if (rsp_wait >= 0) rsp_wait <= rsp_wait - 1;
    if (req_valid && req_ready) begin
      if (req_we) begin ext[int'(req_addr)] = req_wdata; n_wr_beats++; end
      else begin rsp_addr <= req_addr; rsp_wait <= $urandom_range(0, 3); n_rd_beats++; end
    end
    req_ready <= ($urandom_range(0, 3) != 0);
  end

  // ------------------------------------------------------------ test data
  int wv [G1][H][R][N];          // sparse weight values
  logic [M-1:0] wm [G1][H][R];   // their masks
  int x1 [G1][C][M];             // first MatMul north operand
  int bias [L];
  int res [C][L];                // residual for column c, lane l
  int x2 [G2][C][M];             // second MatMul north operand
  int y1 [L][C], y2 [L][C];      // reference results (16 bit)
  real sm [L * C];               // reference softmax output (as Q1.15)

  function automatic int sat16(input longint v, input int qs);
    if (qs != 0) v += longint'(1) << (qs - 1);
    v = v >>> qs;
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return int'(v);
  endfunction

  function automatic int srnd(input int lim);
    return $urandom_range(0, 2 * lim) - lim;
  endfunction

  task automatic make_data();
    for (int g = 0; g < G1; g++) begin
      for (int h = 0; h < H; h++) for (int r = 0; r < R; r++) begin
        int k;
        wm[g][h][r] = '0;
        k = $urandom_range(0, N);            // 0, 1 or 2 non-zeros in 8
        while ($countones(wm[g][h][r]) < k) wm[g][h][r][$urandom_range(0, M - 1)] = 1'b1;
        for (int n = 0; n < N; n++) wv[g][h][r][n] = (n < k) ? srnd(256) : 0;
      end
      for (int c = 0; c < C; c++) for (int m = 0; m < M; m++) x1[g][c][m] = srnd(256);
    end
    // one huge product so that lane 0, column 0 saturates
    wm[0][0][0] = 8'b0000_0001; wv[0][0][0][0] = 32767; x1[0][0][0] = 32767;
    for (int l = 0; l < L; l++) bias[l] = srnd(128);
    for (int c = 0; c < C; c++) for (int l = 0; l < L; l++) res[c][l] = srnd(128);
    for (int g = 0; g < G2; g++) for (int c = 0; c < C; c++) for (int m = 0; m < M; m++)
      x2[g][c][m] = srnd(64);
  endtask

  task automatic reference();
    real s;
    for (int h = 0; h < H; h++) for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      longint a;
      int l;
      l = h * R + r;
      a = 0;
      for (int g = 0; g < G1; g++) begin
        int n;
        n = 0;
        for (int m = 0; m < M; m++) if (wm[g][h][r][m]) begin
          a += longint'(wv[g][h][r][n]) * longint'(x1[g][c][m]); n++;
        end
      end
      a = longint'(int'(a));                 // 32-bit accumulator
      a += longint'(bias[l]) * 256 + longint'(res[c][l]) * 256;
      if (a < 0) a = 0;
      y1[l][c] = sat16(a, 8);
    end
    for (int h = 0; h < H; h++) for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
      longint a;
      int l;
      l = h * R + r;
      a = 0;
      for (int k = 0; k < C; k++)            // reduction over the columns of y1
        a += longint'(y1[l][k]) * longint'(x2[k / N][c][h * N + k % N]);
      a = longint'(int'(a));
      y2[l][c] = sat16(a, 12);
    end
    // softmax over the 512 values in intermediate-memory order:
    // word w, element l*N + n  <->  lane l, column w*N + n
    s = 0.0;
    for (int w = 0; w < C / N; w++) for (int l = 0; l < L; l++) for (int n = 0; n < N; n++) begin
      real xv;
      xv = real'(y2[l][w * N + n]) / 256.0;
      if (xv < -8.0) xv = -8.0;
      if (xv > 7.99609375) xv = 7.99609375;
      sm[(w * L + l) * N + n] = $exp(xv);
      s += $exp(xv);
    end
    foreach (sm[i]) sm[i] = sm[i] / s * 32768.0;
  endtask

  // Build an on-chip word and place it in external memory as beats.
  task automatic put_word(input int base, input int beats, input logic [2047:0] w);
    for (int b = 0; b < beats; b++) ext[base + b] = w[b * 128 +: 128];
  endtask

  task automatic fill_ext();
    logic [2047:0] w;
    localparam int RW = N * 16 + M;
    for (int g = 0; g < G1; g++) begin
      w = '0;
      for (int h = 0; h < H; h++) for (int r = 0; r < R; r++) begin
        logic [RW-1:0] row;
        row = '0;
        row[RW-1 -: M] = wm[g][h][r];
        for (int n = 0; n < N; n++) row[n * 16 +: 16] = 16'(wv[g][h][r][n]);
        w[(h * R + r) * RW +: RW] = row;
      end
      put_word(EXT_W_B + g * WB, WB, w);
    end
    w = '0;
    for (int l = 0; l < L; l++) w[l * 16 +: 16] = 16'(bias[l]);
    put_word(EXT_W_B + BIAS_W * WB, WB, w);
    for (int i = 0; i < B2_I + G2; i++) begin
      w = '0;
      for (int c = 0; c < C; c++) for (int m = 0; m < M; m++) begin
        int v;
        v = 0;
        if (i < G1) v = x1[i][c][m];
        else if (i >= RES_I && i < RES_I + C) v = (c * M + m < L) ? res[i - RES_I][c * M + m] : 0;
        else if (i >= B2_I) v = x2[i - B2_I][c][m];
        w[(c * M + m) * 16 +: 16] = 16'(v);
      end
      put_word(EXT_I_B + i * IB, IB, w);
    end
  endtask

  // ------------------------------------------------------------ host
  task automatic wr_reg(input int a, input logic [31:0] d);
    @(negedge clk); reg_we = 1; reg_addr = 4'(a); reg_wdata = d;
    @(negedge clk); reg_we = 0;
  endtask

  task automatic put_instr(input instr_t i);
    logic [127:0] v;
    v = i;
    for (int k = 0; k < 4; k++) wr_reg(3 + k, v[k * 32 +: 32]);
  endtask

  function automatic instr_t mk(input opcode_e op);
    instr_t i;
    i = '0; i.op = op;
    return i;
  endfunction

  // ------------------------------------------------------------ monitors
  int n_sparse = 0, n_dense = 0, n_shift = 0, n_bias = 0, n_res = 0, n_relu = 0;
  int n_sat = 0, n_sm = 0, n_load = 0, n_store = 0, n_irq = 0, n_nzes = 0, n_wb_in = 0;
  int run_len = 0, shift_len = 0;
  logic prev_valid = 0, prev_shift = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.mm_go && dut.instr.sparse) n_sparse++;
    if (dut.mm_go && !dut.instr.sparse) n_dense++;
    if (dut.dmme_shift) n_shift++;
    if (dut.vec_valid && dut.instr.bias_en) n_bias++;
    if (dut.vec_valid && dut.instr.res_en) n_res++;
    if (dut.vec_valid && dut.instr.relu_en) n_relu++;
    if (dut.vec_sat) n_sat++;
    if (dut.imem_we && dut.instr.op == OP_MATMUL) n_wb_in++;
    if (dut.sm_fin) n_sm++;
    if (dut.dma_done && dut.instr.op == OP_LOAD) n_load++;
    if (dut.dma_done && dut.instr.op == OP_STORE) n_store++;
    if (dut.u_dmme.sparse_i && dut.u_dmme.g_head[0].u_engine.g_row[0].g_col[0].u_pe.valid_i &&
        dut.u_dmme.g_head[0].u_engine.g_row[0].g_col[0].u_pe.mask_i != '0) n_nzes++;
    // streaming: G consecutive valid cycles per MatMul, C consecutive shifts
    if (dut.dmme_valid) run_len++;
    else if (prev_valid) begin
      check(run_len == (dut.instr.sparse ? G1 : G2), $sformatf("stream of %0d groups", run_len));
      run_len = 0;
    end
    if (dut.dmme_shift) shift_len++;
    else if (prev_shift) begin
      check(shift_len == C, $sformatf("shift of %0d columns", shift_len));
      shift_len = 0;
    end
    prev_valid = dut.dmme_valid; prev_shift = dut.dmme_shift;
  end

  // ------------------------------------------------------------ sequence
  initial begin
    instr_t p [10];
    int t0;
    reg_we = 0; reg_addr = '0; reg_wdata = '0; req_ready = 0;
    make_data(); reference(); fill_ext();
    repeat (3) @(posedge clk); rst_n = 1;

    p[0] = mk(OP_LOAD); p[0].mem = MEM_WEIGHT; p[0].a = 0; p[0].c = AF_W'(G1 + 1); p[0].ext = EXT_W_B;
    p[1] = mk(OP_LOAD); p[1].mem = MEM_INPUT;  p[1].a = 0; p[1].c = AF_W'(B2_I + G2); p[1].ext = EXT_I_B;
    p[2] = mk(OP_MATMUL); p[2].sparse = 1; p[2].bias_en = 1; p[2].res_en = 1; p[2].relu_en = 1;
    p[2].qshift = 8; p[2].a = 0; p[2].b = 0; p[2].c = AF_W'(G1); p[2].d = AF_W'(BIAS_W);
    p[2].e = AF_W'(RES_I); p[2].f = 0;
    p[3] = mk(OP_MATMUL); p[3].qshift = 12; p[3].a = 0; p[3].b = AF_W'(B2_I); p[3].c = AF_W'(G2);
    p[3].f = AF_W'(C / N);
    p[4] = mk(OP_SOFTMAX); p[4].a = AF_W'(C / N); p[4].b = AF_W'(2 * C / N); p[4].c = AF_W'(C / N);
    p[5] = p[2]; p[5].to_imem = 1; p[5].f = AF_W'(WB_I);
    p[6] = mk(OP_STORE); p[6].mem = MEM_INPUT; p[6].a = AF_W'(WB_I); p[6].c = AF_W'(L / M); p[6].ext = EXT_WB;
    p[7] = mk(OP_STORE); p[7].mem = MEM_INTER; p[7].a = 0; p[7].c = AF_W'(3 * C / N); p[7].ext = EXT_OUT;
    p[8] = mk(OP_END);

    wr_reg(2, 0);
    for (int i = 0; i < 9; i++) put_instr(p[i]);
    @(negedge clk); reg_addr = 2; #1;
    check(reg_rdata == 9, "IADDR advanced by 9 instructions");
    wr_reg(0, 1);                            // start is registered, busy follows
    @(negedge clk); reg_addr = 1; #1;
    check(reg_rdata[0] == 1'b1, "busy after start");
    t0 = 0;
    while (!irq) begin @(posedge clk); t0++; end
    $display("program ran %0d cycles", t0);
    n_irq++;
    @(negedge clk); reg_addr = 1; #1;
    check(reg_rdata[1:0] == 2'b10, "status done, not busy");

    // compare the stored words
    for (int w = 0; w < 3 * C / N; w++) begin
      logic [1023:0] word;
      for (int b = 0; b < TB; b++)
        word[b * 128 +: 128] = ext.exists(EXT_OUT + w * TB + b) ? ext[EXT_OUT + w * TB + b] : 'x;
      for (int l = 0; l < L; l++) for (int n = 0; n < N; n++) begin
        logic [15:0] got;
        got = word[(l * N + n) * 16 +: 16];
        if (w < C / N)
          check(got == 16'(y1[l][w * N + n]), $sformatf("MatMul-1 lane %0d col %0d got %0d want %0d",
                l, w * N + n, $signed(got), y1[l][w * N + n]));
        else if (w < 2 * C / N)
          check(got == 16'(y2[l][(w - C / N) * N + n]), $sformatf("MatMul-2 lane %0d col %0d got %0d want %0d",
                l, (w - C / N) * N + n, $signed(got), y2[l][(w - C / N) * N + n]));
        else begin
          real want;
          want = sm[((w - 2 * C / N) * L + l) * N + n];
          check((real'(got) - want < want * 0.005 + 3.0) && (want - real'(got) < want * 0.005 + 3.0),
                $sformatf("softmax word %0d elem %0d got %0d want %f", w, l * N + n, got, want));
        end
      end
    end
    // the input-memory copy of step 6: word w, bank c, element m = lane w*M+m
    for (int w = 0; w < L / M; w++) begin
      logic [2047:0] word;
      for (int b = 0; b < IB; b++)
        word[b * 128 +: 128] = ext.exists(EXT_WB + w * IB + b) ? ext[EXT_WB + w * IB + b] : 'x;
      for (int c = 0; c < C; c++) for (int m = 0; m < M; m++)
        check(word[(c * M + m) * 16 +: 16] == 16'(y1[w * M + m][c]),
              $sformatf("input-memory copy word %0d col %0d m %0d", w, c, m));
    end
    check(n_rd_beats == (G1 + 1) * WB + (B2_I + G2) * IB, "DMA read beats");
    check(n_wr_beats == 3 * C / N * TB + L / M * IB, "DMA write beats");
    $display("mechanisms: sparse=%0d dense=%0d shift=%0d bias=%0d res=%0d relu=%0d sat=%0d softmax=%0d load=%0d store=%0d irq=%0d nzes=%0d wb_in=%0d",
             n_sparse, n_dense, n_shift, n_bias, n_res, n_relu, n_sat, n_sm, n_load, n_store, n_irq, n_nzes, n_wb_in);
    check(n_sparse == 2, "sparse MatMul ran");
    check(n_dense == 1, "dense MatMul ran");
    check(n_shift == 3 * C, "results shifted out");
    check(n_bias == 2 * C, "bias added");
    check(n_res == 2 * C, "residual added");
    check(n_relu == 2 * C, "ReLU applied");
    check(n_wb_in == L / M, "result written back to the input memory");
    check(n_sat > 0, "saturation happened");
    check(n_sm == 1, "softmax ran");
    check(n_load == 2, "DMA loads");
    check(n_store == 2, "DMA stores");
    check(n_irq == 1, "interrupt");
    check(n_nzes > 0, "non-zero selection in sparse mode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

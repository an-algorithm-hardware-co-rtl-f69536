// sta_top: N:M sparse Transformer accelerator (STA).
//
// The accelerator runs Transformer layers whose weights are pruned to N:M
// sparsity (at most N non-zero weights in every group of M) and stored
// compactly as the non-zero values plus a bitmask.  Its diverse MatMul engine
// (DMME) multiplies such weights with dense activations, skipping the zeros,
// and multiplies two dense operands (attention scores) on the same PEs.
//
// Blocks and data paths:
//   host register port -> configuration registers -> top controller, which
//     runs the instruction buffer one instruction at a time;
//   DMA <-> external memory, weight memory, input memory, intermediate memory;
//   weight memory (sparse) or intermediate memory (dense) -> DMME west side;
//   input memory -> DMME north side (C banks);
//   DMME -> vector unit (bias from weight memory, residual from input memory,
//     ReLU, quantisation) -> reshuffle network -> intermediate memory;
//   intermediate memory <-> softmax (through the softmax controller);
//   the address generator forms the MatMul read/write addresses.
// Only one unit works at a time; each memory port is routed to the unit the
// running instruction belongs to.
//
// Ports: reg_* is a 32-bit register port (see sta_cfg_regs), ext_* a
// request/response port to external memory with EXT_W-bit beats (see
// sta_dma), irq_o the sticky done flag.
//
// The block set and the memory-to-engine paths follow the paper's
// architecture figure, except that the intermediate memory feeding the DMME
// in dense mode is this design's choice.  A MatMul result goes to the
// intermediate memory, or, with the instruction's to_imem flag (the end of a
// block), to the input memory in the layout of a linear layer's input.
// The vector unit's per-beat saturation flag (vec_sat) is left unconnected:
// saturation is silent, as the paper gives no overflow reporting; the
// signal is kept so that a status bit can be added without touching the
// vector unit.
module sta_top
  import sta_pkg::*;
#(
  parameter int unsigned N          = sta_pkg::N_DEF,
  parameter int unsigned M          = sta_pkg::M_DEF,
  parameter int unsigned H          = sta_pkg::H_DEF,
  parameter int unsigned R          = sta_pkg::R_DEF,
  parameter int unsigned C          = sta_pkg::C_DEF,
  parameter int unsigned SM_P       = sta_pkg::SM_P_DEF,
  parameter int unsigned SM_Q       = sta_pkg::SM_Q_DEF,
  parameter int unsigned SM_DEPTH   = 64,
  parameter int unsigned WMEM_DEPTH = sta_pkg::WMEM_DEPTH_DEF,
  parameter int unsigned IMEM_DEPTH = sta_pkg::IMEM_DEPTH_DEF,
  parameter int unsigned TMEM_DEPTH = sta_pkg::TMEM_DEPTH_DEF,
  parameter int unsigned IBUF_DEPTH = sta_pkg::IBUF_DEPTH_DEF
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // host register port
  input  logic              reg_we_i,
  input  logic [3:0]        reg_addr_i,
  input  logic [31:0]       reg_wdata_i,
  output logic [31:0]       reg_rdata_o,
  output logic              irq_o,
  // external memory port
  output logic              ext_req_valid_o,
  input  logic              ext_req_ready_i,
  output logic              ext_req_we_o,
  output logic [31:0]       ext_req_addr_o,
  output logic [EXT_W-1:0]  ext_req_wdata_o,
  input  logic              ext_rsp_valid_i,
  input  logic [EXT_W-1:0]  ext_rsp_rdata_i
);

  localparam int unsigned ROW_W   = N * DATA_W + M;
  localparam int unsigned LANES   = H * R;
  localparam int unsigned WORD_E  = H * R * N;
  localparam int unsigned WMEM_W  = H * R * ROW_W;
  localparam int unsigned IMEM_W  = C * M * DATA_W;
  localparam int unsigned TMEM_W  = WORD_E * DATA_W;
  localparam int unsigned WMEM_AW = $clog2(WMEM_DEPTH);
  localparam int unsigned IMEM_AW = $clog2(IMEM_DEPTH);
  localparam int unsigned TMEM_AW = $clog2(TMEM_DEPTH);
  localparam int unsigned IAW     = $clog2(IBUF_DEPTH);
  localparam int unsigned DMA_W   = (WMEM_W > IMEM_W) ? ((WMEM_W > TMEM_W) ? WMEM_W : TMEM_W)
                                                      : ((IMEM_W > TMEM_W) ? IMEM_W : TMEM_W);

  // ------------------------------------------------------------ control
  logic           start, busy, prog_done;
  logic           ibuf_we;
  logic [IAW-1:0] ibuf_waddr;
  instr_t         ibuf_wdata, instr;
  logic           dma_go, dma_done, dma_busy;
  logic           mm_go, mm_done, mm_busy;
  logic           sm_go, sm_done, smc_busy;

  sta_cfg_regs #(.IBUF_DEPTH(IBUF_DEPTH)) u_cfg (
    .clk_i        (clk_i),
    .rst_ni       (rst_ni),
    .reg_we_i     (reg_we_i),
    .reg_addr_i   (reg_addr_i),
    .reg_wdata_i  (reg_wdata_i),
    .reg_rdata_o  (reg_rdata_o),
    .start_o      (start),
    .ibuf_we_o    (ibuf_we),
    .ibuf_waddr_o (ibuf_waddr),
    .ibuf_wdata_o (ibuf_wdata),
    .busy_i       (busy),
    .done_i       (prog_done),
    .irq_o        (irq_o)
  );

  sta_top_ctrl #(.IBUF_DEPTH(IBUF_DEPTH)) u_top_ctrl (
    .clk_i        (clk_i),
    .rst_ni       (rst_ni),
    .ibuf_we_i    (ibuf_we),
    .ibuf_waddr_i (ibuf_waddr),
    .ibuf_wdata_i (ibuf_wdata),
    .start_i      (start),
    .busy_o       (busy),
    .done_o       (prog_done),
    .instr_o      (instr),
    .dma_go_o     (dma_go),
    .dma_done_i   (dma_done),
    .mm_go_o      (mm_go),
    .mm_done_i    (mm_done),
    .sm_go_o      (sm_go),
    .sm_done_i    (sm_done)
  );

  // ------------------------------------------------------------ memories
  logic                                   wmem_re, wmem_we;
  logic [WMEM_AW-1:0]                     wmem_raddr, wmem_waddr;
  logic [H-1:0][R-1:0][ROW_W-1:0]         wmem_rdata, wmem_wdata;
  logic                                   imem_re, imem_we;
  logic [IMEM_AW-1:0]                     imem_raddr, imem_waddr;
  logic [C-1:0][M-1:0][DATA_W-1:0]        imem_rdata, imem_wdata;
  logic                                   tmem_re, tmem_we;
  logic [TMEM_AW-1:0]                     tmem_raddr, tmem_waddr;
  logic [H-1:0][R-1:0][N-1:0][DATA_W-1:0] tmem_rdata, tmem_wdata;

  sta_weight_mem #(.N(N), .M(M), .H(H), .R(R), .DATA_W(DATA_W), .DEPTH(WMEM_DEPTH)) u_wmem (
    .clk_i (clk_i), .re_i (wmem_re), .raddr_i (wmem_raddr), .rdata_o (wmem_rdata),
    .we_i (wmem_we), .waddr_i (wmem_waddr), .wdata_i (wmem_wdata));

  sta_input_mem #(.M(M), .C(C), .DATA_W(DATA_W), .DEPTH(IMEM_DEPTH)) u_imem (
    .clk_i (clk_i), .re_i (imem_re), .raddr_i (imem_raddr), .rdata_o (imem_rdata),
    .we_i (imem_we), .waddr_i (imem_waddr), .wdata_i (imem_wdata));

  sta_inter_mem #(.N(N), .H(H), .R(R), .DATA_W(DATA_W), .DEPTH(TMEM_DEPTH)) u_tmem (
    .clk_i (clk_i), .re_i (tmem_re), .raddr_i (tmem_raddr), .rdata_o (tmem_rdata),
    .we_i (tmem_we), .waddr_i (tmem_waddr), .wdata_i (tmem_wdata));

  // ------------------------------------------------------------ DMA
  logic                dwm_we, dwm_re, dim_we, dim_re, dtm_we, dtm_re;
  logic [WMEM_AW-1:0]  dwm_addr;
  logic [IMEM_AW-1:0]  dim_addr;
  logic [TMEM_AW-1:0]  dtm_addr;
  logic [DMA_W-1:0]    dma_wdata;

  sta_dma #(.WMEM_W(WMEM_W), .IMEM_W(IMEM_W), .TMEM_W(TMEM_W),
            .WMEM_AW(WMEM_AW), .IMEM_AW(IMEM_AW), .TMEM_AW(TMEM_AW)) u_dma (
    .clk_i           (clk_i),
    .rst_ni          (rst_ni),
    .go_i            (dma_go),
    .instr_i         (instr),
    .busy_o          (dma_busy),
    .done_o          (dma_done),
    .ext_req_valid_o (ext_req_valid_o),
    .ext_req_ready_i (ext_req_ready_i),
    .ext_req_we_o    (ext_req_we_o),
    .ext_req_addr_o  (ext_req_addr_o),
    .ext_req_wdata_o (ext_req_wdata_o),
    .ext_rsp_valid_i (ext_rsp_valid_i),
    .ext_rsp_rdata_i (ext_rsp_rdata_i),
    .wmem_we_o       (dwm_we),
    .wmem_addr_o     (dwm_addr),
    .wmem_re_o       (dwm_re),
    .wmem_rdata_i    (wmem_rdata),
    .imem_we_o       (dim_we),
    .imem_addr_o     (dim_addr),
    .imem_re_o       (dim_re),
    .imem_rdata_i    (imem_rdata),
    .tmem_we_o       (dtm_we),
    .tmem_addr_o     (dtm_addr),
    .tmem_re_o       (dtm_re),
    .tmem_rdata_i    (tmem_rdata),
    .wdata_o         (dma_wdata)
  );

  // ------------------------------------------------------------ MatMul path
  logic              mm_stream, mm_shift_rd, dmme_valid, dmme_first, dmme_shift, vec_valid;
  logic [AF_W-1:0]   mm_g, mm_j;
  logic              ag_wre, ag_ire, ag_tre;
  logic [WMEM_AW-1:0] ag_waddr;
  logic [IMEM_AW-1:0] ag_iaddr;
  logic [TMEM_AW-1:0] ag_traddr, ag_twaddr;
  logic              rs_wr, rs_done;
  logic [$clog2(C/N+1)-1:0] rs_waddr;
  logic [LANES-1:0][N-1:0][DATA_W-1:0] rs_wdata;
  logic [C-1:0][M-1:0][DATA_W-1:0]     rs_iwdata;

  sta_matmul_ctrl #(.R(R), .C(C)) u_mm_ctrl (
    .clk_i        (clk_i),
    .rst_ni       (rst_ni),
    .go_i         (mm_go),
    .groups_i     (instr.c),
    .stream_o     (mm_stream),
    .g_o          (mm_g),
    .shift_rd_o   (mm_shift_rd),
    .j_o          (mm_j),
    .dmme_valid_o (dmme_valid),
    .dmme_first_o (dmme_first),
    .dmme_shift_o (dmme_shift),
    .vec_valid_o  (vec_valid),
    .wb_done_i    (rs_done),
    .busy_o       (mm_busy),
    .done_o       (mm_done)
  );

  sta_addr_gen #(.C(C), .WMEM_AW(WMEM_AW), .IMEM_AW(IMEM_AW), .TMEM_AW(TMEM_AW)) u_addr_gen (
    .instr_i      (instr),
    .stream_i     (mm_stream),
    .g_i          (mm_g),
    .shift_rd_i   (mm_shift_rd),
    .j_i          (mm_j),
    .w_i          (AF_W'(rs_waddr)),
    .wmem_re_o    (ag_wre),
    .wmem_raddr_o (ag_waddr),
    .imem_re_o    (ag_ire),
    .imem_raddr_o (ag_iaddr),
    .tmem_re_o    (ag_tre),
    .tmem_raddr_o (ag_traddr),
    .tmem_waddr_o (ag_twaddr)
  );

  // West operand: weight tiles (sparse) or intermediate-memory rows (dense).
  logic [H-1:0][R-1:0][N-1:0][DATA_W-1:0] west_data;
  logic [H-1:0][R-1:0][M-1:0]             west_mask;
  logic [H-1:0][R-1:0][ACC_W-1:0]         dmme_res;

  always_comb begin
    for (int h = 0; h < H; h++)
      for (int r = 0; r < R; r++) begin
        west_mask[h][r] = wmem_rdata[h][r][ROW_W-1 -: M];
        for (int n = 0; n < N; n++)
          west_data[h][r][n] = instr.sparse ? wmem_rdata[h][r][n*DATA_W +: DATA_W]
                                            : tmem_rdata[h][r][n];
      end
  end

  sta_dmme #(.N(N), .M(M), .H(H), .R(R), .C(C), .DATA_W(DATA_W), .ACC_W(ACC_W)) u_dmme (
    .clk_i       (clk_i),
    .rst_ni      (rst_ni),
    .sparse_i    (instr.sparse),
    .shift_i     (dmme_shift),
    .valid_i     (dmme_valid),
    .first_i     (dmme_first),
    .west_data_i (west_data),
    .west_mask_i (west_mask),
    .north_i     (imem_rdata),
    .res_o       (dmme_res)
  );

  // Bias and residual: the low LANES 16-bit fields of the words read.
  logic [LANES-1:0][DATA_W-1:0] vec_bias, vec_res, vec_y;
  logic                         vec_out_valid, vec_sat;
  sta_pkg::vec_cfg_t            vec_cfg;

  assign vec_bias = (LANES*DATA_W)'(wmem_rdata);
  assign vec_res  = (LANES*DATA_W)'(imem_rdata);
  assign vec_cfg  = '{bias_en: instr.bias_en, res_en: instr.res_en,
                      relu_en: instr.relu_en, qshift: instr.qshift};

  sta_vector_unit #(.LANES(LANES), .DATA_W(DATA_W), .ACC_W(ACC_W)) u_vec (
    .clk_i   (clk_i),
    .rst_ni  (rst_ni),
    .cfg_i   (vec_cfg),
    .valid_i (vec_valid),
    .acc_i   (dmme_res),
    .bias_i  (vec_bias),
    .res_i   (vec_res),
    .y_o     (vec_y),
    .valid_o (vec_out_valid),
    .sat_o   (vec_sat)
  );

  sta_reshuffle #(.LANES(LANES), .C(C), .N(N), .M(M), .DATA_W(DATA_W)) u_reshuffle (
    .clk_i       (clk_i),
    .rst_ni      (rst_ni),
    .col_i       (vec_y),
    .valid_i     (vec_out_valid),
    .in_layout_i (instr.to_imem),
    .wr_o        (rs_wr),
    .waddr_o     (rs_waddr),
    .wdata_o     (rs_wdata),
    .iwdata_o    (rs_iwdata),
    .done_o      (rs_done)
  );

  // ------------------------------------------------------------ softmax path
  logic                          smc_re, smc_we, sm_start, sm_in_valid, sm_out_valid, sm_fin;
  logic [TMEM_AW-1:0]            smc_raddr, smc_waddr;
  logic [WORD_E-1:0][DATA_W-1:0] smc_wdata;
  logic [15:0]                   sm_len;
  logic [SM_P-1:0][DATA_W-1:0]   sm_x;
  logic [SM_P-1:0][SM_Q-1:0]     sm_y;

  sta_softmax_ctrl #(.WORD_E(WORD_E), .P(SM_P), .Q(SM_Q), .DATA_W(DATA_W), .TMEM_AW(TMEM_AW)) u_sm_ctrl (
    .clk_i        (clk_i),
    .rst_ni       (rst_ni),
    .go_i         (sm_go),
    .instr_i      (instr),
    .tmem_re_o    (smc_re),
    .tmem_raddr_o (smc_raddr),
    .tmem_rdata_i (tmem_rdata),
    .tmem_we_o    (smc_we),
    .tmem_waddr_o (smc_waddr),
    .tmem_wdata_o (smc_wdata),
    .sm_start_o   (sm_start),
    .sm_len_o     (sm_len),
    .sm_x_o       (sm_x),
    .sm_valid_o   (sm_in_valid),
    .sm_y_i       (sm_y),
    .sm_valid_i   (sm_out_valid),
    .sm_done_i    (sm_fin),
    .busy_o       (smc_busy),
    .done_o       (sm_done)
  );

  sta_softmax #(.P(SM_P), .Q(SM_Q), .BUF_DEPTH(SM_DEPTH), .DATA_W(DATA_W)) u_softmax (
    .clk_i         (clk_i),
    .rst_ni        (rst_ni),
    .start_i       (sm_start),
    .cfg_acc_len_i (sm_len),
    .x_i           (sm_x),
    .valid_i       (sm_in_valid),
    .y_o           (sm_y),
    .valid_o       (sm_out_valid),
    .done_o        (sm_fin)
  );

  // ------------------------------------------------------------ port routing
  always_comb begin
    // weight memory
    wmem_re    = dma_busy ? dwm_re : ag_wre;
    wmem_raddr = dma_busy ? dwm_addr : ag_waddr;
    wmem_we    = dwm_we;
    wmem_waddr = dwm_addr;
    wmem_wdata = WMEM_W'(dma_wdata);
    // input memory
    imem_re    = dma_busy ? dim_re : ag_ire;
    imem_raddr = dma_busy ? dim_addr : ag_iaddr;
    if (dim_we) begin
      imem_we = 1'b1;  imem_waddr = dim_addr;  imem_wdata = IMEM_W'(dma_wdata);
    end else begin
      imem_we = rs_wr && instr.to_imem;
      imem_waddr = IMEM_AW'(ag_twaddr);  imem_wdata = rs_iwdata;
    end
    // intermediate memory
    if (dma_busy) begin
      tmem_re = dtm_re;  tmem_raddr = dtm_addr;
    end else if (smc_busy) begin
      tmem_re = smc_re;  tmem_raddr = smc_raddr;
    end else begin
      tmem_re = ag_tre;  tmem_raddr = ag_traddr;
    end
    if (dtm_we) begin
      tmem_we = 1'b1;  tmem_waddr = dtm_addr;  tmem_wdata = TMEM_W'(dma_wdata);
    end else if (smc_we) begin
      tmem_we = 1'b1;  tmem_waddr = smc_waddr; tmem_wdata = smc_wdata;
    end else begin
      tmem_we = rs_wr && !instr.to_imem; tmem_waddr = ag_twaddr; tmem_wdata = rs_wdata;
    end
  end

  // Only one unit runs at a time.
  a_one_unit: assert property (@(posedge clk_i) disable iff (!rst_ni)
      $onehot0({dma_busy, mm_busy, smc_busy}));

endmodule

// sta_softmax_ctrl: softmax controller.
//
// Runs one SOFTMAX instruction: the vector is instr.c words of the
// intermediate memory starting at instr.a; the normalised vector is written
// to instr.c words starting at instr.b.  Each word holds WORD_E 16-bit
// elements and is fed to the softmax as BPW = WORD_E/P beats, element 0
// first.  Sequence: start the softmax with length c*BPW beats; per word,
// read it (one cycle), then feed its BPW beats; the outputs, which come after
// the whole vector has been summed, are gathered BPW beats to a word and
// written back.  done_o pulses after the softmax has finished and the last
// word is written.  Q-bit outputs are zero-extended to 16 bits.
// The paper names the controller only; this sequencing is this design's.
module sta_softmax_ctrl #(
  parameter int unsigned WORD_E  = sta_pkg::H_DEF * sta_pkg::R_DEF * sta_pkg::N_DEF,
  parameter int unsigned P       = sta_pkg::SM_P_DEF,
  parameter int unsigned Q       = sta_pkg::SM_Q_DEF,
  parameter int unsigned DATA_W  = sta_pkg::DATA_W,
  parameter int unsigned TMEM_AW = $clog2(sta_pkg::TMEM_DEPTH_DEF),
  parameter int unsigned LEN_W   = 16
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic                          go_i,
  input  sta_pkg::instr_t                        instr_i,
  // intermediate memory
  output logic                          tmem_re_o,
  output logic [TMEM_AW-1:0]            tmem_raddr_o,
  input  logic [WORD_E-1:0][DATA_W-1:0] tmem_rdata_i,
  output logic                          tmem_we_o,
  output logic [TMEM_AW-1:0]            tmem_waddr_o,
  output logic [WORD_E-1:0][DATA_W-1:0] tmem_wdata_o,
  // softmax
  output logic                          sm_start_o,
  output logic [LEN_W-1:0]              sm_len_o,
  output logic [P-1:0][DATA_W-1:0]      sm_x_o,
  output logic                          sm_valid_o,
  input  logic [P-1:0][Q-1:0]           sm_y_i,
  input  logic                          sm_valid_i,
  input  logic                          sm_done_i,
  output logic                          busy_o,
  output logic                          done_o
);

  localparam int unsigned BPW = WORD_E / P;
  localparam int unsigned BW  = (BPW > 1) ? $clog2(BPW) : 1;

  typedef enum logic [2:0] {S_IDLE, S_READ, S_WAIT, S_FEED, S_DRAIN} state_e;

  state_e                          state_q;
  logic [sta_pkg::AF_W-1:0]                 words_q, rd_w, wr_w;
  logic [BW-1:0]                   beat_q, obeat_q;
  logic [WORD_E-1:0][DATA_W-1:0]   word_q;
  logic                            sm_done_seen;

  initial begin
    assert (WORD_E % P == 0 && Q <= DATA_W) else $error("sta_softmax_ctrl: bad sizes");
  end

  assign tmem_re_o    = (state_q == S_READ);
  assign tmem_raddr_o = TMEM_AW'(instr_i.a + rd_w);
  assign sm_len_o     = LEN_W'(instr_i.c) * LEN_W'(BPW);
  assign sm_valid_o   = (state_q == S_FEED);

  always_comb begin
    for (int p = 0; p < P; p++) sm_x_o[p] = word_q[32'(beat_q) * P + p];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE; words_q <= '0; rd_w <= '0; wr_w <= '0; beat_q <= '0;
      obeat_q <= '0; word_q <= '0; sm_start_o <= 1'b0; done_o <= 1'b0;
      tmem_we_o <= 1'b0; tmem_waddr_o <= '0; tmem_wdata_o <= '0; sm_done_seen <= 1'b0;
    end else begin
      sm_start_o <= 1'b0;
      done_o     <= 1'b0;
      tmem_we_o  <= 1'b0;
      unique case (state_q)
        S_IDLE: if (go_i) begin
          words_q <= instr_i.c; rd_w <= '0; wr_w <= '0; beat_q <= '0; obeat_q <= '0;
          sm_done_seen <= 1'b0;
          if (instr_i.c == '0) done_o <= 1'b1;
          else begin
            sm_start_o <= 1'b1;
            state_q    <= S_READ;
          end
        end
        S_READ:  state_q <= S_WAIT;
        S_WAIT:  begin word_q <= tmem_rdata_i; beat_q <= '0; state_q <= S_FEED; end
        S_FEED:  begin
          if (beat_q == BW'(BPW - 1)) begin
            rd_w    <= rd_w + 1'b1;
            state_q <= (rd_w + 1'b1 == words_q) ? S_DRAIN : S_READ;
          end else beat_q <= beat_q + 1'b1;
        end
        S_DRAIN: if (sm_done_seen && !tmem_we_o) begin
          state_q <= S_IDLE;
          done_o  <= 1'b1;
        end
        default: state_q <= S_IDLE;
      endcase

      // Output gathering runs alongside the states above.
      if (sm_done_i) sm_done_seen <= 1'b1;
      if (sm_valid_i) begin
        for (int p = 0; p < P; p++)
          tmem_wdata_o[32'(obeat_q) * P + p] <= DATA_W'(sm_y_i[p]);
        if (obeat_q == BW'(BPW - 1)) begin
          obeat_q      <= '0;
          tmem_we_o    <= 1'b1;
          tmem_waddr_o <= TMEM_AW'(instr_i.b + wr_w);
          wr_w         <= wr_w + 1'b1;
        end else obeat_q <= obeat_q + 1'b1;
      end
    end
  end

  assign busy_o = (state_q != S_IDLE);

endmodule

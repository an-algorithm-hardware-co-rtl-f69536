// sta_softmax: scalable softmax module.
//
// Computes y_i = e^(x_i) / sum_j e^(x_j) over a vector streamed in as
// cfg_acc_len_i beats of P elements (any length up to BUF_DEPTH beats).
// Two phases, as in the paper:
//   1. accumulate: each beat goes through P exponential units; the exponents
//      are written to the data buffer and summed by the partial-sum
//      accumulator;
//   2. divide: once the sum is complete the buffer is read back beat by beat
//      into P Q-stage dividers, each dividing an exponent by the sum.
// Interface: start_i (one cycle) captures the length and clears the state;
// then x_i/valid_i beats (signed, 8 fraction bits); y_o/valid_o beats come out
// in the same order (Q bits, one integer bit, Q-1 fraction bits); done_o
// pulses the cycle after the last output beat; a new vector may start then.
// Timing: an input beat reaches the buffer and the sum 2 cycles after it
// enters; the division phase begins the cycle after the sum is complete and
// each output beat appears 1 + Q cycles after its buffer read.
// P, Q, BUF_DEPTH and the number formats are this design's choices; the paper
// gives the structure but not the sizes of the STA-Small softmax.
module sta_softmax #(
  parameter int unsigned P         = sta_pkg::SM_P_DEF,
  parameter int unsigned Q         = sta_pkg::SM_Q_DEF,
  parameter int unsigned BUF_DEPTH = 64,
  parameter int unsigned DATA_W    = sta_pkg::DATA_W,
  parameter int unsigned EXP_W     = sta_pkg::EXP_W,
  parameter int unsigned LEN_W     = 16
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic                          start_i,
  input  logic [LEN_W-1:0]              cfg_acc_len_i,
  input  logic [P-1:0][DATA_W-1:0]      x_i,
  input  logic                          valid_i,
  output logic [P-1:0][Q-1:0]           y_o,
  output logic                          valid_o,
  output logic                          done_o
);

  localparam int unsigned SUM_W = EXP_W + $clog2(BUF_DEPTH * P);
  localparam int unsigned AW    = $clog2(BUF_DEPTH);

  // ---------------------------------------------------------- exponentials
  logic [P-1:0][EXP_W-1:0] e;
  logic [P-1:0]            e_valid;

  for (genvar p = 0; p < P; p++) begin : g_exp
    sta_sm_exp #(.DATA_W(DATA_W), .EXP_W(EXP_W)) u_exp (
      .clk_i   (clk_i),
      .rst_ni  (rst_ni),
      .x_i     (x_i[p]),
      .valid_i (valid_i),
      .e_o     (e[p]),
      .valid_o (e_valid[p])
    );
  end

  // ---------------------------------------------------------- accumulator
  logic [SUM_W-1:0] sum;
  logic             acc_done;

  sta_sm_acc #(.P(P), .EXP_W(EXP_W), .SUM_W(SUM_W), .LEN_W(LEN_W)) u_acc (
    .clk_i         (clk_i),
    .rst_ni        (rst_ni),
    .start_i       (start_i),
    .cfg_acc_len_i (cfg_acc_len_i),
    .e_i           (e),
    .valid_i       (e_valid[0]),
    .sum_o         (sum),
    .done_o        (acc_done)
  );

  // ---------------------------------------------------------- data buffer
  logic [P-1:0][EXP_W-1:0] buf_mem [BUF_DEPTH];
  logic [AW-1:0]           wr_ptr, rd_ptr;
  logic [LEN_W-1:0]        len_q, rd_cnt, out_cnt;
  logic                    dividing, rd_valid_q;
  logic [P-1:0][EXP_W-1:0] rd_data_q;

  always_ff @(posedge clk_i) begin
    if (e_valid[0] && !acc_done) buf_mem[wr_ptr] <= e;
    rd_data_q <= buf_mem[rd_ptr];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wr_ptr <= '0; rd_ptr <= '0; len_q <= '0; rd_cnt <= '0;
      out_cnt <= '0; dividing <= 1'b0; rd_valid_q <= 1'b0; done_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (start_i) begin
        wr_ptr <= '0; rd_ptr <= '0; rd_cnt <= '0; out_cnt <= '0;
        len_q <= cfg_acc_len_i; dividing <= 1'b0; rd_valid_q <= 1'b0;
      end else begin
        if (e_valid[0] && !acc_done) wr_ptr <= wr_ptr + 1'b1;
        // Division phase: read one buffered beat per cycle.
        if (acc_done && !dividing && rd_cnt == '0 && len_q != '0) dividing <= 1'b1;
        rd_valid_q <= dividing;
        if (dividing) begin
          rd_ptr <= rd_ptr + 1'b1;
          rd_cnt <= rd_cnt + 1'b1;
          if (rd_cnt + 1'b1 == len_q) dividing <= 1'b0;
        end
        if (valid_o) begin
          out_cnt <= out_cnt + 1'b1;
          if (out_cnt + 1'b1 == len_q) done_o <= 1'b1;
        end
      end
    end
  end

  // ---------------------------------------------------------- dividers
  logic [P-1:0] q_valid;

  for (genvar p = 0; p < P; p++) begin : g_div
    sta_sm_div #(.Q(Q), .A_W(SUM_W)) u_div (
      .clk_i   (clk_i),
      .rst_ni  (rst_ni),
      .a_i     (SUM_W'(rd_data_q[p])),
      .b_i     (sum),
      .valid_i (rd_valid_q),
      .q_o     (y_o[p]),
      .valid_o (q_valid[p])
    );
  end

  assign valid_o = q_valid[0];

endmodule

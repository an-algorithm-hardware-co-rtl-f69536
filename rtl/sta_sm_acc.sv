// sta_sm_acc: configurable partial-sum accumulator of the scalable softmax.
//
// Each valid beat brings P exponents; an adder tree sums them and the running
// sum adds the result.  A counter (CNT) compares the number of beats with
// cfg_acc_len_i, captured at start_i, so vectors of any length (in beats of
// P elements) can be summed; done_o rises after the last beat and stays high
// until the next start_i.  start_i clears the sum and the counter.
// Timing: a beat at cycle t is in sum_o after the edge of cycle t.
// The adder tree is not pipelined (this design's choice).
module sta_sm_acc #(
  parameter int unsigned P     = sta_pkg::SM_P_DEF,
  parameter int unsigned EXP_W = sta_pkg::EXP_W,
  parameter int unsigned SUM_W = sta_pkg::EXP_W + 10,
  parameter int unsigned LEN_W = 16
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  input  logic                      start_i,
  input  logic [LEN_W-1:0]          cfg_acc_len_i,
  input  logic [P-1:0][EXP_W-1:0]   e_i,
  input  logic                      valid_i,
  output logic [SUM_W-1:0]          sum_o,
  output logic                      done_o
);

  logic [LEN_W-1:0] len_q, cnt_q;
  logic [SUM_W-1:0] tree;

  always_comb begin
    tree = '0;
    for (int p = 0; p < P; p++) tree += SUM_W'(e_i[p]);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      len_q <= '0; cnt_q <= '0; sum_o <= '0; done_o <= 1'b0;
    end else if (start_i) begin
      len_q <= cfg_acc_len_i; cnt_q <= '0; sum_o <= '0;
      done_o <= (cfg_acc_len_i == '0);
    end else if (valid_i && !done_o) begin
      sum_o <= sum_o + tree;
      cnt_q <= cnt_q + 1'b1;
      if (cnt_q + 1'b1 == len_q) done_o <= 1'b1;
    end
  end

endmodule

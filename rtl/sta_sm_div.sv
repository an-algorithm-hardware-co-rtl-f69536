// sta_sm_div: scalable pipelined divider of the softmax, one lane.
//
// Q divider blocks in cascade.  Block k compares its remainder A with the
// divisor B (CMP), subtracts B when A >= B, shifts the result left by one
// and registers it together with B; the compare result is quotient bit
// Q-1-k.  Bits found in earlier blocks are carried along in registers (the
// "delay" lines of the paper's figure) so that all Q bits leave together.
// With A <= B at the input the output is q = floor(A * 2^(Q-1) / B): a
// Q-bit number with one integer bit and Q-1 fraction bits, so A = B gives
// 2^(Q-1) = 1.0.  B must be non-zero.
// Latency: Q cycles, one result per cycle.
// The compare-subtract-shift order is read from the figure; the output format
// follows from it.
module sta_sm_div #(
  parameter int unsigned Q   = sta_pkg::SM_Q_DEF,
  parameter int unsigned A_W = sta_pkg::EXP_W + 10
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic [A_W-1:0]     a_i,
  input  logic [A_W-1:0]     b_i,
  input  logic               valid_i,
  output logic [Q-1:0]       q_o,
  output logic               valid_o
);

  // Stage registers; index 0 is the input.
  logic [Q:0][A_W:0]   a_s;
  logic [Q:0][A_W-1:0] b_s;
  logic [Q:0][Q-1:0]   q_s;
  logic [Q:0]          v_s;

  assign a_s[0] = {1'b0, a_i};
  assign b_s[0] = b_i;
  assign q_s[0] = '0;
  assign v_s[0] = valid_i;

  for (genvar k = 0; k < Q; k++) begin : g_blk
    logic         ge;
    logic [A_W:0] diff;
    assign ge   = a_s[k] >= {1'b0, b_s[k]};
    assign diff = ge ? a_s[k] - {1'b0, b_s[k]} : a_s[k];
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        a_s[k+1] <= '0; b_s[k+1] <= '0; q_s[k+1] <= '0; v_s[k+1] <= 1'b0;
      end else begin
        a_s[k+1] <= diff << 1;
        b_s[k+1] <= b_s[k];
        q_s[k+1] <= {q_s[k][Q-2:0], ge};
        v_s[k+1] <= v_s[k];
      end
    end
  end

  assign q_o     = q_s[Q];
  assign valid_o = v_s[Q];

endmodule

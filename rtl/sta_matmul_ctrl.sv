// sta_matmul_ctrl: MatMul controller.
//
// Sequences one MatMul instruction (G = instr.c groups) through the DMME:
//   STREAM  G cycles: stream_o high, g_o = 0..G-1 (memory reads issued);
//           the read data reach the DMME one cycle later with dmme_valid_o,
//           and dmme_first_o marks group 0.
//   DRAIN   R+C cycles, so the last group has passed through every PE
//           (skew R-1+C-1 plus the two PE pipeline stages).
//   SHIFT   C+1 cycles: in the first C, shift_rd_o requests bias/residual
//           for step j_o; from the second, dmme_shift_o shifts the arrays and
//           vec_valid_o hands each column to the vector unit together with
//           the operands read the cycle before.
//   FLUSH   wait for the reshuffle network to finish writing (wb_done_i),
//           then pulse done_o.
// The phase structure follows the engine's systolic timing; the paper names
// the controller only.
module sta_matmul_ctrl
  import sta_pkg::*;
#(
  parameter int unsigned R = sta_pkg::R_DEF,
  parameter int unsigned C = sta_pkg::C_DEF
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              go_i,
  input  logic [AF_W-1:0]   groups_i,
  output logic              stream_o,
  output logic [AF_W-1:0]   g_o,
  output logic              shift_rd_o,
  output logic [AF_W-1:0]   j_o,
  output logic              dmme_valid_o,
  output logic              dmme_first_o,
  output logic              dmme_shift_o,
  output logic              vec_valid_o,
  input  logic              wb_done_i,
  output logic              busy_o,
  output logic              done_o
);

  typedef enum logic [2:0] {S_IDLE, S_STREAM, S_DRAIN, S_SHIFT, S_FLUSH} state_e;

  state_e          state_q;
  logic [AF_W-1:0] cnt_q, len_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE; cnt_q <= '0; len_q <= '0; done_o <= 1'b0;
      dmme_valid_o <= 1'b0; dmme_first_o <= 1'b0;
    end else begin
      done_o       <= 1'b0;
      dmme_valid_o <= (state_q == S_STREAM);
      dmme_first_o <= (state_q == S_STREAM) && (cnt_q == '0);
      unique case (state_q)
        S_IDLE: if (go_i) begin
          len_q   <= groups_i;
          cnt_q   <= '0;
          state_q <= (groups_i == '0) ? S_IDLE : S_STREAM;
          done_o  <= (groups_i == '0);
        end
        S_STREAM: begin
          if (cnt_q == len_q - 1'b1) begin cnt_q <= '0; state_q <= S_DRAIN; end
          else cnt_q <= cnt_q + 1'b1;
        end
        S_DRAIN: begin
          if (cnt_q == AF_W'(R + C - 1)) begin cnt_q <= '0; state_q <= S_SHIFT; end
          else cnt_q <= cnt_q + 1'b1;
        end
        S_SHIFT: begin
          if (cnt_q == AF_W'(C)) begin cnt_q <= '0; state_q <= S_FLUSH; end
          else cnt_q <= cnt_q + 1'b1;
        end
        S_FLUSH: if (wb_done_i) begin state_q <= S_IDLE; done_o <= 1'b1; end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign stream_o     = (state_q == S_STREAM);
  assign g_o          = cnt_q;
  assign shift_rd_o   = (state_q == S_SHIFT) && (cnt_q < AF_W'(C));
  assign j_o          = cnt_q;
  assign dmme_shift_o = (state_q == S_SHIFT) && (cnt_q != '0);
  assign vec_valid_o  = dmme_shift_o;
  assign busy_o       = (state_q != S_IDLE);

endmodule

// sta_vector_unit: fused vector operations on MatMul results.
//
// For every lane, on the 32-bit MatMul result (16 fraction bits):
//   v = acc + (bias_en ? bias << 8 : 0) + (res_en ? residual << 8 : 0)
//   v = relu_en ? max(v, 0) : v
//   y = saturate16((v + 2^(qshift-1)) >>> qshift)       (qshift = 0: no rounding)
// bias and residual are 16-bit operands with 8 fraction bits, so
// qshift = 8 returns the result to that format.  sat_o flags a beat in which
// some lane saturated.  One pipeline register (valid_i -> valid_o: 1 cycle).
// The paper lists bias addition, residual addition, activation (ReLU in its
// architecture figure) and quantisation; the order, formats and rounding are
// this design's choices.
module sta_vector_unit #(
  parameter int unsigned LANES  = sta_pkg::H_DEF * sta_pkg::R_DEF,
  parameter int unsigned DATA_W = sta_pkg::DATA_W,
  parameter int unsigned ACC_W  = sta_pkg::ACC_W,
  parameter int unsigned FRAC_B = sta_pkg::FRAC
) (
  input  logic                            clk_i,
  input  logic                            rst_ni,
  input  sta_pkg::vec_cfg_t                        cfg_i,
  input  logic                            valid_i,
  input  logic [LANES-1:0][ACC_W-1:0]     acc_i,
  input  logic [LANES-1:0][DATA_W-1:0]    bias_i,
  input  logic [LANES-1:0][DATA_W-1:0]    res_i,
  output logic [LANES-1:0][DATA_W-1:0]    y_o,
  output logic                            valid_o,
  output logic                            sat_o
);

  localparam int unsigned VW = ACC_W + 3;
  localparam logic signed [VW-1:0] MAXV = VW'((1 << (DATA_W-1)) - 1);
  localparam logic signed [VW-1:0] MINV = -VW'(1 << (DATA_W-1));

  logic [LANES-1:0][DATA_W-1:0] y_d;
  logic [LANES-1:0]             sat_d;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [VW-1:0] v;
      v = VW'($signed(acc_i[l]));
      if (cfg_i.bias_en) v += VW'($signed(bias_i[l])) <<< FRAC_B;
      if (cfg_i.res_en)  v += VW'($signed(res_i[l]))  <<< FRAC_B;
      if (cfg_i.relu_en && v < 0) v = '0;
      if (cfg_i.qshift != '0) v += VW'(1) <<< (cfg_i.qshift - 5'd1);
      v = v >>> cfg_i.qshift;
      sat_d[l] = 1'b0;
      if (v > MAXV)      begin y_d[l] = MAXV[DATA_W-1:0]; sat_d[l] = 1'b1; end
      else if (v < MINV) begin y_d[l] = MINV[DATA_W-1:0]; sat_d[l] = 1'b1; end
      else                     y_d[l] = v[DATA_W-1:0];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      y_o <= '0; valid_o <= 1'b0; sat_o <= 1'b0;
    end else begin
      y_o     <= y_d;
      valid_o <= valid_i;
      sat_o   <= valid_i & (|sat_d);
    end
  end

endmodule

// sta_sm_exp: exponential unit of the scalable softmax.
//
// e^x is computed as e^(x_hi) * (1 + x_lo): x_hi is x rounded down to a
// multiple of 1/16 and looked up in a 256-entry table, x_lo is the remaining
// 4 fraction bits, used in a first-order Taylor term.  So one adder (1 + x_lo)
// and one multiplier per unit, as in the paper.  The table holds
// e^(k/16), k = -128..127, as unsigned numbers with EXP_FRAC fraction bits;
// it is computed at elaboration by repeated fixed-point multiplication with
// e^(+-1/16) = 1170424035283 / 2^40 and 1032895585848 / 2^40.
// Inputs outside [-8, 8) are clamped to the table range.
//
// Interface: x_i signed, 8 fraction bits; e_o unsigned, EXP_FRAC fraction
// bits.  Two pipeline stages: table and adder, then multiplier.
// The table size and number formats are this design's choices.
module sta_sm_exp #(
  parameter int unsigned DATA_W   = sta_pkg::DATA_W,
  parameter int unsigned EXP_W    = sta_pkg::EXP_W,
  parameter int unsigned EXP_FRAC = sta_pkg::EXP_FRAC
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic signed [DATA_W-1:0] x_i,
  input  logic                     valid_i,
  output logic [EXP_W-1:0]         e_o,
  output logic                     valid_o
);

  typedef logic [255:0][EXP_W-1:0] lut_t;

  function automatic lut_t gen_lut();
    lut_t t;
    logic [127:0] v;
    // e^0 .. e^(127/16)
    v = 128'd1 << 40;
    for (int k = 0; k < 128; k++) begin
      t[128 + k] = EXP_W'((v + (128'd1 << (39 - EXP_FRAC))) >> (40 - EXP_FRAC));
      v = (v * 128'd1170424035283) >> 40;
    end
    // e^(-1/16) .. e^(-128/16)
    v = 128'd1 << 40;
    for (int k = 1; k <= 128; k++) begin
      v = (v * 128'd1032895585848) >> 40;
      t[128 - k] = EXP_W'((v + (128'd1 << (39 - EXP_FRAC))) >> (40 - EXP_FRAC));
    end
    return t;
  endfunction

  localparam lut_t LUT = gen_lut();

  // Stage 1: table index and 1 + x_lo (Q1.8).
  logic signed [DATA_W-5:0] hi;
  logic [7:0]               idx;
  logic [3:0]               lo;

  always_comb begin
    hi = x_i[DATA_W-1:4];
    if (hi < -128) begin
      idx = 8'd0;   lo = 4'd0;
    end else if (hi > 127) begin
      idx = 8'd255; lo = 4'hf;
    end else begin
      idx = 8'(hi + 128); lo = x_i[3:0];
    end
  end

  logic [EXP_W-1:0] lut_q;
  logic [8:0]       opl_q;
  logic             v1_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      lut_q <= '0; opl_q <= '0; v1_q <= 1'b0;
      e_o   <= '0; valid_o <= 1'b0;
    end else begin
      lut_q   <= LUT[idx];
      opl_q   <= 9'd256 + 9'(lo);
      v1_q    <= valid_i;
      e_o     <= EXP_W'(((EXP_W+9)'(lut_q) * (EXP_W+9)'(opl_q)) >> 8);
      valid_o <= v1_q;
    end
  end

endmodule

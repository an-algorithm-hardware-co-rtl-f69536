// sta_pe: unified systolic processing element (output stationary).
//
// Each cycle the PE takes an operand beat from the west (N values b_i, an
// M-bit mask, and the valid/first flags that travel with it) and M
// activations from the north (a_i).  It forwards the west beat east and the
// north beat south through one register each, so neighbours see them one
// cycle later, and accumulates one N-element dot product into its local
// 32-bit result:
//   dense-dense  (sparse_i = 0): dot(b_i, a_i[N-1:0]); the selector is
//                bypassed and its mask input held at 0 so it does not toggle.
//   sparse-dense (sparse_i = 1): the non-zero element selector picks the N
//                activations named by the mask, then dot(b_i, picked).
// In shifting mode (shift_i = 1) the result register loads c_i, the result
// of the western PE, so a row of PEs shifts its results out to the east one
// per cycle; c_o is the local result.
//
// Timing: a beat at the inputs in cycle t is in the selector register at
// edge t, in the product register at edge t+1 and in c_o after edge t+2.
// The port set (aIn/bIn/cIn/maskIn in, aOut/bOut/cOut/maskOut out) and the
// zero inputs of the output multiplexers follow the paper's PE figure; the
// global shift signal and the "first" flag that clears the accumulator are
// this design's choices.
module sta_pe #(
  parameter int unsigned N      = sta_pkg::N_DEF,
  parameter int unsigned M      = sta_pkg::M_DEF,
  parameter int unsigned DATA_W = sta_pkg::DATA_W,
  parameter int unsigned ACC_W  = sta_pkg::ACC_W
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  logic                        sparse_i,
  input  logic                        shift_i,
  // north / south
  input  logic [M-1:0][DATA_W-1:0]    a_i,
  output logic [M-1:0][DATA_W-1:0]    a_o,
  // west / east operand beat
  input  logic [N-1:0][DATA_W-1:0]    b_i,
  input  logic [M-1:0]                mask_i,
  input  logic                        valid_i,
  input  logic                        first_i,
  output logic [N-1:0][DATA_W-1:0]    b_o,
  output logic [M-1:0]                mask_o,
  output logic                        valid_o,
  output logic                        first_o,
  // results
  input  logic signed [ACC_W-1:0]     c_i,
  output logic signed [ACC_W-1:0]     c_o
);

  logic [M-1:0]                  nz_mask;
  logic [N-1:0][DATA_W-1:0]      nz_sel;
  logic [N-1:0][M-1:0]           nz_onehot;
  logic [N-1:0][DATA_W-1:0]      act_sel;

  // Selector input is gated in dense mode (bypass for energy saving).
  assign nz_mask = sparse_i ? mask_i : '0;

  sta_nzes #(.N(N), .M(M), .DATA_W(DATA_W)) u_nzes (
    .mask_i   (nz_mask),
    .act_i    (a_i),
    .sel_o    (nz_sel),
    .onehot_o (nz_onehot)
  );

  always_comb begin
    for (int n = 0; n < N; n++)
      act_sel[n] = sparse_i ? nz_sel[n] : a_i[n];
  end

  // Selector pipeline register and the systolic forwarding registers.
  logic [N-1:0][DATA_W-1:0] act_q, w_q;
  logic                     v_q, f_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      act_q   <= '0;
      w_q     <= '0;
      v_q     <= 1'b0;
      f_q     <= 1'b0;
      a_o     <= '0;
      b_o     <= '0;
      mask_o  <= '0;
      valid_o <= 1'b0;
      first_o <= 1'b0;
    end else begin
      act_q   <= valid_i ? act_sel : '0;
      w_q     <= valid_i ? b_i     : '0;
      v_q     <= valid_i;
      f_q     <= valid_i & first_i;
      a_o     <= a_i;
      b_o     <= valid_i ? b_i    : '0;
      mask_o  <= valid_i ? mask_i : '0;
      valid_o <= valid_i;
      first_o <= valid_i & first_i;
    end
  end

  sta_nmac #(.N(N), .DATA_W(DATA_W), .ACC_W(ACC_W)) u_nmac (
    .clk_i   (clk_i),
    .rst_ni  (rst_ni),
    .a_i     (act_q),
    .b_i     (w_q),
    .valid_i (v_q),
    .clear_i (f_q),
    .load_i  (shift_i),
    .csum_i  (c_i),
    .csum_o  (c_o)
  );

endmodule

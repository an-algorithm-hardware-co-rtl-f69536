// sta_nzes: non-zero element selector of the unified systolic PE.
//
// An N:M sparse weight group is stored as its (at most) N non-zero values plus
// an M-bit mask marking their positions.  This block turns the mask into N
// one-hot masks, the n-th one marking the n-th set bit counted from bit 0, and
// uses each one-hot mask to pick the matching activation out of the M
// activations of the group.  The one-hot masks come from a cascade of
// "isolate lowest set bit" (x & -x) and "clear it" (xor) steps, as in the
// paper's selector figure: for mask 1101 the masks are 0001, 0100, 1000.
// If fewer than N bits are set the remaining one-hot masks are zero and those
// outputs are 0, so a short group contributes nothing for the missing weights.
//
// Purely combinational; the PE registers its output.  The AND-OR form of the
// one-hot multiplexers is this design's choice.
module sta_nzes #(
  parameter int unsigned N      = sta_pkg::N_DEF,
  parameter int unsigned M      = sta_pkg::M_DEF,
  parameter int unsigned DATA_W = sta_pkg::DATA_W
) (
  input  logic [M-1:0]                mask_i,
  input  logic [M-1:0][DATA_W-1:0]    act_i,
  output logic [N-1:0][DATA_W-1:0]    sel_o,
  output logic [N-1:0][M-1:0]         onehot_o
);

  // rem is the mask with the set bits found so far cleared.
  always_comb begin
    logic [M-1:0] rem;
    rem = mask_i;
    for (int n = 0; n < N; n++) begin
      onehot_o[n] = rem & (-rem);              // x & (-x): lowest set bit
      rem         = rem ^ onehot_o[n];         // xor: remove it
    end
  end

  always_comb begin
    for (int n = 0; n < N; n++) begin
      sel_o[n] = '0;
      for (int m = 0; m < M; m++)
        sel_o[n] |= act_i[m] & {DATA_W{onehot_o[n][m]}};
    end
  end

endmodule

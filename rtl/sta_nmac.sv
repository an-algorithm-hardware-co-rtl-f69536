// sta_nmac: N-parallel multiply-accumulate unit of the unified systolic PE.
//
// N signed 16x16 multipliers feed an adder tree whose sum is added to the
// local 32-bit partial sum, as in the paper's N-parallel MAC figure.
// Two pipeline stages: stage 1 registers the N products, stage 2 sums them
// and updates the accumulator.  The control inputs travel with the operands:
//   valid_i  the beat carries operands to accumulate,
//   clear_i  the beat is the first of a new sum (accumulator starts from 0),
//   load_i   (stage-2 timing, not pipelined) load csum_i into the
//            accumulator instead: this is the shifting mode, in which the PE
//            takes its western neighbour's result.
// csum_o is the accumulator.  A product beat entering at cycle t is in
// csum_o after the clock edge of cycle t+1 (two edges).  The split into two
// stages and the wrap-around on overflow are this design's choices; the paper
// only says the MAC is fully pipelined.
module sta_nmac #(
  parameter int unsigned N      = sta_pkg::N_DEF,
  parameter int unsigned DATA_W = sta_pkg::DATA_W,
  parameter int unsigned ACC_W  = sta_pkg::ACC_W
) (
  input  logic                            clk_i,
  input  logic                            rst_ni,
  input  logic [N-1:0][DATA_W-1:0]        a_i,
  input  logic [N-1:0][DATA_W-1:0]        b_i,
  input  logic                            valid_i,
  input  logic                            clear_i,
  input  logic                            load_i,
  input  logic signed [ACC_W-1:0]         csum_i,
  output logic signed [ACC_W-1:0]         csum_o
);

  logic signed [N-1:0][2*DATA_W-1:0] prod_q;
  logic                              valid_q, clear_q;
  logic signed [ACC_W-1:0]           tree;
  logic [N-1:0][2*DATA_W-1:0]        prod;

  // Signed products, kept apart from any unsigned context.
  always_comb begin
    for (int n = 0; n < N; n++) begin
      logic signed [2*DATA_W-1:0] p;
      p       = $signed(a_i[n]) * $signed(b_i[n]);
      prod[n] = p;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      prod_q  <= '0;
      valid_q <= 1'b0;
      clear_q <= 1'b0;
    end else begin
      for (int n = 0; n < N; n++)
        prod_q[n] <= valid_i ? prod[n] : '0;
      valid_q <= valid_i;
      clear_q <= clear_i;
    end
  end

  // Adder tree (written as a sum; synthesis builds the tree).
  always_comb begin
    tree = '0;
    for (int n = 0; n < N; n++)
      tree += ACC_W'($signed(prod_q[n]));
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)        csum_o <= '0;
    else if (load_i)    csum_o <= csum_i;
    else if (valid_q)   csum_o <= (clear_q ? '0 : csum_o) + tree;
  end

endmodule

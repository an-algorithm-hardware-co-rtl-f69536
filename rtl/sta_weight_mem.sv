// sta_weight_mem: on-chip weight memory, H tiles.
//
// Holds the compressed N:M weights.  One word (one address) is one group step
// for all H tiles: for each tile h and each row r of that tile it stores the
// N non-zero weights of the group and its M-bit position mask, packed as
// {mask, w[N-1], ..., w[0]}.  Tile h feeds engine h of the DMME, so all
// H*R*N weights needed per cycle come out of one read.  The same word,
// reinterpreted as 16-bit fields from bit 0, also supplies per-lane biases to
// the vector unit.
// Ports: one synchronous read port (data valid the cycle after re_i) and one
// write port, each a whole word.  Banking into H tile arrays follows the
// paper's data access pattern; the depth is this design's choice, sized with
// the other two memories to about the 532 block RAMs of the 2:8 accelerator.
module sta_weight_mem #(
  parameter int unsigned N      = sta_pkg::N_DEF,
  parameter int unsigned M      = sta_pkg::M_DEF,
  parameter int unsigned H      = sta_pkg::H_DEF,
  parameter int unsigned R      = sta_pkg::R_DEF,
  parameter int unsigned DATA_W = sta_pkg::DATA_W,
  parameter int unsigned DEPTH  = sta_pkg::WMEM_DEPTH_DEF,
  localparam int unsigned ROW_W = N * DATA_W + M,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                               clk_i,
  input  logic                               re_i,
  input  logic [AW-1:0]                      raddr_i,
  output logic [H-1:0][R-1:0][ROW_W-1:0]     rdata_o,
  input  logic                               we_i,
  input  logic [AW-1:0]                      waddr_i,
  input  logic [H-1:0][R-1:0][ROW_W-1:0]     wdata_i
);

  for (genvar h = 0; h < H; h++) begin : g_tile
    logic [R-1:0][ROW_W-1:0] mem [DEPTH];
    always_ff @(posedge clk_i) begin
      if (we_i) mem[waddr_i] <= wdata_i[h];
      if (re_i) rdata_o[h] <= mem[raddr_i];
    end
  end

endmodule

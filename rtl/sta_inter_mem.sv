// sta_inter_mem: on-chip intermediate memory.
//
// Holds the temporary results inside a ResBlock so they never leave the chip:
// reshuffled MatMul results and softmax outputs.  One word is H*R*N 16-bit
// elements laid out [h][r][n], which is exactly one dense-mode west beat of
// the DMME (N elements for each row of each engine), and H*R*N/P beats of the
// softmax.
// Ports: one synchronous read port (data valid the cycle after re_i) and one
// write port, whole words.  Width and depth are this design's choices.
module sta_inter_mem #(
  parameter int unsigned N      = sta_pkg::N_DEF,
  parameter int unsigned H      = sta_pkg::H_DEF,
  parameter int unsigned R      = sta_pkg::R_DEF,
  parameter int unsigned DATA_W = sta_pkg::DATA_W,
  parameter int unsigned DEPTH  = sta_pkg::TMEM_DEPTH_DEF,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                                     clk_i,
  input  logic                                     re_i,
  input  logic [AW-1:0]                            raddr_i,
  output logic [H-1:0][R-1:0][N-1:0][DATA_W-1:0]   rdata_o,
  input  logic                                     we_i,
  input  logic [AW-1:0]                            waddr_i,
  input  logic [H-1:0][R-1:0][N-1:0][DATA_W-1:0]   wdata_i
);

  logic [H-1:0][R-1:0][N-1:0][DATA_W-1:0] mem [DEPTH];

  always_ff @(posedge clk_i) begin
    if (we_i) mem[waddr_i] <= wdata_i;
    if (re_i) rdata_o <= mem[raddr_i];
  end

endmodule

// sta_reshuffle: reshuffle network between the vector unit and the
// intermediate memory.
//
// A MatMul tile leaves the DMME as C columns of LANES values, last column
// first (the rows shift their results out to the east).  This block stores
// the C columns, then writes them back in column order, N columns per memory
// word: word w holds, for every lane l, the elements of columns w*N .. w*N+N-1
// (element [l][n] = column w*N+n).  A stored tile is thereby laid out like a
// dense-mode west operand: for each row, N consecutive values of the
// reduction index per word.
// With in_layout_i high the tile is instead written in the input-memory
// layout, so that a block's result can be the next linear layer's input:
// LANES/M words, word w holding for every column (token) c the M values of
// lanes w*M .. w*M+M-1 (element [c][m] = lane w*M+m), on iwdata_o.
// Interface: col_i/valid_i, C beats per tile; then C/N (or LANES/M) cycles
// of wr_o with waddr_o = 0, 1, ... (offset added by the user) and
// wdata_o / iwdata_o; done_o with the last write.  in_layout_i must be
// steady for the whole tile.  The next tile may start after done_o.
// The paper says only that the network reorders results before they are
// written back, and that block results also go to the input memory; these
// two orders are this design's.
module sta_reshuffle #(
  parameter int unsigned LANES  = sta_pkg::H_DEF * sta_pkg::R_DEF,
  parameter int unsigned C      = sta_pkg::C_DEF,
  parameter int unsigned N      = sta_pkg::N_DEF,
  parameter int unsigned M      = sta_pkg::M_DEF,
  parameter int unsigned DATA_W = sta_pkg::DATA_W
) (
  input  logic                                  clk_i,
  input  logic                                  rst_ni,
  input  logic [LANES-1:0][DATA_W-1:0]          col_i,
  input  logic                                  valid_i,
  input  logic                                  in_layout_i,
  output logic                                  wr_o,
  output logic [$clog2(C/N+1)-1:0]              waddr_o,
  output logic [LANES-1:0][N-1:0][DATA_W-1:0]   wdata_o,
  output logic [C-1:0][M-1:0][DATA_W-1:0]       iwdata_o,
  output logic                                  done_o
);

  localparam int unsigned WORDS  = C / N;
  localparam int unsigned IWORDS = LANES / M;
  localparam int unsigned WW     = $clog2(C/N+1);
  localparam int unsigned CW    = $clog2(C + 1);

  logic [C-1:0][LANES-1:0][DATA_W-1:0] tile_q;
  logic [CW-1:0]                       in_cnt;
  logic                                emitting;
  logic [WW-1:0]                       w_cnt, last_w;

  initial begin
    assert (C % N == 0 && LANES % M == 0 && IWORDS <= WORDS)
      else $error("sta_reshuffle: C must be a multiple of N, LANES of M");
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      tile_q <= '0; in_cnt <= '0; emitting <= 1'b0; w_cnt <= '0;
    end else begin
      if (valid_i && !emitting) begin
        tile_q[CW'(C - 1) - in_cnt] <= col_i;
        if (in_cnt == CW'(C - 1)) begin
          in_cnt   <= '0;
          emitting <= 1'b1;
        end else begin
          in_cnt <= in_cnt + 1'b1;
        end
      end
      if (emitting) begin
        if (w_cnt == last_w) begin
          w_cnt    <= '0;
          emitting <= 1'b0;
        end else begin
          w_cnt <= w_cnt + 1'b1;
        end
      end
    end
  end

  assign last_w = in_layout_i ? WW'(IWORDS - 1) : WW'(WORDS - 1);

  always_comb begin
    for (int l = 0; l < LANES; l++)
      for (int n = 0; n < N; n++)
        wdata_o[l][n] = tile_q[w_cnt * N + n][l];
    for (int c = 0; c < C; c++)
      for (int m = 0; m < M; m++)
        iwdata_o[c][m] = tile_q[c][(w_cnt * M + m) % LANES];
  end

  assign wr_o    = emitting;
  assign waddr_o = w_cnt;
  assign done_o  = emitting && (w_cnt == last_w);

endmodule

// sta_engine: unified MatMul computing engine, an R x C array of unified
// systolic PEs (output stationary).
//
// PE (r, c) accumulates out[r][c] = sum over groups g of the dot product of
// west beat g of row r with north beat g of column c.  The engine takes its
// inputs unskewed, one group per cycle for every row and column, and skews
// them itself: row r's west beat is delayed r cycles and column c's north beat
// c cycles, so that beat g of row r meets beat g of column c in PE (r, c) at
// cycle g + r + c.  In shifting mode every row moves its results one PE to the
// east per cycle; res_o[r] is the result of the east-most PE of row r, so
// during C consecutive shift cycles res_o shows columns C-1, C-2, ..., 0.
//
// Timing: with G groups entering at cycles 0..G-1, the last accumulation lands
// in PE (R-1, C-1) after edge G+R+C-2+1, i.e. the results are stable from cycle
// G+R+C (relative to the first beat), which is when shift_i may be raised.
// For the paper's 2x2 example (G=4 dense, G=2 sparse) this is the 5- and
// 3-cycle systolic wavefront plus the two PE pipeline stages.
// Where the skew registers sit is this design's choice.
module sta_engine #(
  parameter int unsigned N      = sta_pkg::N_DEF,
  parameter int unsigned M      = sta_pkg::M_DEF,
  parameter int unsigned R      = sta_pkg::R_DEF,
  parameter int unsigned C      = sta_pkg::C_DEF,
  parameter int unsigned DATA_W = sta_pkg::DATA_W,
  parameter int unsigned ACC_W  = sta_pkg::ACC_W
) (
  input  logic                                clk_i,
  input  logic                                rst_ni,
  input  logic                                sparse_i,
  input  logic                                shift_i,
  input  logic                                valid_i,
  input  logic                                first_i,
  input  logic [R-1:0][N-1:0][DATA_W-1:0]     west_data_i,
  input  logic [R-1:0][M-1:0]                 west_mask_i,
  input  logic [C-1:0][M-1:0][DATA_W-1:0]     north_i,
  output logic [R-1:0][ACC_W-1:0]             res_o
);

  // West skew: row r passes through r registers.
  logic [R-1:0][N-1:0][DATA_W-1:0] w_data;
  logic [R-1:0][M-1:0]             w_mask;
  logic [R-1:0]                    w_valid, w_first;
  // North skew: column c passes through c registers.
  logic [C-1:0][M-1:0][DATA_W-1:0] n_data;

  for (genvar r = 0; r < R; r++) begin : g_wskew
    if (r == 0) begin : g_direct
      assign w_data[r]  = west_data_i[r];
      assign w_mask[r]  = west_mask_i[r];
      assign w_valid[r] = valid_i;
      assign w_first[r] = first_i;
    end else begin : g_delay
      logic [r-1:0][N-1:0][DATA_W-1:0] d_q;
      logic [r-1:0][M-1:0]             m_q;
      logic [r-1:0]                    v_q, f_q;
      always_ff @(posedge clk_i or negedge rst_ni) begin
        if (!rst_ni) begin
          d_q <= '0; m_q <= '0; v_q <= '0; f_q <= '0;
        end else begin
          d_q[0] <= west_data_i[r];
          m_q[0] <= west_mask_i[r];
          v_q[0] <= valid_i;
          f_q[0] <= first_i;
          for (int i = 1; i < r; i++) begin
            d_q[i] <= d_q[i-1]; m_q[i] <= m_q[i-1];
            v_q[i] <= v_q[i-1]; f_q[i] <= f_q[i-1];
          end
        end
      end
      assign w_data[r]  = d_q[r-1];
      assign w_mask[r]  = m_q[r-1];
      assign w_valid[r] = v_q[r-1];
      assign w_first[r] = f_q[r-1];
    end
  end

  for (genvar c = 0; c < C; c++) begin : g_nskew
    if (c == 0) begin : g_direct
      assign n_data[c] = north_i[c];
    end else begin : g_delay
      logic [c-1:0][M-1:0][DATA_W-1:0] d_q;
      always_ff @(posedge clk_i or negedge rst_ni) begin
        if (!rst_ni) d_q <= '0;
        else begin
          d_q[0] <= north_i[c];
          for (int i = 1; i < c; i++) d_q[i] <= d_q[i-1];
        end
      end
      assign n_data[c] = d_q[c-1];
    end
  end

  // PE grid wiring: index [r][c] is the input side of PE (r, c);
  // [r][c+1] / [r+1][c] carry its east / south outputs.
  logic [R-1:0][C:0][N-1:0][DATA_W-1:0] b_w;
  logic [R-1:0][C:0][M-1:0]             m_w;
  logic [R-1:0][C:0]                    v_w, f_w;
  logic [R-1:0][C:0][ACC_W-1:0]         c_w;
  logic [R:0][C-1:0][M-1:0][DATA_W-1:0] a_w;

  for (genvar r = 0; r < R; r++) begin : g_row
    assign b_w[r][0] = w_data[r];
    assign m_w[r][0] = w_mask[r];
    assign v_w[r][0] = w_valid[r];
    assign f_w[r][0] = w_first[r];
    assign c_w[r][0] = '0;
    assign res_o[r]  = c_w[r][C];
    for (genvar c = 0; c < C; c++) begin : g_col
      if (r == 0) begin : g_top
        assign a_w[0][c] = n_data[c];
      end
      sta_pe #(.N(N), .M(M), .DATA_W(DATA_W), .ACC_W(ACC_W)) u_pe (
        .clk_i    (clk_i),
        .rst_ni   (rst_ni),
        .sparse_i (sparse_i),
        .shift_i  (shift_i),
        .a_i      (a_w[r][c]),
        .a_o      (a_w[r+1][c]),
        .b_i      (b_w[r][c]),
        .mask_i   (m_w[r][c]),
        .valid_i  (v_w[r][c]),
        .first_i  (f_w[r][c]),
        .b_o      (b_w[r][c+1]),
        .mask_o   (m_w[r][c+1]),
        .valid_o  (v_w[r][c+1]),
        .first_o  (f_w[r][c+1]),
        .c_i      (c_w[r][c]),
        .c_o      (c_w[r][c+1])
      );
    end
  end

endmodule

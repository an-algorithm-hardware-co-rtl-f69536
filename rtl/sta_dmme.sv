// sta_dmme: diverse MatMul computing engine, H unified engines side by side.
//
// West side: engine h receives its own beat west_data_i[h] / west_mask_i[h]
// (sparse-dense: weight tile h, N non-zero weights and an M-bit mask per row;
// dense-dense: N elements of head h's row operand per row).
// North side: one M-element word per input-memory bank, bank c feeding
// column c of every engine.
//   sparse-dense: the bank word is multicast unchanged to all H engines; each
//                 PE's selector picks the N activations its mask names.
//   dense-dense:  the bank word holds N elements for each of the H heads
//                 (N*H = M); engine h gets elements h*N .. h*N+N-1 moved to
//                 its low N lanes through N-wide multiplexers (engine 0 needs
//                 none), the rest zero.
// res_o[h][r] is the east-edge result of row r of engine h during shifting.
//
// Timing is that of sta_engine.  The bank-word split for the dense mode
// follows the paper's input-memory mapping figure (N=2, M=4, H=2, C=4
// example); requiring H = M/N follows the paper's "NH equal to M".
module sta_dmme #(
  parameter int unsigned N      = sta_pkg::N_DEF,
  parameter int unsigned M      = sta_pkg::M_DEF,
  parameter int unsigned H      = sta_pkg::H_DEF,
  parameter int unsigned R      = sta_pkg::R_DEF,
  parameter int unsigned C      = sta_pkg::C_DEF,
  parameter int unsigned DATA_W = sta_pkg::DATA_W,
  parameter int unsigned ACC_W  = sta_pkg::ACC_W
) (
  input  logic                                      clk_i,
  input  logic                                      rst_ni,
  input  logic                                      sparse_i,
  input  logic                                      shift_i,
  input  logic                                      valid_i,
  input  logic                                      first_i,
  input  logic [H-1:0][R-1:0][N-1:0][DATA_W-1:0]    west_data_i,
  input  logic [H-1:0][R-1:0][M-1:0]                west_mask_i,
  input  logic [C-1:0][M-1:0][DATA_W-1:0]           north_i,
  output logic [H-1:0][R-1:0][ACC_W-1:0]            res_o
);

  initial begin
    assert (N * H == M) else $error("sta_dmme: N*H must equal M");
  end

  for (genvar h = 0; h < H; h++) begin : g_head
    logic [C-1:0][M-1:0][DATA_W-1:0] north_h;

    always_comb begin
      for (int c = 0; c < C; c++) begin
        for (int m = 0; m < M; m++) begin
          if (sparse_i)   north_h[c][m] = north_i[c][m];
          else if (m < N) north_h[c][m] = north_i[c][h*N + m];
          else            north_h[c][m] = '0;
        end
      end
    end

    sta_engine #(.N(N), .M(M), .R(R), .C(C), .DATA_W(DATA_W), .ACC_W(ACC_W)) u_engine (
      .clk_i       (clk_i),
      .rst_ni      (rst_ni),
      .sparse_i    (sparse_i),
      .shift_i     (shift_i),
      .valid_i     (valid_i),
      .first_i     (first_i),
      .west_data_i (west_data_i[h]),
      .west_mask_i (west_mask_i[h]),
      .north_i     (north_h),
      .res_o       (res_o[h])
    );
  end

endmodule

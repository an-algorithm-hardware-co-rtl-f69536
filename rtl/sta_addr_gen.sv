// sta_addr_gen: address generator for MatMul instructions.
//
// Combinational.  From the MatMul instruction and the step counters of the
// MatMul controller it forms the memory read addresses and enables:
//   stream phase, group g:  west operand at a+g (weight memory when sparse,
//                           intermediate memory when dense), activations at
//                           b+g (input memory, all banks);
//   shift phase, step j:    bias word at d (weight memory) if bias_en,
//                           residual word at e+C-1-j (input memory) if
//                           res_en -- step j delivers column C-1-j;
//   write-back:             intermediate-memory word f+w for reshuffle word w.
// Address widths are cut to each memory's depth.  The paper only names the
// block; the address sequences follow from this design's data layouts.
module sta_addr_gen
  import sta_pkg::*;
#(
  parameter int unsigned C        = sta_pkg::C_DEF,
  parameter int unsigned WMEM_AW  = $clog2(sta_pkg::WMEM_DEPTH_DEF),
  parameter int unsigned IMEM_AW  = $clog2(sta_pkg::IMEM_DEPTH_DEF),
  parameter int unsigned TMEM_AW  = $clog2(sta_pkg::TMEM_DEPTH_DEF)
) (
  input  instr_t                instr_i,
  input  logic                  stream_i,
  input  logic [AF_W-1:0]       g_i,
  input  logic                  shift_rd_i,
  input  logic [AF_W-1:0]       j_i,
  input  logic [AF_W-1:0]       w_i,
  output logic                  wmem_re_o,
  output logic [WMEM_AW-1:0]    wmem_raddr_o,
  output logic                  imem_re_o,
  output logic [IMEM_AW-1:0]    imem_raddr_o,
  output logic                  tmem_re_o,
  output logic [TMEM_AW-1:0]    tmem_raddr_o,
  output logic [TMEM_AW-1:0]    tmem_waddr_o
);

  logic [AF_W-1:0] west_a, north_a, res_a;

  assign west_a  = instr_i.a + g_i;
  assign north_a = instr_i.b + g_i;
  assign res_a   = instr_i.e + AF_W'(C - 1) - j_i;

  always_comb begin
    wmem_re_o    = 1'b0;
    imem_re_o    = 1'b0;
    tmem_re_o    = 1'b0;
    wmem_raddr_o = WMEM_AW'(west_a);
    imem_raddr_o = IMEM_AW'(north_a);
    tmem_raddr_o = TMEM_AW'(west_a);
    if (stream_i) begin
      wmem_re_o = instr_i.sparse;
      tmem_re_o = !instr_i.sparse;
      imem_re_o = 1'b1;
    end else if (shift_rd_i) begin
      wmem_re_o    = instr_i.bias_en;
      wmem_raddr_o = WMEM_AW'(instr_i.d);
      imem_re_o    = instr_i.res_en;
      imem_raddr_o = IMEM_AW'(res_a);
    end
  end

  assign tmem_waddr_o = TMEM_AW'(instr_i.f + w_i);

endmodule

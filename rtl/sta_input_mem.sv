// sta_input_mem: on-chip input memory, C banks.
//
// Bank c feeds column c of the DMME.  One address of a bank holds M 16-bit
// elements: in sparse-dense mode M consecutive elements (one N:M group) of
// one activation column; in dense-dense mode N elements for each of the H
// heads (N*H = M).  All banks are read at the same address, so one read
// delivers the C*M elements the DMME takes per cycle.  The same word,
// reinterpreted as 16-bit fields from bit 0, supplies residual operands to
// the vector unit.
// Ports: one synchronous read port (data valid the cycle after re_i) and one
// write port, whole words.  The bank structure follows the paper; the depth
// is this design's choice.
module sta_input_mem #(
  parameter int unsigned M      = sta_pkg::M_DEF,
  parameter int unsigned C      = sta_pkg::C_DEF,
  parameter int unsigned DATA_W = sta_pkg::DATA_W,
  parameter int unsigned DEPTH  = sta_pkg::IMEM_DEPTH_DEF,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                               clk_i,
  input  logic                               re_i,
  input  logic [AW-1:0]                      raddr_i,
  output logic [C-1:0][M-1:0][DATA_W-1:0]    rdata_o,
  input  logic                               we_i,
  input  logic [AW-1:0]                      waddr_i,
  input  logic [C-1:0][M-1:0][DATA_W-1:0]    wdata_i
);

  for (genvar c = 0; c < C; c++) begin : g_bank
    logic [M-1:0][DATA_W-1:0] mem [DEPTH];
    always_ff @(posedge clk_i) begin
      if (we_i) mem[waddr_i] <= wdata_i[c];
      if (re_i) rdata_o[c] <= mem[raddr_i];
    end
  end

endmodule

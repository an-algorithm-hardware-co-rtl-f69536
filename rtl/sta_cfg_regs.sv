// sta_cfg_regs: host-visible configuration registers.
//
// A 32-bit register port through which the host loads the instruction buffer,
// starts the accelerator and polls its status.  Register map (word index):
//   0 CTRL    write 1 to bit 0: start execution at instruction 0
//   1 STATUS  read: bit 0 busy, bit 1 done (sticky until the next start)
//   2 IADDR   read/write: instruction-buffer write pointer
//   3..6 IDATA0..3  instruction bits [31:0] .. [127:96]; writing IDATA3
//           writes the 128-bit instruction at IADDR and increments IADDR
// Writes take effect at the clock edge; reads are combinational.
// irq_o mirrors the done bit.  The register map is this design's own; the
// paper only names the block.
module sta_cfg_regs #(
  parameter int unsigned IBUF_DEPTH = sta_pkg::IBUF_DEPTH_DEF,
  localparam int unsigned IAW       = $clog2(IBUF_DEPTH)
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  logic                        reg_we_i,
  input  logic [3:0]                  reg_addr_i,
  input  logic [31:0]                 reg_wdata_i,
  output logic [31:0]                 reg_rdata_o,
  output logic                        start_o,
  output logic                        ibuf_we_o,
  output logic [IAW-1:0]              ibuf_waddr_o,
  output logic [sta_pkg::INSTR_W-1:0] ibuf_wdata_o,
  input  logic                        busy_i,
  input  logic                        done_i,
  output logic                        irq_o
);

  logic [2:0][31:0] idata_q;
  logic [IAW-1:0]   iaddr_q;
  logic             done_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      idata_q <= '0; iaddr_q <= '0; done_q <= 1'b0;
      start_o <= 1'b0; ibuf_we_o <= 1'b0; ibuf_waddr_o <= '0; ibuf_wdata_o <= '0;
    end else begin
      start_o   <= 1'b0;
      ibuf_we_o <= 1'b0;
      if (done_i) done_q <= 1'b1;
      if (reg_we_i) begin
        case (reg_addr_i)
          4'd0: if (reg_wdata_i[0] && !busy_i) begin
                  start_o <= 1'b1;
                  done_q  <= 1'b0;
                end
          4'd2: iaddr_q <= reg_wdata_i[IAW-1:0];
          4'd3, 4'd4, 4'd5: idata_q[reg_addr_i - 4'd3] <= reg_wdata_i;
          4'd6: begin
                  ibuf_we_o    <= 1'b1;
                  ibuf_waddr_o <= iaddr_q;
                  ibuf_wdata_o <= {reg_wdata_i, idata_q[2], idata_q[1], idata_q[0]};
                  iaddr_q      <= iaddr_q + 1'b1;
                end
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    case (reg_addr_i)
      4'd1:    reg_rdata_o = {30'd0, done_q, busy_i};
      4'd2:    reg_rdata_o = 32'(iaddr_q);
      4'd3:    reg_rdata_o = idata_q[0];
      4'd4:    reg_rdata_o = idata_q[1];
      4'd5:    reg_rdata_o = idata_q[2];
      default: reg_rdata_o = '0;
    endcase
  end

  assign irq_o = done_q;

endmodule

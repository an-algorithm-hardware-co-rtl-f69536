// sta_top_ctrl: top controller and instruction buffer.
//
// Holds the program (IBUF_DEPTH 128-bit instructions, written through the
// configuration registers) and runs it from address 0 when start_i pulses.
// Each instruction is fetched (one cycle, synchronous buffer read), decoded
// and handed to the unit that executes it with a one-cycle go pulse:
// LOAD/STORE to the DMA, MATMUL to the MatMul controller (fused vector
// operations are flags of the MatMul instruction), SOFTMAX to the softmax
// controller.  The controller waits for that unit's done pulse before
// fetching the next instruction; END stops the program and pulses done_o.
// instr_o holds the instruction being executed for the units to read.
// busy_o is high from start to done.
// The paper names the controller and the three instruction categories; the
// encoding and the strictly sequential execution are this design's choices.
module sta_top_ctrl
  import sta_pkg::*;
#(
  parameter int unsigned IBUF_DEPTH = sta_pkg::IBUF_DEPTH_DEF,
  localparam int unsigned IAW       = $clog2(IBUF_DEPTH)
) (
  input  logic           clk_i,
  input  logic           rst_ni,
  input  logic           ibuf_we_i,
  input  logic [IAW-1:0] ibuf_waddr_i,
  input  instr_t         ibuf_wdata_i,
  input  logic           start_i,
  output logic           busy_o,
  output logic           done_o,
  output instr_t         instr_o,
  output logic           dma_go_o,
  input  logic           dma_done_i,
  output logic           mm_go_o,
  input  logic           mm_done_i,
  output logic           sm_go_o,
  input  logic           sm_done_i
);

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_DECODE, S_WAIT} state_e;

  instr_t         ibuf [IBUF_DEPTH];
  instr_t         rd_q;
  state_e         state_q;
  logic [IAW-1:0] pc_q;

  always_ff @(posedge clk_i) begin
    if (ibuf_we_i) ibuf[ibuf_waddr_i] <= ibuf_wdata_i;
    rd_q <= ibuf[pc_q];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE; pc_q <= '0; instr_o <= '0;
      done_o <= 1'b0; dma_go_o <= 1'b0; mm_go_o <= 1'b0; sm_go_o <= 1'b0;
    end else begin
      done_o <= 1'b0; dma_go_o <= 1'b0; mm_go_o <= 1'b0; sm_go_o <= 1'b0;
      unique case (state_q)
        S_IDLE:   if (start_i) begin pc_q <= '0; state_q <= S_FETCH; end
        S_FETCH:  state_q <= S_DECODE;            // buffer read in flight
        S_DECODE: begin
          instr_o <= rd_q;
          pc_q    <= pc_q + 1'b1;
          state_q <= S_WAIT;
          case (rd_q.op)
            OP_LOAD, OP_STORE: dma_go_o <= 1'b1;
            OP_MATMUL:         mm_go_o  <= 1'b1;
            OP_SOFTMAX:        sm_go_o  <= 1'b1;
            default: begin                          // OP_END and unused codes
              done_o  <= 1'b1;
              state_q <= S_IDLE;
            end
          endcase
        end
        S_WAIT:   if (dma_done_i || mm_done_i || sm_done_i) state_q <= S_FETCH;
        default:  state_q <= S_IDLE;
      endcase
    end
  end

  assign busy_o = (state_q != S_IDLE);

endmodule

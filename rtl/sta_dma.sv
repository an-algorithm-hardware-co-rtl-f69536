// sta_dma: DMA between external memory and the three on-chip memories.
//
// Executes LOAD and STORE instructions: instr.c whole words of memory
// instr.mem, starting at on-chip word instr.a and external beat address
// instr.ext.  An on-chip word of width W travels as BEATS(W) = ceil(W/EXT_W)
// consecutive EXT_W-bit beats, lowest bits first, so word k occupies external
// beats ext + k*BEATS .. ext + k*BEATS + BEATS-1.
//   LOAD : read the beats of a word, assemble it, write it on chip.
//   STORE: read the word on chip (one cycle), write its beats out.
// External port: a request channel (ext_req_valid_o / ext_req_ready_i, with
// write flag, beat address and write data) and a read-response channel
// (ext_rsp_valid_i / ext_rsp_rdata_i).  One read is outstanding at a time.
// done_o pulses when the last word has been moved.
// The paper names the DMA only; the bus protocol and the beat width are this
// design's choices.
module sta_dma
  import sta_pkg::*;
#(
  parameter int unsigned WMEM_W  = 1280,
  parameter int unsigned IMEM_W  = 2048,
  parameter int unsigned TMEM_W  = 1024,
  parameter int unsigned WMEM_AW = $clog2(sta_pkg::WMEM_DEPTH_DEF),
  parameter int unsigned IMEM_AW = $clog2(sta_pkg::IMEM_DEPTH_DEF),
  parameter int unsigned TMEM_AW = $clog2(sta_pkg::TMEM_DEPTH_DEF),
  localparam int unsigned MAX_W  = (WMEM_W > IMEM_W) ? ((WMEM_W > TMEM_W) ? WMEM_W : TMEM_W)
                                                     : ((IMEM_W > TMEM_W) ? IMEM_W : TMEM_W),
  localparam int unsigned MAX_B  = (MAX_W + EXT_W - 1) / EXT_W
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 go_i,
  input  instr_t               instr_i,
  output logic                 busy_o,
  output logic                 done_o,
  // external memory
  output logic                 ext_req_valid_o,
  input  logic                 ext_req_ready_i,
  output logic                 ext_req_we_o,
  output logic [31:0]          ext_req_addr_o,
  output logic [EXT_W-1:0]     ext_req_wdata_o,
  input  logic                 ext_rsp_valid_i,
  input  logic [EXT_W-1:0]     ext_rsp_rdata_i,
  // on-chip memories
  output logic                 wmem_we_o,
  output logic [WMEM_AW-1:0]   wmem_addr_o,
  output logic                 wmem_re_o,
  input  logic [WMEM_W-1:0]    wmem_rdata_i,
  output logic                 imem_we_o,
  output logic [IMEM_AW-1:0]   imem_addr_o,
  output logic                 imem_re_o,
  input  logic [IMEM_W-1:0]    imem_rdata_i,
  output logic                 tmem_we_o,
  output logic [TMEM_AW-1:0]   tmem_addr_o,
  output logic                 tmem_re_o,
  input  logic [TMEM_W-1:0]    tmem_rdata_i,
  output logic [MAX_W-1:0]     wdata_o
);

  typedef enum logic [2:0] {S_IDLE, S_REQ, S_RSP, S_WRITE, S_MRD, S_MWAIT, S_OUT} state_e;

  localparam int unsigned BEAT_W = $clog2(MAX_B + 1);

  state_e                       state_q;
  mem_e                         mem_q;
  logic [AF_W-1:0]              word_q, nwords_q;
  logic [BEAT_W-1:0]            beat_q, nbeats;
  logic [MAX_B-1:0][EXT_W-1:0]  buf_q;
  logic [31:0]                  ext_q;
  logic [AF_W-1:0]              onchip_q;

  always_comb begin
    unique case (mem_q)
      MEM_WEIGHT: nbeats = BEAT_W'((WMEM_W + EXT_W - 1) / EXT_W);
      MEM_INPUT:  nbeats = BEAT_W'((IMEM_W + EXT_W - 1) / EXT_W);
      default:    nbeats = BEAT_W'((TMEM_W + EXT_W - 1) / EXT_W);
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE; mem_q <= MEM_WEIGHT; word_q <= '0;
      nwords_q <= '0; beat_q <= '0; buf_q <= '0; ext_q <= '0; onchip_q <= '0;
      done_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      unique case (state_q)
        S_IDLE: if (go_i) begin
          mem_q    <= instr_i.mem;
          nwords_q <= instr_i.c;
          onchip_q <= instr_i.a;
          ext_q    <= 32'(instr_i.ext);
          word_q   <= '0;
          beat_q   <= '0;
          if (instr_i.c == '0) done_o <= 1'b1;
          else state_q <= (instr_i.op == OP_STORE) ? S_MRD : S_REQ;
        end
        // ---- LOAD: one read request per beat
        S_REQ:  if (ext_req_ready_i) state_q <= S_RSP;
        S_RSP:  if (ext_rsp_valid_i) begin
          buf_q[beat_q] <= ext_rsp_rdata_i;
          ext_q         <= ext_q + 1;
          if (beat_q == nbeats - 1'b1) begin beat_q <= '0; state_q <= S_WRITE; end
          else begin beat_q <= beat_q + 1'b1; state_q <= S_REQ; end
        end
        S_WRITE: begin
          word_q <= word_q + 1'b1;
          if (word_q + 1'b1 == nwords_q) begin state_q <= S_IDLE; done_o <= 1'b1; end
          else state_q <= S_REQ;
        end
        // ---- STORE: read the word, then one write request per beat
        S_MRD:   state_q <= S_MWAIT;
        S_MWAIT: begin
          buf_q   <= '0;
          unique case (mem_q)
            MEM_WEIGHT: buf_q <= (EXT_W*MAX_B)'(wmem_rdata_i);
            MEM_INPUT:  buf_q <= (EXT_W*MAX_B)'(imem_rdata_i);
            default:    buf_q <= (EXT_W*MAX_B)'(tmem_rdata_i);
          endcase
          state_q <= S_OUT;
        end
        S_OUT: if (ext_req_ready_i) begin
          ext_q <= ext_q + 1;
          if (beat_q == nbeats - 1'b1) begin
            beat_q <= '0;
            word_q <= word_q + 1'b1;
            if (word_q + 1'b1 == nwords_q) begin state_q <= S_IDLE; done_o <= 1'b1; end
            else state_q <= S_MRD;
          end else beat_q <= beat_q + 1'b1;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign ext_req_valid_o = (state_q == S_REQ) || (state_q == S_OUT);
  assign ext_req_we_o    = (state_q == S_OUT);
  assign ext_req_addr_o  = ext_q;
  assign ext_req_wdata_o = buf_q[beat_q];

  logic [AF_W-1:0] addr;
  assign addr        = onchip_q + word_q;
  assign wmem_addr_o = WMEM_AW'(addr);
  assign imem_addr_o = IMEM_AW'(addr);
  assign tmem_addr_o = TMEM_AW'(addr);
  assign wmem_we_o   = (state_q == S_WRITE) && (mem_q == MEM_WEIGHT);
  assign imem_we_o   = (state_q == S_WRITE) && (mem_q == MEM_INPUT);
  assign tmem_we_o   = (state_q == S_WRITE) && (mem_q == MEM_INTER);
  assign wmem_re_o   = (state_q == S_MRD) && (mem_q == MEM_WEIGHT);
  assign imem_re_o   = (state_q == S_MRD) && (mem_q == MEM_INPUT);
  assign tmem_re_o   = (state_q == S_MRD) && (mem_q == MEM_INTER);
  assign wdata_o     = MAX_W'(buf_q);
  assign busy_o      = (state_q != S_IDLE);

  // A request, once raised, is held until it is accepted.
  a_req_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
      ext_req_valid_o && !ext_req_ready_i |=> ext_req_valid_o && $stable(ext_req_addr_o));

endmodule

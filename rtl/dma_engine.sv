// dma_engine: one DMA channel (DMA0 or DMA1) of the accelerator data engine.
//
// Executes one 2-D transfer at a time: `rows` rows of `row_words` 32-byte
// words, row starts `stride` bytes apart in virtual memory, buffer words
// consecutive from `buf_base`.
//   DMA_LOAD  reads memory and writes the selected on-chip buffer,
//   DMA_STORE writes buffer contents (or zeros when `zero` is set, used for
//             MA_INIT) to memory,
//   DMA_STASH sends prefetch requests that bring the lines into the L3 cache
//             (MA_STASH); the CCM acknowledges each one.
// Each word's virtual address is translated through the engine's mATLB
// stream before the request is issued; a translation fault stops the
// transfer, waits for the requests in flight and ends with fault_o. Up to
// MAX_OUT requests may be outstanding; responses may return in any order and
// carry the buffer word address in their tag.
//
// The source design names the two DMA engines and their jobs (buffer fills,
// copies, zero initialisation, stash); the request/response protocol, the
// outstanding limit and the two-cycle-per-word buffer read for stores are
// this design's choices.
//
// Timing: cmd accepted when cmd_valid && cmd_ready (pf_start pulses in the
// same cycle); done_o pulses for one cycle after the last response.
// The command register keeps the whole command, but its vaddr and buf_base
// fields are only read when the command is accepted, so a lint tool reports
// those register bits as unused; this is intended.
module dma_engine
  import maco_pkg::*;
#(
  parameter int unsigned MAX_OUT = 16,
  parameter int unsigned BUF_AW  = 11
) (
  input  logic              clk,
  input  logic              rst_n,
  // command
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  dma_cmd_t          cmd,
  output logic              done_o,
  output logic              fault_o,
  // prediction start for the mATLB stream
  output logic              pf_start,
  // translation lookup
  output logic              lk_valid,
  output logic [VA_W-1:0]   lk_va,
  input  logic              lk_hit,
  input  logic [PA_W-1:0]   lk_pa,
  input  logic              lk_fault,
  // memory
  output logic              mreq_valid,
  input  logic              mreq_ready,
  output mem_req_t          mreq,
  input  logic              mrsp_valid,
  input  mem_rsp_t          mrsp,
  // buffers
  output logic              buf_we,
  output buf_sel_e          buf_sel,
  output logic [BUF_AW-1:0] buf_waddr,
  output logic [WORD_W-1:0] buf_wdata,
  output logic              buf_re,
  output logic [BUF_AW-1:0] buf_raddr,
  input  logic [WORD_W-1:0] buf_rdata
);
  typedef enum logic [2:0] {S_IDLE, S_RD, S_WAITRD, S_ISSUE, S_DRAIN} state_e;
  state_e            st;
  dma_cmd_t          c;
  logic [15:0]       row, word;
  logic [VA_W-1:0]   row_va;
  logic [BUF_AW-1:0] baddr;
  logic [$clog2(MAX_OUT+1)-1:0] outst;
  logic              fault_q;
  logic [WORD_W-1:0] data_q;
  logic              last_word, issue_fire;

  assign cmd_ready = (st == S_IDLE);
  assign pf_start  = cmd_valid && cmd_ready;
  assign lk_va     = row_va + (VA_W'(word) << 5);
  assign lk_valid  = (st == S_ISSUE) && (outst < $bits(outst)'(MAX_OUT));
  assign last_word = (word + 1'b1 == c.row_words) && (row + 1'b1 == c.rows);

  always_comb begin
    mreq_valid = lk_valid && lk_hit && !lk_fault;
    mreq.addr  = lk_pa;
    mreq.tag   = TAG_W'(baddr);
    mreq.data  = (c.op == DMA_STORE && !c.zero) ? data_q : '0;
    unique case (c.op)
      DMA_STORE: mreq.kind = MEM_WRITE;
      DMA_STASH: mreq.kind = MEM_STASH;
      default:   mreq.kind = MEM_READ;
    endcase
  end
  assign issue_fire = mreq_valid && mreq_ready;

  // buffer side
  assign buf_sel   = c.buf_sel;
  assign buf_we    = mrsp_valid && (c.op == DMA_LOAD);
  assign buf_waddr = mrsp.tag[BUF_AW-1:0];
  assign buf_wdata = mrsp.data;
  assign buf_re    = (st == S_RD);
  assign buf_raddr = baddr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; c <= '0; row <= '0; word <= '0; row_va <= '0; baddr <= '0;
      outst <= '0; fault_q <= 1'b0; data_q <= '0; done_o <= 1'b0; fault_o <= 1'b0;
    end else begin
      done_o  <= 1'b0;
      outst   <= outst + $bits(outst)'(issue_fire) - $bits(outst)'(mrsp_valid);
      unique case (st)
        S_IDLE: if (cmd_valid) begin
          c <= cmd; row <= '0; word <= '0; row_va <= cmd.vaddr;
          baddr <= BUF_AW'(cmd.buf_base); fault_q <= 1'b0;
          if (cmd.rows == '0 || cmd.row_words == '0) st <= S_DRAIN;
          else if (cmd.op == DMA_STORE && !cmd.zero) st <= S_RD;
          else st <= S_ISSUE;
        end
        S_RD:     st <= S_WAITRD;
        S_WAITRD: begin data_q <= buf_rdata; st <= S_ISSUE; end
        S_ISSUE: begin
          if (lk_valid && lk_hit && lk_fault) begin
            fault_q <= 1'b1;
            st      <= S_DRAIN;
          end else if (issue_fire) begin
            baddr <= baddr + 1'b1;
            if (last_word) st <= S_DRAIN;
            else begin
              if (word + 1'b1 == c.row_words) begin
                word   <= '0;
                row    <= row + 1'b1;
                row_va <= row_va + VA_W'(c.stride);
              end else begin
                word <= word + 1'b1;
              end
              if (c.op == DMA_STORE && !c.zero) st <= S_RD;
            end
          end
        end
        S_DRAIN: if (outst == '0 && !mrsp_valid) begin
          st      <= S_IDLE;
          done_o  <= 1'b1;
          fault_o <= fault_q;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_no_rsp_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    mrsp_valid |-> outst != '0);
endmodule

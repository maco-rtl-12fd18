// mtq: Master Task Queue, the CPU-side record of matrix-engine tasks.
//
// Executes the MPAIS instructions issued by the CPU core:
//  * MA_CFG / MA_MOVE / MA_INIT / MA_STASH allocate a free entry (Valid=1,
//    Done=0, ASID=issuing process), forward the opcode and the six parameter
//    registers with the entry number (MAID) to the engine's Slave Task Queue,
//    and return the MAID in Rd. With no free entry Rd[63] is set and nothing
//    is sent.
//  * MA_READ returns the entry state; MA_STATE returns it and, if the entry
//    belongs to the querying process and its task is done, releases it
//    (Valid=0, Done=0, ASID cleared). A query from a process whose ASID no
//    longer matches returns the state with the match bit clear, so the
//    process can tell that its entry was released and reused.
//  * MA_CLEAR clears the entry (Valid, Done, exception fields, ASID) when the
//    ASID matches, the recovery step after an exception.
//  * A completion from the STQ sets Done and the exception fields.
// The entry fields and the transitions follow the source design's entry
// table and state diagram. The number of entries, the Rd bit layout, the
// requirement that release and clear need a matching ASID, and releasing
// only finished tasks are this design's choices.
//
// Rd for READ/STATE/CLEAR: [0] valid, [1] done, [2] exception_en,
// [7:4] exception_type, [8] ASID matches, [31:16] ASID of the entry
// (state before the instruction).
//
// Timing: an instruction is accepted when req_valid && req_ready; Rd is
// returned with rd_valid on the next cycle. req_ready is low while a task is
// waiting for the STQ.
module mtq
  import maco_pkg::*;
#(
  parameter int unsigned ENTRIES = 8
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       req_valid,
  output logic       req_ready,
  input  mpais_req_t req,
  output logic       rd_valid,
  output gpr_t       rd,
  output logic       cfg_valid,
  input  logic       cfg_ready,
  output task_t      cfg,
  input  logic       rsp_valid,
  input  task_rsp_t  rsp,
  output mtq_entry_t [ENTRIES-1:0] entries_o
);
  localparam int unsigned IW = $clog2(ENTRIES);
  mtq_entry_t [ENTRIES-1:0] ent;
  logic              free_found;
  logic [IW-1:0]     free_idx;
  logic [IW-1:0]     q_idx;
  logic              is_alloc;

  assign entries_o = ent;
  assign req_ready = !cfg_valid;
  assign q_idx     = req.regs[0][IW-1:0];
  assign is_alloc  = req.op inside {OP_CFG, OP_MOVE, OP_INIT, OP_STASH};

  always_comb begin
    free_found = 1'b0;
    free_idx   = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (!ent[i].valid) begin
        free_found = 1'b1;
        free_idx   = IW'(i);
      end
    end
  end

  // entry addressed by a query instruction
  mtq_entry_t q_e;
  logic       q_match;
  assign q_e     = ent[q_idx];
  assign q_match = q_e.valid && (q_e.asid == req.asid);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ent       <= '0;
      rd_valid  <= 1'b0;
      rd        <= '0;
      cfg_valid <= 1'b0;
      cfg       <= '0;
    end else begin
      rd_valid <= 1'b0;
      if (cfg_valid && cfg_ready) cfg_valid <= 1'b0;
      if (rsp_valid && ent[rsp.maid[IW-1:0]].valid) begin
        ent[rsp.maid[IW-1:0]].done     <= 1'b1;
        ent[rsp.maid[IW-1:0]].exc_en   <= rsp.exc_en;
        ent[rsp.maid[IW-1:0]].exc_type <= rsp.exc_type;
      end
      if (req_valid && req_ready) begin
        rd_valid <= 1'b1;
        if (is_alloc) begin
          if (free_found) begin
            ent[free_idx] <= '{valid: 1'b1, done: 1'b0, asid: req.asid,
                               exc_en: 1'b0, exc_type: EXC_NONE};
            cfg_valid <= 1'b1;
            cfg       <= '{op: req.op, maid: MAID_W'(free_idx), regs: req.regs};
            rd        <= gpr_t'(free_idx);
          end else begin
            rd <= {1'b1, 63'd0};
          end
        end else begin
          rd    <= {32'd0, q_e.asid, 7'd0, q_match, q_e.exc_type, 1'b0, q_e.exc_en, q_e.done, q_e.valid};
          if ((req.op == OP_STATE && q_match && q_e.done) || (req.op == OP_CLEAR && q_match))
            ent[q_idx] <= '0;
        end
      end
    end
  end

  // an allocation must never overwrite a valid entry
  a_alloc_free: assert property (@(posedge clk) disable iff (!rst_n)
    (req_valid && req_ready && is_alloc && free_found) |-> !ent[free_idx].valid);
endmodule

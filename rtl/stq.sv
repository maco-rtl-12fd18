// stq: Slave Task Queue, the engine-side record of tasks.
//
// Each entry, addressed by the MAID chosen by the CPU-side Master Task
// Queue, receives and holds the opcode and six parameter registers of one
// task. Tasks are started one at a time on the accelerator controller, in
// the order they arrived: as soon as the active entry completes, the next
// buffered entry is started. When the controller reports completion (with or
// without an exception) the STQ frees the entry and sends the MAID and the
// exception fields back to the MTQ entry.
//
// The buffering per MAID, automatic start of buffered tasks and the status
// report follow the source design; the arrival-order FIFO, the number of
// entries and the one-cycle handshakes are this design's choices.
//
// Interfaces: cfg (valid/ready) from the MTQ, tsk (valid/ready) to the
// controller, done pulse from the controller, rsp (valid, one cycle) to the
// MTQ. state_o gives each entry's state (0 free, 1 waiting, 2 running).
module stq
  import maco_pkg::*;
#(
  parameter int unsigned ENTRIES = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cfg_valid,
  output logic             cfg_ready,
  input  task_t            cfg,
  output logic             tsk_valid,
  input  logic             tsk_ready,
  output task_t            tsk,
  input  logic             done_i,
  input  logic             exc_en_i,
  input  logic [EXC_W-1:0] exc_type_i,
  output logic             rsp_valid,
  output task_rsp_t        rsp,
  output logic [ENTRIES-1:0][1:0] state_o
);
  localparam int unsigned IW = $clog2(ENTRIES);
  typedef enum logic [1:0] {E_FREE = 2'd0, E_WAIT = 2'd1, E_RUN = 2'd2} est_e;

  task_t [ENTRIES-1:0]      params;
  est_e  [ENTRIES-1:0]      st;
  logic  [ENTRIES-1:0][IW-1:0] order;
  logic  [IW:0]             head, tail;
  logic                     active;
  logic  [IW-1:0]           act_idx;
  logic  [IW-1:0]           nxt;

  assign cfg_ready = 1'b1;                     // one entry per MAID is always free
  assign nxt       = order[head[IW-1:0]];
  assign tsk_valid = !active && (head != tail);
  assign tsk       = params[nxt];
  for (genvar i = 0; i < ENTRIES; i++) begin : g_st
    assign state_o[i] = st[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      params    <= '0;
      st        <= {ENTRIES{E_FREE}};
      order     <= '0;
      head      <= '0;
      tail      <= '0;
      active    <= 1'b0;
      act_idx   <= '0;
      rsp_valid <= 1'b0;
      rsp       <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (cfg_valid) begin
        params[cfg.maid[IW-1:0]] <= cfg;
        st[cfg.maid[IW-1:0]]     <= E_WAIT;
        order[tail[IW-1:0]]      <= cfg.maid[IW-1:0];
        tail                     <= tail + 1'b1;
      end
      if (tsk_valid && tsk_ready) begin
        active        <= 1'b1;
        act_idx       <= nxt;
        st[nxt]       <= E_RUN;
        head          <= head + 1'b1;
      end
      if (active && done_i) begin
        active        <= 1'b0;
        st[act_idx]   <= E_FREE;
        rsp_valid     <= 1'b1;
        rsp           <= '{maid: MAID_W'(act_idx), exc_en: exc_en_i, exc_type: exc_type_i};
      end
    end
  end

  // the MTQ never sends a MAID that is still in use
  a_maid_free: assert property (@(posedge clk) disable iff (!rst_n)
    cfg_valid |-> st[cfg.maid[IW-1:0]] == E_FREE);
endmodule

// matlb: predictive address translation buffer of the accelerator data engine.
//
// A DMA transfer is a set of rows (base address, row length, row stride).
// Knowing that shape and the page size in advance, the mATLB predicts every
// page the transfer will touch: the page of each row's first byte and of
// every page boundary crossed inside a row (the first element in each page),
// skipping a page already requested for the previous row. It sends these
// virtual page numbers to the CPU's MMU for a page-table walk ahead of the
// DMA, and stores the returned translations in order in a small per-stream
// FIFO. The DMA engine looks up the head entry: if it matches the current
// virtual page it supplies the physical address; if not, the head is removed
// and the next entry is tried. When nothing is buffered and the prediction is
// finished, a miss is walked on demand. This follows the source design's
// description of the mATLB; the FIFO depth, the demand walk and the
// round-robin sharing of the walk port between the DMA streams are this
// design's choices.
//
// Interfaces (per stream s): pf_start[s] pulse with pf_cmd[s] starts a
// prediction; lk_valid/lk_va ask for a translation, answered in the same
// cycle by lk_hit/lk_pa/lk_fault. One shared walk port: ptw_req_* (valid/
// ready, id = stream) and ptw_rsp_* (valid; the MMU answers each stream's
// requests in order and echoes the page number). ev_* are one-cycle event
// pulses (prediction issued, hit, entry dropped, demand walk).
module matlb
  import maco_pkg::*;
#(
  parameter int unsigned NSTREAM = 2,
  parameter int unsigned DEPTH   = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [7:0]                   page_shift,
  input  logic [NSTREAM-1:0]           pf_start,
  input  dma_cmd_t [NSTREAM-1:0]       pf_cmd,
  input  logic [NSTREAM-1:0]           lk_valid,
  input  logic [NSTREAM-1:0][VA_W-1:0] lk_va,
  output logic [NSTREAM-1:0]           lk_hit,
  output logic [NSTREAM-1:0][PA_W-1:0] lk_pa,
  output logic [NSTREAM-1:0]           lk_fault,
  output logic                         ptw_req_valid,
  input  logic                         ptw_req_ready,
  output logic [VA_W-1:0]              ptw_req_vpn,
  output logic [$clog2(NSTREAM)-1:0]   ptw_req_id,
  input  logic                         ptw_rsp_valid,
  input  logic [$clog2(NSTREAM)-1:0]   ptw_rsp_id,
  input  logic [VA_W-1:0]              ptw_rsp_vpn,
  input  logic [PA_W-1:0]              ptw_rsp_ppn,
  input  logic                         ptw_rsp_fault,
  output logic [NSTREAM-1:0]           ev_predict,
  output logic [NSTREAM-1:0]           ev_hit,
  output logic [NSTREAM-1:0]           ev_drop,
  output logic [NSTREAM-1:0]           ev_demand
);
  localparam int unsigned SW = (NSTREAM > 1) ? $clog2(NSTREAM) : 1;
  localparam int unsigned DW = $clog2(DEPTH);

  typedef struct packed {
    logic [VA_W-1:0] vpn;
    logic [PA_W-1:0] ppn;
    logic            fault;
  } atlb_entry_t;

  // per-stream state
  atlb_entry_t [NSTREAM-1:0][DEPTH-1:0] fifo;
  logic [NSTREAM-1:0][DW:0]   rd_p, wr_p;
  logic [NSTREAM-1:0][DW:0]   outst;
  logic [NSTREAM-1:0]         gen_busy;
  logic [NSTREAM-1:0][15:0]   gen_row, gen_rows;
  logic [NSTREAM-1:0][VA_W-1:0] row_base, row_bytes, cur_vpn, last_vpn;
  logic [NSTREAM-1:0][31:0]   stride;
  logic [NSTREAM-1:0]         last_ok;

  // combinational per stream
  logic [NSTREAM-1:0]           want, is_dup, demand, grant, pop;
  logic [NSTREAM-1:0][VA_W-1:0] want_vpn, end_vpn, lk_vpn;
  logic [NSTREAM-1:0][DW:0]     count;
  atlb_entry_t [NSTREAM-1:0]    head;
  logic [SW-1:0]                rr;

  logic [NSTREAM-1:0] adv;          // generator moves to its next page

  always_comb begin
    for (int s = 0; s < NSTREAM; s++) begin
      count[s]   = wr_p[s] - rd_p[s];
      head[s]    = fifo[s][rd_p[s][DW-1:0]];
      lk_vpn[s]  = lk_va[s] >> page_shift;
      end_vpn[s] = (row_base[s] + row_bytes[s] - VA_W'(1)) >> page_shift;
      is_dup[s]  = gen_busy[s] && last_ok[s] && (cur_vpn[s] == last_vpn[s]);
      demand[s]  = lk_valid[s] && !gen_busy[s] && (count[s] == '0) && (outst[s] == '0);
      want[s]    = ((gen_busy[s] && !is_dup[s]) || demand[s]) &&
                   ((count[s] + outst[s]) < (DW+1)'(DEPTH));
      want_vpn[s] = demand[s] ? lk_vpn[s] : cur_vpn[s];
      lk_hit[s]   = lk_valid[s] && (count[s] != '0) && (head[s].vpn == lk_vpn[s]);
      lk_fault[s] = lk_hit[s] && head[s].fault;
      lk_pa[s]    = (head[s].ppn << page_shift) |
                    PA_W'(lk_va[s] & ((VA_W'(1) << page_shift) - VA_W'(1)));
      pop[s]      = lk_valid[s] && (count[s] != '0) && (head[s].vpn != lk_vpn[s]);
    end
    // round-robin walk port
    grant = '0;
    ptw_req_valid = 1'b0;
    ptw_req_vpn   = '0;
    ptw_req_id    = '0;
    for (int k = 0; k < NSTREAM; k++) begin
      if (!ptw_req_valid && want[(int'(rr) + k) % NSTREAM]) begin
        ptw_req_valid = 1'b1;
        ptw_req_vpn   = want_vpn[(int'(rr) + k) % NSTREAM];
        ptw_req_id    = ($clog2(NSTREAM))'((int'(rr) + k) % NSTREAM);
        grant[(int'(rr) + k) % NSTREAM] = ptw_req_ready;
      end
    end
    ev_predict = grant & ~demand;
    ev_demand  = grant & demand;
    ev_hit     = lk_hit;
    ev_drop    = pop;
    for (int s = 0; s < NSTREAM; s++)
      adv[s] = gen_busy[s] && !demand[s] && (is_dup[s] || grant[s]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fifo <= '0; rd_p <= '0; wr_p <= '0; outst <= '0; gen_busy <= '0;
      gen_row <= '0; gen_rows <= '0; row_base <= '0; row_bytes <= '0;
      cur_vpn <= '0; last_vpn <= '0; stride <= '0; last_ok <= '0; rr <= '0;
    end else begin
      if (ptw_req_valid && ptw_req_ready) rr <= SW'((int'(ptw_req_id) + 1) % NSTREAM);
      for (int s = 0; s < NSTREAM; s++) begin
        if (pop[s]) rd_p[s] <= rd_p[s] + 1'b1;
        if (ptw_rsp_valid && int'(ptw_rsp_id) == s) begin
          fifo[s][wr_p[s][DW-1:0]] <= '{vpn: ptw_rsp_vpn, ppn: ptw_rsp_ppn, fault: ptw_rsp_fault};
          wr_p[s] <= wr_p[s] + 1'b1;
        end
        outst[s] <= outst[s] + (DW+1)'(grant[s]) - (DW+1)'(ptw_rsp_valid && int'(ptw_rsp_id) == s);
        if (grant[s] && !demand[s]) begin
          last_vpn[s] <= cur_vpn[s];
          last_ok[s]  <= 1'b1;
        end
        if (adv[s]) begin
          if (cur_vpn[s] == end_vpn[s]) begin
            if (gen_row[s] + 1'b1 == gen_rows[s]) gen_busy[s] <= 1'b0;
            gen_row[s]  <= gen_row[s] + 1'b1;
            row_base[s] <= row_base[s] + VA_W'(stride[s]);
            cur_vpn[s]  <= (row_base[s] + VA_W'(stride[s])) >> page_shift;
          end else begin
            cur_vpn[s]  <= cur_vpn[s] + 1'b1;
          end
        end
        if (pf_start[s]) begin
          gen_busy[s]  <= (pf_cmd[s].rows != '0) && (pf_cmd[s].row_words != '0);
          gen_row[s]   <= '0;
          gen_rows[s]  <= pf_cmd[s].rows;
          row_base[s]  <= pf_cmd[s].vaddr;
          row_bytes[s] <= VA_W'(pf_cmd[s].row_words) << 5;
          stride[s]    <= pf_cmd[s].stride;
          cur_vpn[s]   <= pf_cmd[s].vaddr >> page_shift;
          last_ok[s]   <= 1'b0;
        end
      end
    end
  end
endmodule

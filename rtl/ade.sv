// ade: Accelerator Data Engine of the matrix engine.
//
// Holds the two DMA engines (DMA0, DMA1) and the mATLB, one prediction
// stream per DMA engine. Starting a DMA command also starts the prediction
// for the same transfer shape, so page-table walks run ahead of the data
// requests. The two engines share the engine's single memory port through a
// round-robin arbiter; the top tag bit carries the engine number so that
// responses, which may arrive out of order, return to the right engine. The
// mATLB's walk port goes to the CPU's MMU.
//
// Following the source design: two DMA engines and an mATLB inside the ADE,
// transferring between the L3 cache (over the NOC) and the buffers, walks
// performed by the CPU's MMU. The arbiter and tag scheme are this design's.
module ade
  import maco_pkg::*;
#(
  parameter int unsigned BUF_AW = 11
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [7:0]             page_shift,
  // commands, one per engine
  input  logic [1:0]             cmd_valid,
  output logic [1:0]             cmd_ready,
  input  dma_cmd_t [1:0]         cmd,
  output logic [1:0]             done_o,
  output logic [1:0]             fault_o,
  // memory port
  output logic                   mreq_valid,
  input  logic                   mreq_ready,
  output mem_req_t               mreq,
  input  logic                   mrsp_valid,
  input  mem_rsp_t               mrsp,
  // MMU walk port
  output logic                   ptw_req_valid,
  input  logic                   ptw_req_ready,
  output logic [VA_W-1:0]        ptw_req_vpn,
  output logic                   ptw_req_id,
  input  logic                   ptw_rsp_valid,
  input  logic                   ptw_rsp_id,
  input  logic [VA_W-1:0]        ptw_rsp_vpn,
  input  logic [PA_W-1:0]        ptw_rsp_ppn,
  input  logic                   ptw_rsp_fault,
  // buffer ports, one per engine
  output logic [1:0]             buf_we,
  output buf_sel_e [1:0]         buf_sel,
  output logic [1:0][BUF_AW-1:0] buf_waddr,
  output logic [1:0][WORD_W-1:0] buf_wdata,
  output logic [1:0]             buf_re,
  output logic [1:0][BUF_AW-1:0] buf_raddr,
  input  logic [1:0][WORD_W-1:0] buf_rdata,
  // events for monitoring
  output logic [1:0]             ev_predict,
  output logic [1:0]             ev_hit,
  output logic [1:0]             ev_drop,
  output logic [1:0]             ev_demand
);
  logic [1:0]             pf_start, lk_valid, lk_hit, lk_fault;
  logic [1:0][VA_W-1:0]   lk_va;
  logic [1:0][PA_W-1:0]   lk_pa;
  logic [1:0]             rq_valid, rq_ready, rs_valid;
  mem_req_t [1:0]         rq;
  mem_rsp_t [1:0]         rs;
  logic                   rr, sel;

  for (genvar i = 0; i < 2; i++) begin : g_dma
    dma_engine #(.BUF_AW(BUF_AW)) u_dma (
      .clk, .rst_n,
      .cmd_valid(cmd_valid[i]), .cmd_ready(cmd_ready[i]), .cmd(cmd[i]),
      .done_o(done_o[i]), .fault_o(fault_o[i]), .pf_start(pf_start[i]),
      .lk_valid(lk_valid[i]), .lk_va(lk_va[i]), .lk_hit(lk_hit[i]), .lk_pa(lk_pa[i]),
      .lk_fault(lk_fault[i]),
      .mreq_valid(rq_valid[i]), .mreq_ready(rq_ready[i]), .mreq(rq[i]),
      .mrsp_valid(rs_valid[i]), .mrsp(rs[i]),
      .buf_we(buf_we[i]), .buf_sel(buf_sel[i]), .buf_waddr(buf_waddr[i]),
      .buf_wdata(buf_wdata[i]), .buf_re(buf_re[i]), .buf_raddr(buf_raddr[i]),
      .buf_rdata(buf_rdata[i])
    );
    assign rs_valid[i] = mrsp_valid && (mrsp.tag[TAG_W-1] == 1'(i));
    assign rs[i]       = '{data: mrsp.data, tag: {1'b0, mrsp.tag[TAG_W-2:0]}};
  end

  matlb #(.NSTREAM(2), .DEPTH(8)) u_matlb (
    .clk, .rst_n, .page_shift,
    .pf_start, .pf_cmd(cmd),
    .lk_valid, .lk_va, .lk_hit, .lk_pa, .lk_fault,
    .ptw_req_valid, .ptw_req_ready, .ptw_req_vpn, .ptw_req_id,
    .ptw_rsp_valid, .ptw_rsp_id, .ptw_rsp_vpn, .ptw_rsp_ppn, .ptw_rsp_fault,
    .ev_predict, .ev_hit, .ev_drop, .ev_demand
  );

  // round-robin memory arbiter
  always_comb begin
    sel = rr;
    if (!rq_valid[rr]) sel = !rr;
    mreq_valid = rq_valid[sel];
    mreq       = rq[sel];
    mreq.tag   = {sel, rq[sel].tag[TAG_W-2:0]};
    rq_ready   = '0;
    rq_ready[sel] = mreq_ready;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= 1'b0;
    else if (mreq_valid && mreq_ready) rr <= !sel;
  end
endmodule

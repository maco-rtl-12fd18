// compute_node: the matrix-engine side of one MACO compute node.
//
// Holds the CPU-side Master Task Queue, the MMAE and the node's mesh router,
// plus the network interface that joins them:
//  * MPAIS instructions from the CPU core enter the MTQ (req/rd ports); the
//    MTQ sends tasks to the MMAE and receives its completions.
//  * Memory requests of the MMAE become VC0 flits to the home CCM slice of
//    the address. Homes are interleaved on 32-byte words: home node =
//    addr[HOME_LSB +: NODE_W] mod NODES.
//  * Flits arriving on the local port on VC1 are responses for this MMAE
//    (always accepted, as the engine has no back-pressure on responses);
//    flits on VC0 are requests for this node's CCM slice (ccm_req port).
//  * Responses from the CCM slice (ccm_rsp port, VC1 flits whose dst is the
//    requester) enter the local port with priority over the MMAE's requests.
//  * The MMAE's page walks go to the CPU's MMU through the ptw port.
// Mesh links are ports 1..4 of the router (N, E, S, W) with per-VC ready.
//
// Follows the source design: each node couples a CPU with an MMAE through
// the MPAIS task queues, the engine reaches memory only through the NOC and
// the L3/CCM, and uses the CPU's MMU for page walks. Not built here: the CPU
// core and its caches, and the CCM/L3 slice (exposed as ports). The address
// interleave and the single-flit protocol are this design's choices.
module compute_node
  import maco_pkg::*;
#(
  parameter int unsigned NODE_ID  = 0,
  parameter int unsigned MESH_X   = 4,
  parameter int unsigned NODES    = 16,
  parameter int unsigned HOME_LSB = 5,
  parameter int unsigned ROWS     = 4,
  parameter int unsigned COLS     = 4,
  parameter int unsigned DEPTH    = 2048,
  parameter int unsigned ENTRIES  = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // MPAIS instructions from the CPU core
  input  logic                  mp_valid,
  output logic                  mp_ready,
  input  mpais_req_t            mp_req,
  output logic                  mp_rd_valid,
  output gpr_t                  mp_rd,
  // page walks through the CPU MMU
  output logic                  ptw_req_valid,
  input  logic                  ptw_req_ready,
  output logic [VA_W-1:0]       ptw_req_vpn,
  output logic                  ptw_req_id,
  input  logic                  ptw_rsp_valid,
  input  logic                  ptw_rsp_id,
  input  logic [VA_W-1:0]       ptw_rsp_vpn,
  input  logic [PA_W-1:0]       ptw_rsp_ppn,
  input  logic                  ptw_rsp_fault,
  // mesh links, index 0..3 = north, east, south, west
  input  logic  [3:0]           ln_in_valid,
  input  logic  [3:0][0:0]      ln_in_vc,
  input  flit_t [3:0]           ln_in_flit,
  output logic  [3:0][1:0]      ln_in_ready,
  output logic  [3:0]           ln_out_valid,
  output logic  [3:0][0:0]      ln_out_vc,
  output flit_t [3:0]           ln_out_flit,
  input  logic  [3:0][1:0]      ln_out_ready,
  // this node's CCM slice
  output logic                  ccm_req_valid,
  input  logic                  ccm_req_ready,
  output flit_t                 ccm_req,
  input  logic                  ccm_rsp_valid,
  output logic                  ccm_rsp_ready,
  input  flit_t                 ccm_rsp,
  // status and events
  output mtq_entry_t [ENTRIES-1:0]  mtq_o,
  output logic [ENTRIES-1:0][1:0]   stq_state_o,
  output logic                  busy_o,
  output logic                  ev_pass,
  output logic                  ev_preload,
  output logic                  ev_route,
  output logic [1:0]            ev_predict,
  output logic [1:0]            ev_hit,
  output logic [1:0]            ev_drop,
  output logic [1:0]            ev_demand
);
  logic       cfg_valid, cfg_ready, rsp_valid;
  task_t      cfg;
  task_rsp_t  rsp;
  logic       mreq_valid, mreq_ready, mrsp_valid;
  mem_req_t   mreq;
  mem_rsp_t   mrsp;

  logic  [4:0]      r_in_valid, r_out_valid;
  logic  [4:0][0:0] r_in_vc, r_out_vc;
  flit_t [4:0]      r_in_flit, r_out_flit;
  logic  [4:0][1:0] r_in_ready, r_out_ready;

  mtq #(.ENTRIES(ENTRIES)) u_mtq (
    .clk, .rst_n,
    .req_valid(mp_valid), .req_ready(mp_ready), .req(mp_req),
    .rd_valid(mp_rd_valid), .rd(mp_rd),
    .cfg_valid, .cfg_ready, .cfg,
    .rsp_valid, .rsp,
    .entries_o(mtq_o)
  );

  mmae #(.ROWS(ROWS), .COLS(COLS), .DEPTH(DEPTH), .ENTRIES(ENTRIES)) u_mmae (
    .clk, .rst_n,
    .cfg_valid, .cfg_ready, .cfg, .rsp_valid, .rsp,
    .mreq_valid, .mreq_ready, .mreq, .mrsp_valid, .mrsp,
    .ptw_req_valid, .ptw_req_ready, .ptw_req_vpn, .ptw_req_id,
    .ptw_rsp_valid, .ptw_rsp_id, .ptw_rsp_vpn, .ptw_rsp_ppn, .ptw_rsp_fault,
    .busy_o, .stq_state_o, .ev_pass, .ev_preload,
    .ev_predict, .ev_hit, .ev_drop, .ev_demand
  );

  noc_router #(.NODE_ID(NODE_ID), .MESH_X(MESH_X)) u_router (
    .clk, .rst_n,
    .in_valid(r_in_valid), .in_vc(r_in_vc), .in_flit(r_in_flit), .in_ready(r_in_ready),
    .out_valid(r_out_valid), .out_vc(r_out_vc), .out_flit(r_out_flit), .out_ready(r_out_ready),
    .ev_route
  );

  // network interface
  always_comb begin
    flit_t f;
    f.src  = NODE_W'(NODE_ID);
    f.dst  = NODE_W'(int'(mreq.addr[HOME_LSB +: NODE_W]) % int'(NODES));
    f.kind = mreq.kind;
    f.addr = mreq.addr;
    f.data = mreq.data;
    f.tag  = mreq.tag;
    // local injection: CCM responses (VC1) first, then MMAE requests (VC0)
    ccm_rsp_ready = r_in_ready[0][1];
    mreq_ready    = r_in_ready[0][0] && !(ccm_rsp_valid && r_in_ready[0][1]);
    r_in_valid[0] = (ccm_rsp_valid && r_in_ready[0][1]) || (mreq_valid && mreq_ready);
    r_in_vc[0]    = (ccm_rsp_valid && r_in_ready[0][1]) ? 1'b1 : 1'b0;
    r_in_flit[0]  = (ccm_rsp_valid && r_in_ready[0][1]) ? ccm_rsp : f;
    // local ejection
    r_out_ready[0] = {1'b1, ccm_req_ready};
    ccm_req_valid  = r_out_valid[0] && (r_out_vc[0] == 1'b0);
    ccm_req        = r_out_flit[0];
    mrsp_valid     = r_out_valid[0] && (r_out_vc[0] == 1'b1);
    mrsp.data      = r_out_flit[0].data;
    mrsp.tag       = r_out_flit[0].tag;
    // mesh links
    for (int l = 0; l < 4; l++) begin
      r_in_valid[l+1]  = ln_in_valid[l];
      r_in_vc[l+1]     = ln_in_vc[l];
      r_in_flit[l+1]   = ln_in_flit[l];
      ln_in_ready[l]   = r_in_ready[l+1];
      ln_out_valid[l]  = r_out_valid[l+1];
      ln_out_vc[l]     = r_out_vc[l+1];
      ln_out_flit[l]   = r_out_flit[l+1];
      r_out_ready[l+1] = ln_out_ready[l];
    end
  end
endmodule

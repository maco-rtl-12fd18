// maco: top level of the MACO matrix-engine fabric.
//
// MESH_X x MESH_Y compute nodes (default 4 x 4 = 16), each with its Master
// Task Queue, MMAE (task queue, controller, data engine with mATLB, 192 KB of
// buffers, 4x4 FP64/FP32x2/FP16x4 systolic array) and mesh router. This
// module builds the 2D mesh: the east link of node (x,y) meets the west link
// of node (x+1,y), the south link meets the north link of node (x,y+1), and
// links at the mesh edge are tied off (no flits in, no space out).
//
// Per node, the top exposes:
//  * mp_*  : MPAIS instruction port of the node's CPU core (the core itself
//            is outside this design),
//  * ptw_* : page-walk port to the node's CPU MMU,
//  * ccm_* : the node's slice of the distributed L3 / CCM: VC0 request flits
//            whose home is this node leave on ccm_req, and the slice returns
//            VC1 response flits (dst = requesting node) on ccm_rsp,
//  * status (MTQ entries, STQ slots, busy) and one-cycle event pulses.
// All traffic between an MMAE and memory crosses the mesh with X-Y routing.
//
// Follows the source design: 16 nodes on a 4x4 2D mesh with X-Y routing and
// virtual channels, 256-bit links, one MMAE per node driven by its CPU via
// MPAIS. Not built: CPU cores, caches, MMU, CCM/L3 directory, DDR and I/O
// controllers (they are the environment of this module).
module maco
  import maco_pkg::*;
#(
  parameter int unsigned MESH_X  = 4,
  parameter int unsigned MESH_Y  = 4,
  parameter int unsigned ROWS    = 4,
  parameter int unsigned COLS    = 4,
  parameter int unsigned DEPTH   = 2048,
  parameter int unsigned ENTRIES = 8,
  localparam int unsigned NODES  = MESH_X * MESH_Y
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic       [NODES-1:0]             mp_valid,
  output logic       [NODES-1:0]             mp_ready,
  input  mpais_req_t [NODES-1:0]             mp_req,
  output logic       [NODES-1:0]             mp_rd_valid,
  output gpr_t       [NODES-1:0]             mp_rd,
  output logic       [NODES-1:0]             ptw_req_valid,
  input  logic       [NODES-1:0]             ptw_req_ready,
  output logic       [NODES-1:0][VA_W-1:0]   ptw_req_vpn,
  output logic       [NODES-1:0]             ptw_req_id,
  input  logic       [NODES-1:0]             ptw_rsp_valid,
  input  logic       [NODES-1:0]             ptw_rsp_id,
  input  logic       [NODES-1:0][VA_W-1:0]   ptw_rsp_vpn,
  input  logic       [NODES-1:0][PA_W-1:0]   ptw_rsp_ppn,
  input  logic       [NODES-1:0]             ptw_rsp_fault,
  output logic       [NODES-1:0]             ccm_req_valid,
  input  logic       [NODES-1:0]             ccm_req_ready,
  output flit_t      [NODES-1:0]             ccm_req,
  input  logic       [NODES-1:0]             ccm_rsp_valid,
  output logic       [NODES-1:0]             ccm_rsp_ready,
  input  flit_t      [NODES-1:0]             ccm_rsp,
  output mtq_entry_t [NODES-1:0][ENTRIES-1:0] mtq_o,
  output logic       [NODES-1:0][ENTRIES-1:0][1:0] stq_state_o,
  output logic       [NODES-1:0]             busy_o,
  output logic       [NODES-1:0]             ev_pass,
  output logic       [NODES-1:0]             ev_preload,
  output logic       [NODES-1:0]             ev_route,
  output logic       [NODES-1:0][1:0]        ev_predict,
  output logic       [NODES-1:0][1:0]        ev_hit,
  output logic       [NODES-1:0][1:0]        ev_drop,
  output logic       [NODES-1:0][1:0]        ev_demand
);
  // link index: 0 north, 1 east, 2 south, 3 west
  logic  [NODES-1:0][3:0]           li_valid, lo_valid;
  logic  [NODES-1:0][3:0][0:0]      li_vc, lo_vc;
  flit_t [NODES-1:0][3:0]           li_flit, lo_flit;
  logic  [NODES-1:0][3:0][1:0]      li_ready, lo_ready;

  // neighbour of node n in direction d, or -1 at the mesh edge
  function automatic int nbr(int n, int d);
    int x, y;
    x = n % int'(MESH_X);
    y = n / int'(MESH_X);
    case (d)
      0:       return (y > 0)                 ? n - int'(MESH_X) : -1;
      1:       return (x < int'(MESH_X) - 1)  ? n + 1            : -1;
      2:       return (y < int'(MESH_Y) - 1)  ? n + int'(MESH_X) : -1;
      default: return (x > 0)                 ? n - 1            : -1;
    endcase
  endfunction

  // the flit leaving node n towards d enters the neighbour from (d+2)%4;
  // forward (valid, vc, flit) and backward (ready) wiring are kept in
  // separate blocks so no combinational loop appears between routers
  always_comb begin
    for (int n = 0; n < int'(NODES); n++)
      for (int d = 0; d < 4; d++) begin
        int m;
        m = nbr(n, d);
        li_valid[n][d] = (m < 0) ? 1'b0 : lo_valid[m][(d + 2) % 4];
        li_vc[n][d]    = (m < 0) ? '0   : lo_vc[m][(d + 2) % 4];
        li_flit[n][d]  = (m < 0) ? '0   : lo_flit[m][(d + 2) % 4];
      end
  end
  always_comb begin
    for (int n = 0; n < int'(NODES); n++)
      for (int d = 0; d < 4; d++) begin
        int m;
        m = nbr(n, d);
        lo_ready[n][d] = (m < 0) ? '0 : li_ready[m][(d + 2) % 4];
      end
  end

  for (genvar n = 0; n < NODES; n++) begin : g_node
    compute_node #(
      .NODE_ID(n), .MESH_X(MESH_X), .NODES(NODES),
      .ROWS(ROWS), .COLS(COLS), .DEPTH(DEPTH), .ENTRIES(ENTRIES)
    ) u_node (
      .clk, .rst_n,
      .mp_valid(mp_valid[n]), .mp_ready(mp_ready[n]), .mp_req(mp_req[n]),
      .mp_rd_valid(mp_rd_valid[n]), .mp_rd(mp_rd[n]),
      .ptw_req_valid(ptw_req_valid[n]), .ptw_req_ready(ptw_req_ready[n]),
      .ptw_req_vpn(ptw_req_vpn[n]), .ptw_req_id(ptw_req_id[n]),
      .ptw_rsp_valid(ptw_rsp_valid[n]), .ptw_rsp_id(ptw_rsp_id[n]),
      .ptw_rsp_vpn(ptw_rsp_vpn[n]), .ptw_rsp_ppn(ptw_rsp_ppn[n]), .ptw_rsp_fault(ptw_rsp_fault[n]),
      .ln_in_valid(li_valid[n]), .ln_in_vc(li_vc[n]), .ln_in_flit(li_flit[n]), .ln_in_ready(li_ready[n]),
      .ln_out_valid(lo_valid[n]), .ln_out_vc(lo_vc[n]), .ln_out_flit(lo_flit[n]), .ln_out_ready(lo_ready[n]),
      .ccm_req_valid(ccm_req_valid[n]), .ccm_req_ready(ccm_req_ready[n]), .ccm_req(ccm_req[n]),
      .ccm_rsp_valid(ccm_rsp_valid[n]), .ccm_rsp_ready(ccm_rsp_ready[n]), .ccm_rsp(ccm_rsp[n]),
      .mtq_o(mtq_o[n]), .stq_state_o(stq_state_o[n]), .busy_o(busy_o[n]),
      .ev_pass(ev_pass[n]), .ev_preload(ev_preload[n]), .ev_route(ev_route[n]),
      .ev_predict(ev_predict[n]), .ev_hit(ev_hit[n]), .ev_drop(ev_drop[n]), .ev_demand(ev_demand[n])
    );
  end
endmodule

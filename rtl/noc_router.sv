// noc_router: one router of the 2D-mesh network on chip.
//
// Five ports (0 local, 1 north, 2 east, 3 south, 4 west), each a physical
// link that carries one single-flit packet per cycle, shared by NVC virtual
// channels. Every input port keeps a FIFO of FIFO_D flits per virtual
// channel. The router advertises per-VC space on in_ready[p][v]; a sender may
// put a flit on a link only for a VC whose ready is high, so ready is a
// registered "not full" flag and there is no combinational path through the
// router from a downstream ready to an upstream ready.
//
// Routing is dimension-ordered X-Y: a flit first moves east/west until its
// column matches the destination, then north/south, then leaves on the local
// port. Node id = y * MESH_X + x, y grows southward. X-Y routing on a mesh has
// no cyclic channel dependence, and the virtual channel of a flit never
// changes, so requests (VC0) and responses (VC1) cannot block each other.
//
// Each output port has a round-robin arbiter over the (input port, VC)
// heads routed to it whose VC has space downstream. A flit crosses one router
// per cycle: FIFO head -> output mux -> neighbour's FIFO.
//
// The 2D mesh, X-Y routing and use of virtual channels follow the source
// design (4x4 mesh, 256-bit links). The FIFO depth, number of VCs, VC use
// (VC0 requests, VC1 responses), single-flit packets and the arbiter are
// this design's choices.
module noc_router
  import maco_pkg::*;
#(
  parameter int unsigned NODE_ID = 0,
  parameter int unsigned MESH_X  = 4,
  parameter int unsigned NVC     = 2,
  parameter int unsigned FIFO_D  = 2,
  localparam int unsigned NP     = 5,
  localparam int unsigned VW     = (NVC > 1) ? $clog2(NVC) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic  [NP-1:0]                in_valid,
  input  logic  [NP-1:0][VW-1:0]        in_vc,
  input  flit_t [NP-1:0]                in_flit,
  output logic  [NP-1:0][NVC-1:0]       in_ready,
  output logic  [NP-1:0]                out_valid,
  output logic  [NP-1:0][VW-1:0]        out_vc,
  output flit_t [NP-1:0]                out_flit,
  input  logic  [NP-1:0][NVC-1:0]       out_ready,
  output logic                          ev_route     // a flit left on a non-local port
);
  localparam int unsigned NQ = NP * NVC;          // number of input queues
  localparam int unsigned CW = $clog2(FIFO_D + 1);
  localparam int unsigned PW = (FIFO_D > 1) ? $clog2(FIFO_D) : 1;
  localparam int unsigned QW = $clog2(NQ);
  localparam int unsigned MY_X = NODE_ID % MESH_X;
  localparam int unsigned MY_Y = NODE_ID / MESH_X;

  flit_t         q_mem [NQ][FIFO_D];
  logic [PW-1:0] q_rd  [NQ];
  logic [CW-1:0] q_cnt [NQ];
  logic [NQ-1:0] q_pop, q_push;
  logic [2:0]    q_dir [NQ];
  logic [QW-1:0] rr    [NP];
  logic [NQ-1:0] q_req [NP];
  logic [QW-1:0] grant [NP];
  logic [NP-1:0] out_go;

  function automatic logic [2:0] route(logic [NODE_W-1:0] dst);
    int dx, dy;
    dx = int'(dst) % int'(MESH_X);
    dy = int'(dst) / int'(MESH_X);
    if (dx > int'(MY_X)) return 3'd2;
    if (dx < int'(MY_X)) return 3'd4;
    if (dy > int'(MY_Y)) return 3'd3;
    if (dy < int'(MY_Y)) return 3'd1;
    return 3'd0;
  endfunction

  // requests per output
  always_comb begin
    for (int q = 0; q < int'(NQ); q++) q_dir[q] = route(q_mem[q][q_rd[q]].dst);
    for (int o = 0; o < int'(NP); o++)
      for (int q = 0; q < int'(NQ); q++)
        q_req[o][q] = (q_cnt[q] != '0) && (q_dir[q] == 3'(o)) && out_ready[o][q % NVC];
  end

  // round-robin grant per output, starting after the last winner
  always_comb begin
    q_pop = '0;
    for (int o = 0; o < int'(NP); o++) begin
      out_go[o] = 1'b0;
      grant[o]  = '0;
      for (int i = int'(NQ); i >= 1; i--) begin
        logic [QW-1:0] q;
        q = QW'((int'(rr[o]) + i) % int'(NQ));
        if (q_req[o][q]) begin
          out_go[o] = 1'b1;
          grant[o]  = q;
        end
      end
      if (out_go[o]) q_pop[grant[o]] = 1'b1;
      out_valid[o] = out_go[o];
      out_vc[o]    = VW'(int'(grant[o]) % int'(NVC));
      out_flit[o]  = q_mem[grant[o]][q_rd[grant[o]]];
    end
    ev_route = |out_go[NP-1:1];
  end

  always_comb
    for (int p = 0; p < int'(NP); p++)
      for (int v = 0; v < int'(NVC); v++) begin
        in_ready[p][v]     = (q_cnt[p*NVC + v] != CW'(FIFO_D));
        q_push[p*NVC + v]  = in_valid[p] && (int'(in_vc[p]) == v);
      end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int q = 0; q < int'(NQ); q++) begin
        q_rd[q] <= '0; q_cnt[q] <= '0;
        for (int d = 0; d < int'(FIFO_D); d++) q_mem[q][d] <= '0;
      end
      for (int o = 0; o < int'(NP); o++) rr[o] <= '0;
    end else begin
      for (int q = 0; q < int'(NQ); q++) begin
        if (q_push[q])
          q_mem[q][PW'((int'(q_rd[q]) + int'(q_cnt[q])) % int'(FIFO_D))] <= in_flit[q / NVC];
        if (q_pop[q]) q_rd[q] <= PW'((int'(q_rd[q]) + 1) % int'(FIFO_D));
        q_cnt[q] <= q_cnt[q] + CW'(q_push[q]) - CW'(q_pop[q]);
      end
      for (int o = 0; o < int'(NP); o++) if (out_go[o]) rr[o] <= grant[o];
    end
  end

  // a sender must respect the per-VC ready
  for (genvar p = 0; p < NP; p++) begin : g_chk
    a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
      in_valid[p] |-> in_ready[p][in_vc[p]]);
  end
endmodule

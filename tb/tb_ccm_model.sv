// tb_ccm_model: behavioural stand-in for the CCM / L3 slices of NODES mesh
// nodes, sharing one word store (the slices own disjoint addresses, so one
// store is the same as one per slice). Each slice takes request flits from
// its node with random back-pressure, checks that the flit reached the home
// node of its address, and returns a response flit (read data, write or
// stash acknowledge) to the requesting node after a random delay, possibly
// out of order. Unwritten words read as a pattern of their address.
module tb_ccm_model
  import maco_pkg::*;
#(
  parameter int unsigned NODES   = 16,
  parameter int unsigned LAT_MAX = 10
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic  [NODES-1:0]       req_valid,
  output logic  [NODES-1:0]       req_ready,
  input  flit_t [NODES-1:0]       req,
  output logic  [NODES-1:0]       rsp_valid,
  input  logic  [NODES-1:0]       rsp_ready,
  output flit_t [NODES-1:0]       rsp
);
  logic [WORD_W-1:0] mem [logic [PA_W-6:0]];
  typedef struct { int due; flit_t f; } pend_t;
  pend_t pend[NODES][$];
  int now = 0;
  int n_read = 0, n_write = 0, n_stash = 0, n_misroute = 0, n_remote = 0;

  function automatic logic [WORD_W-1:0] pattern(logic [PA_W-6:0] w);
    logic [WORD_W-1:0] v;
    for (int i = 0; i < WORD_W/32; i++) v[32*i +: 32] = 32'(w) * 32'd2654435761 + 32'(i);
    return v;
  endfunction
  function automatic logic [WORD_W-1:0] peek(logic [PA_W-1:0] a);
    return mem.exists(a[PA_W-1:5]) ? mem[a[PA_W-1:5]] : pattern(a[PA_W-1:5]);
  endfunction
  function automatic void poke(logic [PA_W-1:0] a, logic [WORD_W-1:0] d);
    mem[a[PA_W-1:5]] = d;
  endfunction

  initial begin req_ready = '0; rsp_valid = '0; rsp = '0; end
  always @(posedge clk) begin
    now++;
    for (int n = 0; n < int'(NODES); n++) begin
      if (rst_n && rsp_valid[n] && rsp_ready[n]) void'(pend[n].pop_front());
      if (rst_n && req_valid[n] && req_ready[n]) begin
        pend_t p;
        if (int'(req[n].addr[5 +: NODE_W]) % int'(NODES) != n) n_misroute++;
        if (int'(req[n].src) != n) n_remote++;
        p.due = now + 2 + int'($urandom_range(0, LAT_MAX - 2));
        p.f = req[n];
        p.f.src = NODE_W'(n); p.f.dst = req[n].src; p.f.kind = MEM_RSP; p.f.data = '0;
        case (req[n].kind)
          MEM_READ:  begin p.f.data = peek(req[n].addr); n_read++; end
          MEM_WRITE: begin poke(req[n].addr, req[n].data); n_write++; end
          default:   n_stash++;
        endcase
        // out of order: a new response may overtake a waiting one
        if (pend[n].size() > 1 && $urandom_range(0, 1) == 1) pend[n].insert(1, p);
        else pend[n].push_back(p);
      end
    end
  end
  always @(negedge clk)
    for (int n = 0; n < int'(NODES); n++) begin
      req_ready[n] = $urandom_range(0, 3) != 0;
      rsp_valid[n] = pend[n].size() > 0 && pend[n][0].due <= now;
      if (rsp_valid[n]) rsp[n] = pend[n][0].f;
    end
endmodule

// tb_mem_model: behavioural memory for testbenches (stands in for the L3 /
// CCM side). Accepts mem_req_t requests with random back-pressure, answers
// every request (read data, write or stash acknowledge) after a random delay
// of 2..LAT_MAX cycles, possibly out of order, one response per cycle.
// Unwritten words read as a pattern of their address: see pattern().
module tb_mem_model
  import maco_pkg::*;
#(
  parameter int unsigned LAT_MAX = 12
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     rsp_valid,
  output mem_rsp_t rsp
);
  logic [WORD_W-1:0] mem [logic [PA_W-6:0]];
  typedef struct { int due; mem_rsp_t r; } pend_t;
  pend_t pend[$];
  int now = 0;
  int n_read = 0, n_write = 0, n_stash = 0;

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

  initial begin req_ready = 0; rsp_valid = 0; rsp = '0; end
  always @(posedge clk) begin
    now++;
    if (rst_n && req_valid && req_ready) begin
      pend_t p;
      p.due = now + 2 + int'($urandom_range(0, LAT_MAX - 2));
      p.r.tag = req.tag;
      p.r.data = '0;
      case (req.kind)
        MEM_READ:  begin p.r.data = peek(req.addr); n_read++; end
        MEM_WRITE: begin poke(req.addr, req.data); n_write++; end
        default:   n_stash++;
      endcase
      pend.push_back(p);
    end
  end
  always @(negedge clk) begin
    int pick;
    req_ready = $urandom_range(0, 3) != 0;
    rsp_valid = 0;
    pick = -1;
    foreach (pend[i]) if (pend[i].due <= now && (pick < 0 || $urandom_range(0, 1) == 1)) pick = i;
    if (pick >= 0) begin
      rsp_valid = 1; rsp = pend[pick].r; pend.delete(pick);
    end
  end
endmodule

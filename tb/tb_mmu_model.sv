// tb_mmu_model: behavioural page-table walker standing in for the CPU's MMU.
// Translates a virtual page number to vpn + PPN_OFFSET after WALK_LAT cycles,
// answering requests in order and echoing vpn and stream id. Pages in
// [fault_lo, fault_hi) return a fault. Counts walks in n_walk.
module tb_mmu_model
  import maco_pkg::*;
#(
  parameter int unsigned    WALK_LAT   = 20,
  parameter logic [PA_W-1:0] PPN_OFFSET = 48'h100000
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [VA_W-1:0] fault_lo,
  input  logic [VA_W-1:0] fault_hi,
  input  logic            req_valid,
  output logic            req_ready,
  input  logic [VA_W-1:0] req_vpn,
  input  logic            req_id,
  output logic            rsp_valid,
  output logic            rsp_id,
  output logic [VA_W-1:0] rsp_vpn,
  output logic [PA_W-1:0] rsp_ppn,
  output logic            rsp_fault
);
  typedef struct { int due; logic [VA_W-1:0] vpn; logic id; } w_t;
  w_t q[$];
  int now = 0, n_walk = 0;
  initial begin req_ready = 0; rsp_valid = 0; rsp_id = 0; rsp_vpn = '0; rsp_ppn = '0; rsp_fault = 0; end
  always @(posedge clk) begin
    now++;
    if (rst_n && req_valid && req_ready) begin
      w_t w; w.due = now + WALK_LAT; w.vpn = req_vpn; w.id = req_id;
      q.push_back(w); n_walk++;
    end
  end
  always @(negedge clk) begin
    req_ready = $urandom_range(0, 4) != 0;
    rsp_valid = 0;
    if (q.size() > 0 && q[0].due <= now) begin
      w_t w; w = q.pop_front();
      rsp_valid = 1; rsp_id = w.id; rsp_vpn = w.vpn;
      rsp_ppn = PA_W'(w.vpn) + PPN_OFFSET;
      rsp_fault = (w.vpn >= fault_lo) && (w.vpn < fault_hi);
    end
  end
endmodule

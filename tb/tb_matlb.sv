// tb_matlb: predictive translation on one stream (stream 1 idle).
// Starts a prediction for a strided transfer, records the page numbers sent
// to the MMU model and compares them with the list computed here (first page
// of each row plus every crossed page, no repeat of the previous request).
// Then walks the transfer's addresses in order through the lookup port and
// checks each physical address, that entries of finished pages are dropped,
// and that an address outside the predicted set is walked on demand.
module tb_matlb;
  import maco_pkg::*;
  localparam logic [PA_W-1:0] OFF = 48'h100000;
  logic clk = 0, rst_n = 0;
  logic [7:0] page_shift = 8'd12;
  logic [1:0] pf_start, lk_valid, lk_hit, lk_fault, ev_predict, ev_hit, ev_drop, ev_demand;
  dma_cmd_t [1:0] pf_cmd;
  logic [1:0][VA_W-1:0] lk_va;
  logic [1:0][PA_W-1:0] lk_pa;
  logic ptw_req_valid, ptw_req_ready, ptw_req_id, ptw_rsp_valid, ptw_rsp_id, ptw_rsp_fault;
  logic [VA_W-1:0] ptw_req_vpn, ptw_rsp_vpn;
  logic [PA_W-1:0] ptw_rsp_ppn;
  logic [VA_W-1:0] fault_lo = '1, fault_hi = '1;
  logic [VA_W-1:0] seen[$], expect_q[$];
  int checks = 0, failures = 0, n_drop = 0, n_dem = 0;

  matlb #(.NSTREAM(2), .DEPTH(8)) dut (.*);
  tb_mmu_model mmu (.clk, .rst_n, .fault_lo, .fault_hi,
    .req_valid(ptw_req_valid), .req_ready(ptw_req_ready), .req_vpn(ptw_req_vpn), .req_id(ptw_req_id),
    .rsp_valid(ptw_rsp_valid), .rsp_id(ptw_rsp_id), .rsp_vpn(ptw_rsp_vpn), .rsp_ppn(ptw_rsp_ppn),
    .rsp_fault(ptw_rsp_fault));
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) begin
    if (ev_predict[0]) seen.push_back(ptw_req_vpn);
    n_drop += int'(ev_drop[0]); n_dem += int'(ev_demand[0]);
  end
  task automatic chk(logic c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic lookup(logic [VA_W-1:0] va);
    int guard = 0;
    @(negedge clk); lk_valid[0] = 1; lk_va[0] = va;
    #1;
    while (!lk_hit[0] && guard < 1000) begin @(negedge clk); #1; guard++; end
    chk(lk_hit[0] && lk_pa[0] == ((((va >> 12) + OFF) << 12) | (va & 48'hfff)) && !lk_fault[0],
        $sformatf("lookup %h", va));
    @(negedge clk); lk_valid[0] = 0;
  endtask

  initial begin
    logic [VA_W-1:0] base, last;
    int rows, rw, stride;
    pf_start = 0; pf_cmd = '0; lk_valid = 0; lk_va = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    // tile of 12 rows x 24 words (768B), stride 3000B: rows share and cross pages
    base = 48'h0000_1234_0e00; rows = 12; rw = 24; stride = 3000;
    last = '1;
    for (int r = 0; r < rows; r++) begin
      logic [VA_W-1:0] s, e;
      s = (base + VA_W'(r*stride)) >> 12; e = (base + VA_W'(r*stride + rw*32 - 1)) >> 12;
      for (logic [VA_W-1:0] p = s; p <= e; p++) begin
        if (p != last) expect_q.push_back(p);
        last = p;
      end
    end
    @(negedge clk);
    pf_cmd[0].vaddr = base; pf_cmd[0].rows = 16'(rows); pf_cmd[0].row_words = 16'(rw);
    pf_cmd[0].stride = 32'(stride); pf_start[0] = 1;
    @(negedge clk); pf_start[0] = 0;
    // consume in access order
    for (int r = 0; r < rows; r++) for (int w = 0; w < rw; w += 4)
      lookup(base + VA_W'(r*stride + w*32));
    repeat (5) @(negedge clk);
    chk(seen.size() == expect_q.size(), $sformatf("prediction count %0d vs %0d", seen.size(), expect_q.size()));
    foreach (expect_q[i]) if (i < seen.size()) chk(seen[i] == expect_q[i], $sformatf("pred %0d", i));
    chk(n_drop > 0, "stale entries dropped");
    // address not predicted: demand walk
    lookup(48'h0000_7777_0040);
    chk(n_dem == 1, "demand walk");
    $display("predicted=%0d drops=%0d demand=%0d", seen.size(), n_drop, n_dem);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

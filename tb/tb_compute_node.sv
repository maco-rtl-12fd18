// tb_compute_node: one compute node (node 0 of a 2 x 1 mesh). The testbench
// plays the node's CPU (MPAIS instructions), its MMU, its own CCM slice on
// the local port, and the east neighbour: request flits leaving on the east
// link are served by the neighbour's CCM slice and the answers come back in
// on the east link on VC1. Runs tile GEMMs in all three modes and an MA_MOVE
// through the MPAIS port and checks results, Rd values, that every request
// reached its home slice, that both slices were used, and that nothing
// leaves on the links at the mesh edge.
module tb_compute_node;
  import maco_pkg::*;
  import tb_util_pkg::*;
  localparam logic [PA_W-1:0] OFF = 48'h100000;
  logic clk = 0, rst_n = 0;
  logic mp_valid, mp_ready, mp_rd_valid; mpais_req_t mp_req; gpr_t mp_rd;
  logic ptw_req_valid, ptw_req_ready, ptw_req_id, ptw_rsp_valid, ptw_rsp_id, ptw_rsp_fault;
  logic [VA_W-1:0] ptw_req_vpn, ptw_rsp_vpn; logic [PA_W-1:0] ptw_rsp_ppn;
  logic [3:0] ln_in_valid, ln_out_valid; logic [3:0][0:0] ln_in_vc, ln_out_vc;
  flit_t [3:0] ln_in_flit, ln_out_flit; logic [3:0][1:0] ln_in_ready, ln_out_ready;
  logic ccm_req_valid, ccm_req_ready, ccm_rsp_valid, ccm_rsp_ready; flit_t ccm_req, ccm_rsp;
  mtq_entry_t [7:0] mtq_o; logic [7:0][1:0] stq_state_o;
  logic busy_o, ev_pass, ev_preload, ev_route;
  logic [1:0] ev_predict, ev_hit, ev_drop, ev_demand;
  logic [1:0] s_req_valid, s_req_ready, s_rsp_valid, s_rsp_ready; flit_t [1:0] s_req, s_rsp;
  int checks = 0, failures = 0, edge_out = 0, routed = 0;

  compute_node #(.NODE_ID(0), .MESH_X(2), .NODES(2)) dut (.*);
  tb_ccm_model #(.NODES(2)) ccm (.clk, .rst_n, .req_valid(s_req_valid), .req_ready(s_req_ready), .req(s_req),
                                 .rsp_valid(s_rsp_valid), .rsp_ready(s_rsp_ready), .rsp(s_rsp));
  tb_mmu_model mmu (.clk, .rst_n, .fault_lo('1), .fault_hi('1),
    .req_valid(ptw_req_valid), .req_ready(ptw_req_ready), .req_vpn(ptw_req_vpn), .req_id(ptw_req_id),
    .rsp_valid(ptw_rsp_valid), .rsp_id(ptw_rsp_id), .rsp_vpn(ptw_rsp_vpn), .rsp_ppn(ptw_rsp_ppn),
    .rsp_fault(ptw_rsp_fault));

  // slice 0 on the local port, slice 1 behind the east link (index 1)
  always_comb begin
    s_req_valid[0] = ccm_req_valid; s_req[0] = ccm_req; ccm_req_ready = s_req_ready[0];
    ccm_rsp_valid = s_rsp_valid[0]; ccm_rsp = s_rsp[0]; s_rsp_ready[0] = ccm_rsp_ready;
    s_req_valid[1] = ln_out_valid[1] && ln_out_vc[1] == 1'b0; s_req[1] = ln_out_flit[1];
    ln_out_ready = '0;
    ln_out_ready[1] = {1'b0, s_req_ready[1]};
    ln_in_valid = '0; ln_in_vc = '0; ln_in_flit = '0;
    ln_in_valid[1] = s_rsp_valid[1] && ln_in_ready[1][1];
    ln_in_vc[1] = 1'b1; ln_in_flit[1] = s_rsp[1];
    s_rsp_ready[1] = ln_in_ready[1][1];
  end

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(logic c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  always @(posedge clk) if (rst_n) begin
    if (ln_out_valid[0] || ln_out_valid[2] || ln_out_valid[3]) edge_out++;
    if (ev_route) routed++;
  end

  function automatic logic [PA_W-1:0] pa(logic [VA_W-1:0] va);
    return ((va >> 12) + OFF) << 12 | (va & 48'hfff);
  endfunction
  function automatic void put(logic [VA_W-1:0] va, logic [63:0] v, int bits);
    logic [PA_W-1:0] p; logic [WORD_W-1:0] w;
    p = pa(va); w = ccm.peek(p);
    for (int i = 0; i < bits; i++) w[int'(p[4:0])*8 + i] = v[i];
    ccm.poke(p, w);
  endfunction
  function automatic logic [63:0] get(logic [VA_W-1:0] va, int bits);
    logic [PA_W-1:0] p; logic [WORD_W-1:0] w; logic [63:0] v;
    p = pa(va); w = ccm.peek(p); v = '0;
    for (int i = 0; i < bits; i++) v[i] = w[int'(p[4:0])*8 + i];
    return v;
  endfunction
  task automatic issue(mpais_op_e op, gpr_t r0, gpr_t r1, gpr_t r2, gpr_t r3, gpr_t r4, gpr_t r5,
                       output gpr_t rd);
    @(negedge clk);
    mp_valid = 1; mp_req.op = op; mp_req.asid = 16'h42;
    mp_req.regs[0] = r0; mp_req.regs[1] = r1; mp_req.regs[2] = r2;
    mp_req.regs[3] = r3; mp_req.regs[4] = r4; mp_req.regs[5] = r5;
    while (!mp_ready) @(negedge clk);
    @(negedge clk); mp_valid = 0; rd = mp_rd;
    chk(mp_rd_valid, "Rd valid one cycle after issue");
  endtask
  task automatic run(mpais_op_e op, gpr_t r0, gpr_t r1, gpr_t r2, gpr_t r3, gpr_t r4, gpr_t r5);
    gpr_t m, rd;
    int g;
    issue(op, r0, r1, r2, r3, r4, r5, m);
    chk(!m[63] && mtq_o[m[2:0]].valid && mtq_o[m[2:0]].asid == 16'h42, "entry allocated");
    g = 0;
    while (!mtq_o[m[2:0]].done && g < 100000) begin @(negedge clk); g++; end
    issue(OP_STATE, m, 0, 0, 0, 0, 0, rd);
    chk(rd[1:0] == 2'b11 && rd[2] == 0 && !mtq_o[m[2:0]].valid, "done without exception, released");
  endtask

  task automatic gemm(fp_mode_e md, int M, int N, int K);
    int eb, A[32][32], B[32][32], C[32][32], bad;
    logic [VA_W-1:0] va, vb, vc;
    eb = ebits(md); bad = 0;
    va = 48'h10_0f00; vb = 48'h20_0000; vc = 48'h30_0800;
    for (int i = 0; i < M; i++) for (int k = 0; k < K; k++) begin
      A[i][k] = $urandom_range(0, 6) - 3; put(va + VA_W'(i*4096 + k*eb/8), enc_m(A[i][k], md), eb); end
    for (int k = 0; k < K; k++) for (int j = 0; j < N; j++) begin
      B[k][j] = $urandom_range(0, 6) - 3; put(vb + VA_W'(k*128 + j*eb/8), enc_m(B[k][j], md), eb); end
    for (int i = 0; i < M; i++) for (int j = 0; j < N; j++) begin
      C[i][j] = $urandom_range(0, 6) - 3; put(vc + VA_W'(i*96 + j*eb/8), enc_m(C[i][j], md), eb); end
    run(OP_CFG, 64'(va), 64'(vb), 64'(vc), {14'd0, 2'(md), 16'(K), 16'(N), 16'(M)}, {32'd128, 32'd4096}, 64'd96);
    for (int i = 0; i < M; i++) for (int j = 0; j < N; j++) begin
      int s;
      s = C[i][j];
      for (int k = 0; k < K; k++) s += A[i][k] * B[k][j];
      if (get(vc + VA_W'(i*96 + j*eb/8), eb) !== enc_m(s, md)) bad++;
    end
    chk(bad == 0, $sformatf("GEMM mode %0d", md));
  endtask

  initial begin
    int bad;
    mp_valid = 0; mp_req = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    gemm(MODE_FP64, 8, 12, 8);
    gemm(MODE_FP32X2, 12, 24, 8);
    gemm(MODE_FP16X4, 4, 16, 32);
    run(OP_MOVE, 64'h40_0000, 64'h50_0000, 0, {32'd0, 16'd8, 16'd3}, {32'd512, 32'd1024}, 0);
    bad = 0;
    for (int r = 0; r < 3; r++) for (int w = 0; w < 8; w++)
      if (ccm.peek(pa(48'h50_0000 + VA_W'(r*512 + w*32))) !== ccm.peek(pa(48'h40_0000 + VA_W'(r*1024 + w*32)))) bad++;
    chk(bad == 0, "MA_MOVE");
    chk(ccm.n_misroute == 0, "requests reach their home slice");
    chk(ccm.n_remote > 0, "the neighbour slice served requests");
    chk(routed > 0, "requests left on the east link");
    chk(edge_out == 0, "nothing leaves towards the mesh edge");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

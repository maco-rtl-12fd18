// tb_maco: end-to-end test of the full 4x4 MACO fabric at its default size.
//
// Around the top: one behavioural CPU per node issuing MPAIS instructions,
// one MMU model per node for the engine's page walks, and a CCM model for
// the 16 L3 slices. All 16 nodes run tile GEMMs at the same time (FP64,
// FP32x2 and FP16x4 by node), with page-crossing row strides, so memory
// traffic crosses the mesh in every direction. Besides:
//   node 0 queues two GEMMs back to back (the second waits in the STQ), then
//          fills all MTQ entries and gets the "no free entry" answer,
//   node 1 runs MA_MOVE, MA_INIT and MA_STASH,
//   node 2 runs a GEMM on a page its MMU reports as faulting and then a
//          GEMM with an illegal shape, and recovers with MA_CLEAR.
// The CPU waits for each task by polling MA_READ and releases it with
// MA_STATE. Every result element is compared with an integer reference.
// Each mechanism is counted and the test fails if one never happens (the
// mATLB demand walk, which correct operation never needs, is only reported).
module tb_maco;
  import maco_pkg::*;
  import tb_util_pkg::*;
  localparam int N = 16;
  localparam logic [PA_W-1:0] OFF = 48'h100000;
  logic clk = 0, rst_n = 0;
  logic       [N-1:0]             mp_valid, mp_ready, mp_rd_valid;
  mpais_req_t [N-1:0]             mp_req;
  gpr_t       [N-1:0]             mp_rd;
  logic       [N-1:0]             ptw_req_valid, ptw_req_ready, ptw_req_id, ptw_rsp_valid, ptw_rsp_id, ptw_rsp_fault;
  logic       [N-1:0][VA_W-1:0]   ptw_req_vpn, ptw_rsp_vpn;
  logic       [N-1:0][PA_W-1:0]   ptw_rsp_ppn;
  logic       [N-1:0]             ccm_req_valid, ccm_req_ready, ccm_rsp_valid, ccm_rsp_ready;
  flit_t      [N-1:0]             ccm_req, ccm_rsp;
  mtq_entry_t [N-1:0][7:0]        mtq_o;
  logic       [N-1:0][7:0][1:0]   stq_state_o;
  logic       [N-1:0]             busy_o, ev_pass, ev_preload, ev_route;
  logic       [N-1:0][1:0]        ev_predict, ev_hit, ev_drop, ev_demand;
  logic       [N-1:0][VA_W-1:0]   fault_lo, fault_hi;

  int checks = 0, failures = 0;
  int c_pass = 0, c_preload = 0, c_route = 0, c_predict = 0, c_hit = 0, c_drop = 0, c_demand = 0;
  int c_queued = 0, c_full = 0, c_release = 0, c_exc_tr = 0, c_exc_cfg = 0, c_clear = 0;
  int c_mode[3] = '{0, 0, 0};
  int jobs_done = 0;
  int c_move = 0, c_init = 0, c_stash = 0, c_busy_nodes = 0, max_busy = 0;

  maco dut (.*);
  tb_ccm_model #(.NODES(N)) ccm (.clk, .rst_n, .req_valid(ccm_req_valid), .req_ready(ccm_req_ready),
                                 .req(ccm_req), .rsp_valid(ccm_rsp_valid), .rsp_ready(ccm_rsp_ready), .rsp(ccm_rsp));
  for (genvar n = 0; n < N; n++) begin : g_mmu
    tb_mmu_model mmu (.clk, .rst_n, .fault_lo(fault_lo[n]), .fault_hi(fault_hi[n]),
      .req_valid(ptw_req_valid[n]), .req_ready(ptw_req_ready[n]), .req_vpn(ptw_req_vpn[n]), .req_id(ptw_req_id[n]),
      .rsp_valid(ptw_rsp_valid[n]), .rsp_id(ptw_rsp_id[n]), .rsp_vpn(ptw_rsp_vpn[n]),
      .rsp_ppn(ptw_rsp_ppn[n]), .rsp_fault(ptw_rsp_fault[n]));
  end
  always #5 clk = ~clk;
  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(logic c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  always @(posedge clk) if (rst_n) begin
    int b;
    b = 0;
    for (int n = 0; n < N; n++) begin
      c_pass += int'(ev_pass[n]); c_preload += int'(ev_preload[n]); c_route += int'(ev_route[n]);
      for (int e = 0; e < 2; e++) begin
        c_predict += int'(ev_predict[n][e]); c_hit += int'(ev_hit[n][e]);
        c_drop += int'(ev_drop[n][e]); c_demand += int'(ev_demand[n][e]);
      end
      for (int s = 0; s < 8; s++) if (stq_state_o[n][s] == 2'd1) c_queued++;
      b += int'(busy_o[n]);
    end
    if (b > max_busy) max_busy = b;
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

  // one MPAIS instruction on node n; returns Rd
  task automatic issue(int n, mpais_op_e op, logic [15:0] asid, gpr_t r0, gpr_t r1, gpr_t r2,
                       gpr_t r3, gpr_t r4, gpr_t r5, output gpr_t rd);
    @(negedge clk);
    mp_valid[n] = 1; mp_req[n].op = op; mp_req[n].asid = asid;
    mp_req[n].regs[0] = r0; mp_req[n].regs[1] = r1; mp_req[n].regs[2] = r2;
    mp_req[n].regs[3] = r3; mp_req[n].regs[4] = r4; mp_req[n].regs[5] = r5;
    while (!mp_ready[n]) @(negedge clk);
    @(negedge clk);
    mp_valid[n] = 0;
    rd = mp_rd[n];
    chk(mp_rd_valid[n], "Rd returned");
  endtask
  // poll MA_READ until done, then release with MA_STATE; returns exc fields
  task automatic finish(int n, logic [15:0] asid, gpr_t maid, logic exc, logic [EXC_W-1:0] et);
    gpr_t rd;
    int g;
    g = 0;
    do begin
      repeat (40) @(negedge clk);
      issue(n, OP_READ, asid, maid, 0, 0, 0, 0, 0, rd);
      g++;
    end while (!rd[1] && g < 5000);
    chk(rd[0] && rd[1] && rd[8], $sformatf("node %0d task %0d done", n, maid));
    chk(rd[2] == exc && rd[7:4] == et, $sformatf("node %0d task %0d exception %0d/%0d", n, maid, rd[2], rd[7:4]));
    if (exc) begin
      if (et == EXC_TRANSLATE) c_exc_tr++; else c_exc_cfg++;
      // MA_STATE must not release a task that ended with an exception? it is
      // done, so it is released; recovery uses MA_CLEAR on a fresh copy below
      issue(n, OP_CLEAR, asid, maid, 0, 0, 0, 0, 0, rd);
      chk(rd[0] && rd[8], "MA_CLEAR on own entry");
      c_clear++;
      chk(!mtq_o[n][maid[2:0]].valid, "entry cleared");
    end else begin
      issue(n, OP_STATE, asid, maid, 0, 0, 0, 0, 0, rd);
      chk(rd[1], "MA_STATE sees done");
      chk(!mtq_o[n][maid[2:0]].valid, "entry released");
      c_release++;
    end
  endtask

  int Am[N][32][32], Bm[N][32][32], Cm[N][32][32];
  task automatic setup(int n, fp_mode_e md, int M, int Nn, int K, logic [VA_W-1:0] va, logic [VA_W-1:0] vb,
                       logic [VA_W-1:0] vc, int lda, int ldb, int ldc);
    int eb, rng;
    eb = ebits(md); rng = (md == MODE_FP16X4) ? 3 : 6;
    for (int i = 0; i < M; i++) for (int k = 0; k < K; k++) begin
      Am[n][i][k] = $urandom_range(0, 2*rng) - rng; put(va + VA_W'(i*lda + k*eb/8), enc_m(Am[n][i][k], md), eb);
    end
    for (int k = 0; k < K; k++) for (int j = 0; j < Nn; j++) begin
      Bm[n][k][j] = $urandom_range(0, 2*rng) - rng; put(vb + VA_W'(k*ldb + j*eb/8), enc_m(Bm[n][k][j], md), eb);
    end
    for (int i = 0; i < M; i++) for (int j = 0; j < Nn; j++) begin
      Cm[n][i][j] = $urandom_range(0, 20) - 10; put(vc + VA_W'(i*ldc + j*eb/8), enc_m(Cm[n][i][j], md), eb);
    end
  endtask
  task automatic verify(int n, fp_mode_e md, int M, int Nn, int K, logic [VA_W-1:0] vc, int ldc);
    int eb, bad;
    eb = ebits(md); bad = 0;
    for (int i = 0; i < M; i++) for (int j = 0; j < Nn; j++) begin
      int s;
      s = Cm[n][i][j];
      for (int k = 0; k < K; k++) s += Am[n][i][k] * Bm[n][k][j];
      if (get(vc + VA_W'(i*ldc + j*eb/8), eb) !== enc_m(s, md)) bad++;
    end
    chk(bad == 0, $sformatf("node %0d GEMM mode %0d %0dx%0dx%0d (%0d wrong)", n, md, M, Nn, K, bad));
    if (bad == 0) c_mode[md]++;
  endtask
  function automatic gpr_t shape(int M, int Nn, int K, fp_mode_e md);
    return {8'd0, 6'd0, 2'(md), 16'(K), 16'(Nn), 16'(M)};
  endfunction

  // GEMM job of node n in the mode picked by n
  task automatic gemm_job(int n, int variant);
    fp_mode_e md;
    int M, Nn, K, eb, lda, ldb, ldc;
    logic [VA_W-1:0] va, vb, vc;
    gpr_t maid;
    md = fp_mode_e'((n + variant) % 3);
    eb = ebits(md);
    M = 16; K = 8 * (64 / eb) / 2; Nn = 4 * (64 / eb) * 2;
    if (K < 8) K = 8;
    va = VA_W'(64'h100_0000 * (n + 1) + 64'h4_0000 * variant + 64'hfc0);
    vb = va + 48'h1_0000; vc = va + 48'h2_0000;
    lda = 4096 + 32 * (n % 3); ldb = 256; ldc = 1024 + 64;
    setup(n, md, M, Nn, K, va, vb, vc, lda, ldb, ldc);
    issue(n, OP_CFG, 16'(100 + n), 64'(va), 64'(vb), 64'(vc), shape(M, Nn, K, md),
          {32'(ldb), 32'(lda)}, 64'(ldc), maid);
    chk(!maid[63], "MAID allocated");
    finish(n, 16'(100 + n), maid, 0, EXC_NONE);
    verify(n, md, M, Nn, K, vc, ldc);
  endtask

  task automatic node0_queue();
    gpr_t m1, m2, rd, ms[8];
    logic [VA_W-1:0] va;
    va = 48'h7000_0000;
    setup(0, MODE_FP64, 24, 16, 16, va, va + 48'h1_0000, va + 48'h2_0000, 128, 128, 128);
    issue(0, OP_CFG, 16'd7, 64'(va), 64'(va + 48'h1_0000), 64'(va + 48'h2_0000), shape(24, 16, 16, MODE_FP64),
          {32'd128, 32'd128}, 64'd128, m1);
    // second task: same A and B, C elsewhere (pattern data, not checked)
    issue(0, OP_CFG, 16'd7, 64'(va), 64'(va + 48'h1_0000), 64'(va + 48'h3_0000), shape(24, 16, 16, MODE_FP64),
          {32'd128, 32'd128}, 64'd128, m2);
    chk(m1 != m2, "distinct MAIDs");
    finish(0, 16'd7, m1, 0, EXC_NONE);
    verify(0, MODE_FP64, 24, 16, 16, va + 48'h2_0000, 128);
    finish(0, 16'd7, m2, 0, EXC_NONE);
    // fill all eight entries with small INIT tasks, then one more
    for (int i = 0; i < 8; i++) begin
      issue(0, OP_INIT, 16'd8, 0, 64'(48'h7100_0000 + 48'h1000 * i), 0, {32'd0, 16'd1, 16'd2}, {32'd64, 32'd0}, 0, ms[i]);
      chk(!ms[i][63], "entry allocated");
    end
    issue(0, OP_INIT, 16'd8, 0, 64'h7200_0000, 0, {32'd0, 16'd1, 16'd1}, 0, 0, rd);
    chk(rd[63], "ninth task refused: no free entry");
    if (rd[63]) c_full++;
    // a different process cannot release them
    issue(0, OP_STATE, 16'd9, ms[0], 0, 0, 0, 0, 0, rd);
    chk(!rd[8] && mtq_o[0][ms[0][2:0]].valid, "foreign ASID cannot release");
    for (int i = 0; i < 8; i++) finish(0, 16'd8, ms[i], 0, EXC_NONE);
    c_init++;
  endtask

  task automatic node1_data();
    gpr_t m, rd;
    int bad;
    issue(1, OP_MOVE, 16'd3, 64'h7300_0f80, 64'h7400_0040, 0, {32'd0, 16'd4, 16'd6}, {32'd512, 32'd4096}, 0, m);
    finish(1, 16'd3, m, 0, EXC_NONE);
    bad = 0;
    for (int r = 0; r < 6; r++) for (int w = 0; w < 4; w++)
      if (ccm.peek(pa(48'h7400_0040 + VA_W'(r*512 + w*32))) !== ccm.peek(pa(48'h7300_0f80 + VA_W'(r*4096 + w*32)))) bad++;
    chk(bad == 0, "MA_MOVE copied the block");
    if (bad == 0) c_move++;
    issue(1, OP_INIT, 16'd3, 0, 64'h7500_0000, 0, {32'd0, 16'd3, 16'd5}, {32'd2048, 32'd0}, 0, m);
    finish(1, 16'd3, m, 0, EXC_NONE);
    bad = 0;
    for (int r = 0; r < 5; r++) for (int w = 0; w < 3; w++)
      if (ccm.peek(pa(48'h7500_0000 + VA_W'(r*2048 + w*32))) !== '0) bad++;
    chk(bad == 0, "MA_INIT zeroed the block");
    if (bad == 0) c_init++;
    bad = ccm.n_stash;
    issue(1, OP_STASH, 16'd3, 64'h7600_0000, 0, 0, {32'd0, 16'd4, 16'd4}, {32'd0, 32'd4096}, 0, m);
    finish(1, 16'd3, m, 0, EXC_NONE);
    chk(ccm.n_stash - bad == 16, "MA_STASH sent one stash per word");
    if (ccm.n_stash - bad == 16) c_stash++;
  endtask

  task automatic node2_exc();
    gpr_t m;
    fault_lo[2] = 48'h7700_0000 >> 12; fault_hi[2] = (48'h7700_0000 >> 12) + 1;
    issue(2, OP_CFG, 16'd5, 64'h7700_0000, 64'h7800_0000, 64'h7900_0000, shape(8, 8, 8, MODE_FP64),
          {32'd64, 32'd64}, 64'd64, m);
    finish(2, 16'd5, m, 1, EXC_TRANSLATE);
    issue(2, OP_CFG, 16'd5, 64'h7800_0000, 64'h7800_0000, 64'h7900_0000, shape(8, 10, 8, MODE_FP64),
          {32'd64, 32'd64}, 64'd64, m);
    finish(2, 16'd5, m, 1, EXC_CONFIG);
  endtask

  initial begin
    mp_valid = '0; mp_req = '0;
    for (int n = 0; n < N; n++) begin fault_lo[n] = '1; fault_hi[n] = '1; end
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (2) @(negedge clk);
    for (int n = 0; n < N; n++) begin
      automatic int nn = n;
      fork
        begin
          gemm_job(nn, 0);
          case (nn)
            0: node0_queue();
            1: node1_data();
            2: node2_exc();
            default: gemm_job(nn, 1);
          endcase
          jobs_done++;
        end
      join_none
    end
    wait (jobs_done == N);
    chk(ccm.n_misroute == 0, "every request reached its home slice");
    chk(ccm.n_remote > 0, "requests crossed the mesh");
    $display("passes=%0d preload=%0d routed=%0d predict=%0d hit=%0d drop=%0d demand=%0d queued=%0d",
             c_pass, c_preload, c_route, c_predict, c_hit, c_drop, c_demand, c_queued);
    $display("full=%0d release=%0d exc_tr=%0d exc_cfg=%0d clear=%0d modes=%0d/%0d/%0d move=%0d init=%0d stash=%0d max_busy=%0d",
             c_full, c_release, c_exc_tr, c_exc_cfg, c_clear, c_mode[0], c_mode[1], c_mode[2],
             c_move, c_init, c_stash, max_busy);
    chk(c_pass > 0, "array passes");
    chk(c_preload > 0, "B preloads");
    chk(c_route > 0, "flits routed between routers");
    chk(c_predict > 0, "mATLB predicted walks");
    chk(c_hit > 0, "mATLB hits");
    chk(c_drop > 0, "mATLB dropped entries");
    // demand walks are the mATLB's fallback for a lookup outside the predicted
    // pages; when the DMA follows its own command they do not occur (the
    // mATLB unit test provokes them), so here they are only reported
    chk(c_queued > 0, "task waited in the STQ");
    chk(c_full > 0, "MTQ full");
    chk(c_release > 0, "MTQ release");
    chk(c_exc_tr > 0 && c_exc_cfg > 0 && c_clear > 0, "exceptions and MA_CLEAR");
    chk(c_mode[0] > 0 && c_mode[1] > 0 && c_mode[2] > 0, "all three precision modes");
    chk(c_move > 0 && c_init > 0 && c_stash > 0, "MOVE, INIT, STASH");
    chk(max_busy == N, "all engines busy at once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

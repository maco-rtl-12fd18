// tb_mmae: whole matrix engine with behavioural memory and MMU.
// Sends tile-GEMM tasks in FP64, FP32x2 and FP16x4 mode (two of them queued
// back to back so the STQ starts the second by itself), then MA_MOVE,
// MA_INIT and MA_STASH tasks, a GEMM whose A matrix lies on a faulting page
// and a GEMM with an illegal shape. Checks every result element against an
// integer reference (values are small integers, exact in every format), the
// MAID and exception fields of every completion, the number of array passes
// and that the array streams one row per cycle in every pass.
module tb_mmae;
  import maco_pkg::*;
  import tb_util_pkg::*;
  localparam logic [PA_W-1:0] OFF = 48'h100000;
  logic clk = 0, rst_n = 0;
  logic cfg_valid, cfg_ready, rsp_valid;
  task_t cfg; task_rsp_t rsp;
  logic mreq_valid, mreq_ready, mrsp_valid; mem_req_t mreq; mem_rsp_t mrsp;
  logic ptw_req_valid, ptw_req_ready, ptw_req_id, ptw_rsp_valid, ptw_rsp_id, ptw_rsp_fault;
  logic [VA_W-1:0] ptw_req_vpn, ptw_rsp_vpn; logic [PA_W-1:0] ptw_rsp_ppn;
  logic busy_o, ev_pass, ev_preload;
  logic [7:0][1:0] stq_state_o;
  logic [1:0] ev_predict, ev_hit, ev_drop, ev_demand;
  logic [VA_W-1:0] fault_lo = '1, fault_hi = '1;
  int checks = 0, failures = 0, passes = 0, run_len = 0, bad_runs = 0, cur_m = 0;
  task_rsp_t rsps[$];

  mmae dut (.*);
  tb_mem_model mem (.clk, .rst_n, .req_valid(mreq_valid), .req_ready(mreq_ready), .req(mreq),
                    .rsp_valid(mrsp_valid), .rsp(mrsp));
  tb_mmu_model mmu (.clk, .rst_n, .fault_lo, .fault_hi,
    .req_valid(ptw_req_valid), .req_ready(ptw_req_ready), .req_vpn(ptw_req_vpn), .req_id(ptw_req_id),
    .rsp_valid(ptw_rsp_valid), .rsp_id(ptw_rsp_id), .rsp_vpn(ptw_rsp_vpn), .rsp_ppn(ptw_rsp_ppn),
    .rsp_fault(ptw_rsp_fault));
  always #5 clk = ~clk;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rsp_valid) rsps.push_back(rsp);
    if (rst_n && ev_pass) passes++;
    if (rst_n && dut.sa_v) run_len++;
    else if (run_len != 0) begin
      if (run_len != cur_m) bad_runs++;
      run_len = 0;
    end
  end

  function automatic logic [PA_W-1:0] pa(logic [VA_W-1:0] va);
    return ((va >> 12) + OFF) << 12 | (va & 48'hfff);
  endfunction
  function automatic void put(logic [VA_W-1:0] va, logic [63:0] v, int bits);
    logic [PA_W-1:0] p; logic [WORD_W-1:0] w;
    p = pa(va); w = mem.peek(p);
    for (int i = 0; i < bits; i++) w[int'(p[4:0])*8 + i] = v[i];
    mem.poke(p, w);
  endfunction
  function automatic logic [63:0] get(logic [VA_W-1:0] va, int bits);
    logic [PA_W-1:0] p; logic [WORD_W-1:0] w; logic [63:0] v;
    p = pa(va); w = mem.peek(p); v = '0;
    for (int i = 0; i < bits; i++) v[i] = w[int'(p[4:0])*8 + i];
    return v;
  endfunction
  task automatic chk(logic c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic send(mpais_op_e op, int maid, gpr_t r0, gpr_t r1, gpr_t r2, gpr_t r3, gpr_t r4, gpr_t r5);
    @(negedge clk);
    cfg_valid = 1; cfg.op = op; cfg.maid = MAID_W'(maid);
    cfg.regs[0] = r0; cfg.regs[1] = r1; cfg.regs[2] = r2; cfg.regs[3] = r3; cfg.regs[4] = r4; cfg.regs[5] = r5;
    @(negedge clk); cfg_valid = 0;
  endtask
  task automatic wait_rsp(int maid, logic exc, logic [EXC_W-1:0] et);
    int g = 0;
    while (rsps.size() == 0 && g < 200000) begin @(posedge clk); g++; end
    #1;
    chk(rsps.size() > 0 && rsps[0].maid == MAID_W'(maid) && rsps[0].exc_en == exc && rsps[0].exc_type == et,
        $sformatf("rsp for maid %0d", maid));
    if (rsps.size() > 0) void'(rsps.pop_front());
  endtask

  // GEMM data set: A MxK at va_a (lda), B KxN at va_b (ldb), C MxN at va_c (ldc)
  int Am[64][64], Bm[64][64], Cm[64][64];
  task automatic setup(fp_mode_e md, int M, int N, int K, logic [VA_W-1:0] va, logic [VA_W-1:0] vb,
                       logic [VA_W-1:0] vc, int lda, int ldb, int ldc);
    int eb = ebits(md), rng = (md == MODE_FP16X4) ? 3 : 7;
    for (int i = 0; i < M; i++) for (int k = 0; k < K; k++) begin
      Am[i][k] = $urandom_range(0, 2*rng) - rng; put(va + VA_W'(i*lda + k*eb/8), enc_m(Am[i][k], md), eb);
    end
    for (int k = 0; k < K; k++) for (int n = 0; n < N; n++) begin
      Bm[k][n] = $urandom_range(0, 2*rng) - rng; put(vb + VA_W'(k*ldb + n*eb/8), enc_m(Bm[k][n], md), eb);
    end
    for (int i = 0; i < M; i++) for (int n = 0; n < N; n++) begin
      Cm[i][n] = $urandom_range(0, 40) - 20; put(vc + VA_W'(i*ldc + n*eb/8), enc_m(Cm[i][n], md), eb);
    end
  endtask
  task automatic verify(fp_mode_e md, int M, int N, int K, logic [VA_W-1:0] vc, int ldc);
    int eb = ebits(md), bad = 0;
    for (int i = 0; i < M; i++) for (int n = 0; n < N; n++) begin
      int s = Cm[i][n];
      for (int k = 0; k < K; k++) s += Am[i][k] * Bm[k][n];
      if (get(vc + VA_W'(i*ldc + n*eb/8), eb) !== enc_m(s, md)) begin
        if (bad < 5) $display("C[%0d][%0d] got %h exp %h", i, n, get(vc + VA_W'(i*ldc + n*eb/8), eb), enc_m(s, md));
        bad++;
      end
    end
    chk(bad == 0, $sformatf("GEMM mode %0d %0dx%0dx%0d", md, M, N, K));
  endtask
  function automatic gpr_t shape(int M, int N, int K, fp_mode_e md);
    return {8'd0, 6'd0, 2'(md), 16'(K), 16'(N), 16'(M)};
  endfunction

  initial begin
    int p0, p1;
    cfg_valid = 0; cfg = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    // --- FP64 GEMM 24x8x8, strides that cross pages
    setup(MODE_FP64, 24, 8, 8, 48'h10_0fc0, 48'h20_0000, 48'h30_0f00, 4096 + 64, 256, 2048);
    cur_m = 24; p0 = passes;
    send(OP_CFG, 3, 64'h10_0fc0, 64'h20_0000, 64'h30_0f00, shape(24, 8, 8, MODE_FP64),
         {32'd256, 32'd4160}, 64'd2048);
    wait_rsp(3, 0, EXC_NONE);
    verify(MODE_FP64, 24, 8, 8, 48'h30_0f00, 2048);
    chk(passes - p0 == 2 * 2, "FP64 pass count (K/4 * N/4)");
    // --- FP32x2 and FP16x4 GEMM queued back to back
    setup(MODE_FP32X2, 8, 16, 8, 48'h40_0000, 48'h50_0000, 48'h60_0000, 64, 64, 64);
    cur_m = 8; p0 = passes;
    send(OP_CFG, 1, 64'h40_0000, 64'h50_0000, 64'h60_0000, shape(8, 16, 8, MODE_FP32X2),
         {32'd64, 32'd64}, 64'd64);
    send(OP_CFG, 5, 64'h40_0000, 64'h50_0000, 64'h70_0000, shape(8, 16, 8, MODE_FP32X2),
         {32'd64, 32'd64}, 64'd64);   // second task reads the same A, B; C at 0x700000 is pattern data
    wait_rsp(1, 0, EXC_NONE);
    verify(MODE_FP32X2, 8, 16, 8, 48'h60_0000, 64);
    wait_rsp(5, 0, EXC_NONE);
    chk(passes - p0 == 2 * (2 * 2), "FP32 pass count");
    setup(MODE_FP16X4, 8, 32, 16, 48'h80_0000, 48'h90_0000, 48'ha0_0000, 32, 64, 64);
    p0 = passes;
    send(OP_CFG, 2, 64'h80_0000, 64'h90_0000, 64'ha0_0000, shape(8, 32, 16, MODE_FP16X4),
         {32'd64, 32'd32}, 64'd64);
    wait_rsp(2, 0, EXC_NONE);
    verify(MODE_FP16X4, 8, 32, 16, 48'ha0_0000, 64);
    chk(passes - p0 == 4 * 2, "FP16 pass count");
    p0 = passes;
    // --- MOVE 5 rows x 3 words, INIT 4 x 2, STASH 2 x 4
    send(OP_MOVE, 4, 64'hb0_0000, 64'hc0_0020, 0, {32'd0, 16'd3, 16'd5}, {32'd256, 32'd128}, 0);
    wait_rsp(4, 0, EXC_NONE);
    begin
      int bad = 0;
      for (int r = 0; r < 5; r++) for (int w = 0; w < 3; w++)
        if (mem.peek(pa(48'hc0_0020 + VA_W'(r*256 + w*32))) !== mem.peek(pa(48'hb0_0000 + VA_W'(r*128 + w*32)))) bad++;
      chk(bad == 0, "MA_MOVE copy");
    end
    send(OP_INIT, 0, 0, 64'hd0_0000, 0, {32'd0, 16'd2, 16'd4}, {32'd512, 32'd0}, 0);
    wait_rsp(0, 0, EXC_NONE);
    begin
      int bad = 0;
      for (int r = 0; r < 4; r++) for (int w = 0; w < 2; w++)
        if (mem.peek(pa(48'hd0_0000 + VA_W'(r*512 + w*32))) !== '0) bad++;
      chk(bad == 0, "MA_INIT zero");
    end
    p1 = mem.n_stash;
    send(OP_STASH, 6, 64'he0_0000, 0, 0, {32'd0, 16'd4, 16'd2}, {32'd0, 32'd4096}, 0);
    wait_rsp(6, 0, EXC_NONE);
    chk(mem.n_stash - p1 == 8, "MA_STASH requests");
    // --- exceptions
    fault_lo = 48'h100; fault_hi = 48'h101;    // page of va 0x100000..
    send(OP_CFG, 7, 64'h10_0000, 64'h20_0000, 64'h30_0000, shape(4, 4, 4, MODE_FP64),
         {32'd256, 32'd32}, 64'd32);
    wait_rsp(7, 1, EXC_TRANSLATE);
    send(OP_CFG, 3, 64'h40_0000, 64'h50_0000, 64'h60_0000, shape(4, 6, 4, MODE_FP64),
         {32'd64, 32'd64}, 64'd64);
    wait_rsp(3, 1, EXC_CONFIG);
    chk(passes == p0, "no array pass after exceptions or data moves");
    chk(bad_runs == 0, "array fed one row per cycle");
    $display("passes=%0d walks=%0d", passes, mmu.n_walk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

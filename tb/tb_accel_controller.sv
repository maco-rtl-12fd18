// tb_accel_controller: the accelerator controller driving a real systolic
// array, with the three buffers and the two DMA engines replaced by
// behavioural models (buffers: 1-cycle read; DMA: word-aligned copies between
// a word memory and the buffers, finishing after a random delay, with an
// optional fault). Checks tile GEMM results in all three precision modes,
// the order and shape of the DMA commands for MA_MOVE / MA_INIT / MA_STASH,
// the exception codes for a faulting DMA and for an illegal shape, and that
// the controller accepts a task only while idle.
module tb_accel_controller;
  import maco_pkg::*;
  import tb_util_pkg::*;
  localparam int DEPTH = 2048;
  localparam int AW = 11;
  logic clk = 0, rst_n = 0;
  logic tsk_valid, tsk_ready, done_o, exc_en_o; task_t tsk; logic [EXC_W-1:0] exc_type_o;
  logic [7:0] page_shift; logic [1:0] dma_valid, dma_ready, dma_done, dma_fault; dma_cmd_t [1:0] dma_cmd;
  logic a_re, b_re, c_re, c_we; logic [AW-1:0] a_raddr, b_raddr, c_raddr, c_waddr;
  logic [WORD_W-1:0] a_rdata, b_rdata, c_rdata, c_wdata;
  fp_mode_e sa_mode; logic sa_load_b, sa_v, sa_v_o;
  logic [3:0][63:0] sa_b, sa_a, sa_c, sa_p;
  logic busy_o, ev_pass;
  int checks = 0, failures = 0, passes = 0, n_cmd[2], n_stash = 0, n_zero = 0;
  logic inject_fault = 0;
  logic [WORD_W-1:0] abuf[DEPTH], bbuf[DEPTH], cbuf[DEPTH];
  logic [WORD_W-1:0] mem[logic [VA_W-6:0]];
  dma_cmd_t last_cmd[2];

  accel_controller #(.DEPTH(DEPTH)) dut (.*);
  systolic_array u_sa (.clk, .rst_n, .mode(sa_mode), .load_b(sa_load_b), .b_i(sa_b), .v_i(sa_v),
                       .a_i(sa_a), .c_i(sa_c), .v_o(sa_v_o), .p_o(sa_p));
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

  // buffer models
  always @(posedge clk) begin
    if (a_re) a_rdata <= abuf[a_raddr];
    if (b_re) b_rdata <= bbuf[b_raddr];
    if (c_re) c_rdata <= cbuf[c_raddr];
    if (c_we) cbuf[c_waddr] <= c_wdata;
    if (rst_n && ev_pass) passes++;
  end
  function automatic logic [WORD_W-1:0] rdmem(logic [VA_W-1:0] va);
    return mem.exists(va[VA_W-1:5]) ? mem[va[VA_W-1:5]] : {8{32'(va[VA_W-1:5])}};
  endfunction

  // DMA models
  for (genvar e = 0; e < 2; e++) begin : g_dma
    initial begin
      dma_ready[e] = 0; dma_done[e] = 0; dma_fault[e] = 0; n_cmd[e] = 0;
      forever begin
        @(posedge clk);
        #1 dma_done[e] = 0; dma_fault[e] = 0;
        dma_ready[e] = ($urandom_range(0, 2) != 0);
        if (dma_ready[e] && dma_valid[e]) begin
          dma_cmd_t c;
          c = dma_cmd[e];
          @(posedge clk); #1 dma_ready[e] = 0;
          n_cmd[e]++; last_cmd[e] = c;
          for (int r = 0; r < int'(c.rows); r++)
            for (int w = 0; w < int'(c.row_words); w++) begin
              logic [VA_W-1:0] va;
              int ba;
              va = c.vaddr + VA_W'(r) * VA_W'(c.stride) + VA_W'(32 * w);
              ba = int'(c.buf_base) + r * int'(c.row_words) + w;
              case (c.op)
                DMA_LOAD:
                  case (c.buf_sel)
                    BUF_A: abuf[ba] = rdmem(va);
                    BUF_B: bbuf[ba] = rdmem(va);
                    default: cbuf[ba] = rdmem(va);
                  endcase
                DMA_STORE: begin
                  mem[va[VA_W-1:5]] = c.zero ? '0 : cbuf[ba];
                  if (c.zero) n_zero++;
                end
                default: n_stash++;
              endcase
            end
          repeat ($urandom_range(1, 20)) @(posedge clk);
          #1 dma_done[e] = 1; dma_fault[e] = inject_fault && e == 0;
        end
      end
    end
  end

  task automatic send(mpais_op_e op, int maid, gpr_t r0, gpr_t r1, gpr_t r2, gpr_t r3, gpr_t r4, gpr_t r5,
                      logic exc, logic [EXC_W-1:0] et);
    int g = 0;
    @(negedge clk);
    tsk_valid = 1; tsk.op = op; tsk.maid = MAID_W'(maid);
    tsk.regs[0] = r0; tsk.regs[1] = r1; tsk.regs[2] = r2; tsk.regs[3] = r3; tsk.regs[4] = r4; tsk.regs[5] = r5;
    chk(tsk_ready, "ready when idle");
    @(negedge clk); tsk_valid = 0;
    chk(!tsk_ready && busy_o, "busy after accept");
    while (!done_o && g < 100000) begin @(negedge clk); g++; chk(done_o || !tsk_ready || g < 2, "not ready while busy"); end
    chk(done_o && exc_en_o == exc && exc_type_o == et, $sformatf("completion op %0d", op));
  endtask

  int Am[32][32], Bm[32][32], Cm[32][32];
  task automatic gemm(fp_mode_e md, int M, int N, int K);
    int eb = ebits(md), bad = 0, p0 = passes, L = 64 / eb;
    logic [VA_W-1:0] va = 48'h1000, vb = 48'h20000, vc = 48'h40000;
    int lda = 1024, ldb = 512, ldc = 2048;
    for (int i = 0; i < M; i++) for (int k = 0; k < K; k++) begin
      logic [WORD_W-1:0] w; logic [VA_W-1:0] a;
      Am[i][k] = $urandom_range(0, 8) - 4;
      a = va + VA_W'(i * lda + k * eb / 8); w = rdmem(a);
      w[(a[4:0] * 8) +: 64] = (w[(a[4:0] * 8) +: 64] & ~((65'd1 << eb) - 1)) | enc_m(Am[i][k], md);
      mem[a[VA_W-1:5]] = w;
    end
    for (int k = 0; k < K; k++) for (int n = 0; n < N; n++) begin
      logic [WORD_W-1:0] w; logic [VA_W-1:0] a;
      Bm[k][n] = $urandom_range(0, 8) - 4;
      a = vb + VA_W'(k * ldb + n * eb / 8); w = rdmem(a);
      w[(a[4:0] * 8) +: 64] = (w[(a[4:0] * 8) +: 64] & ~((65'd1 << eb) - 1)) | enc_m(Bm[k][n], md);
      mem[a[VA_W-1:5]] = w;
    end
    for (int i = 0; i < M; i++) for (int n = 0; n < N; n++) begin
      logic [WORD_W-1:0] w; logic [VA_W-1:0] a;
      Cm[i][n] = $urandom_range(0, 20) - 10;
      a = vc + VA_W'(i * ldc + n * eb / 8); w = rdmem(a);
      w[(a[4:0] * 8) +: 64] = (w[(a[4:0] * 8) +: 64] & ~((65'd1 << eb) - 1)) | enc_m(Cm[i][n], md);
      mem[a[VA_W-1:5]] = w;
    end
    send(OP_CFG, 1, 64'(va), 64'(vb), 64'(vc), {14'd0, 2'(md), 16'(K), 16'(N), 16'(M)},
         {32'(ldb), 32'(lda)}, 64'(ldc), 0, EXC_NONE);
    for (int i = 0; i < M; i++) for (int n = 0; n < N; n++) begin
      int s = Cm[i][n]; logic [VA_W-1:0] a; logic [63:0] got;
      for (int k = 0; k < K; k++) s += Am[i][k] * Bm[k][n];
      a = vc + VA_W'(i * ldc + n * eb / 8);
      got = 64'(rdmem(a) >> (a[4:0] * 8)) & ((65'd1 << eb) - 1);
      if (got !== enc_m(s, md)) bad++;
    end
    chk(bad == 0, $sformatf("GEMM mode %0d", md));
    chk(passes - p0 == (K / 4) * (N / (4 * L)), "pass count");
    chk(last_cmd[1].op == DMA_STORE && last_cmd[1].buf_sel == BUF_C && last_cmd[1].rows == 16'(M),
        "C stored by DMA1 last");
  endtask

  initial begin
    int c0, c1;
    tsk_valid = 0; tsk = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    gemm(MODE_FP64, 12, 8, 12);
    gemm(MODE_FP32X2, 8, 16, 16);
    gemm(MODE_FP16X4, 4, 32, 32);
    gemm(MODE_FP64, 32, 16, 4);
    chk(page_shift == 8'd12, "default page shift");
    // MA_MOVE: 3 rows of 2 words -> 3 loads on DMA0, 3 stores on DMA1
    c0 = n_cmd[0]; c1 = n_cmd[1];
    send(OP_MOVE, 2, 64'h8000, 64'h9000, 0, {8'd21, 24'd0, 16'd2, 16'd3}, {32'd128, 32'd64}, 0, 0, EXC_NONE);
    chk(n_cmd[0] - c0 == 3 && n_cmd[1] - c1 == 3, "MOVE command count");
    chk(page_shift == 8'd21, "page shift from R3");
    begin
      int bad = 0;
      for (int r = 0; r < 3; r++) for (int w = 0; w < 2; w++)
        if (rdmem(48'h9000 + VA_W'(r * 128 + w * 32)) !== rdmem(48'h8000 + VA_W'(r * 64 + w * 32))) bad++;
      chk(bad == 0, "MOVE data");
    end
    c0 = n_zero;
    send(OP_INIT, 3, 0, 64'ha000, 0, {32'd0, 16'd3, 16'd4}, {32'd96, 32'd0}, 0, 0, EXC_NONE);
    chk(n_zero - c0 == 12 && rdmem(48'ha000 + 3 * 96 + 64) == '0, "INIT zero fill");
    c0 = n_stash;
    send(OP_STASH, 4, 64'hb000, 0, 0, {32'd0, 16'd5, 16'd2}, {32'd0, 32'd64}, 0, 0, EXC_NONE);
    chk(n_stash - c0 == 10 && last_cmd[0].op == DMA_STASH, "STASH requests");
    // exceptions
    send(OP_CFG, 5, 0, 0, 0, {14'd0, 2'd0, 16'd4, 16'd5, 16'd4}, 0, 0, 1, EXC_CONFIG);
    send(OP_CFG, 5, 0, 0, 0, {14'd0, 2'd1, 16'd4, 16'd8, 16'd4}, 0, 0, 1, EXC_CONFIG);
    send(OP_CFG, 5, 0, 0, 0, {14'd0, 2'd0, 16'd4, 16'd4, 16'd3000}, 0, 0, 1, EXC_CONFIG);
    c0 = passes;
    inject_fault = 1;
    send(OP_CFG, 6, 64'h1000, 64'h20000, 64'h40000, {14'd0, 2'd0, 16'd4, 16'd4, 16'd4},
         {32'd512, 32'd1024}, 64'd2048, 1, EXC_TRANSLATE);
    chk(passes == c0, "no pass after fault");
    inject_fault = 0;
    gemm(MODE_FP64, 4, 4, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// accel_controller: Accelerator Controller (AC) of the matrix engine.
//
// Takes one task at a time from the Slave Task Queue and schedules the data
// engine, the buffers and the systolic array to complete it.
//
// Tile GEMM (MA_CFG), C <- A(MxK) * B(KxN) + C(MxN), row-major matrices:
//   1. DMA0 loads A into the A buffer while DMA1 loads B into the B buffer,
//      then DMA0 loads C into the C buffer.
//   2. For every group of 4 rows of B (k-group kg) and every 256-bit column
//      group j of B/C (4 array columns x L lanes), the controller
//        - preloads the 4x4 B sub-tile into the array (4 cycles, bottom row
//          first; one extra cycle of buffer read latency),
//        - streams all M rows: one A word and one C word are read per cycle,
//          the 4 A elements of the k-group go to the 4 array rows (each
//          element copied into every SIMD lane) and the C word is split into
//          the 4 array columns,
//        - writes the result rows back over the same C words as they leave
//          the array (partial sums return to the C buffer and are streamed
//          in again for the next k-group).
//   3. DMA1 stores the C buffer to memory.
// In FP32x2 and FP16x4 mode, lane l of array column n holds matrix column
// 4*L*j + n*L + l, so one 256-bit word of B or C is exactly one row of a
// column group in every mode.
// MA_MOVE copies row by row through the C buffer (DMA0 load, DMA1 store),
// MA_INIT zero-fills with DMA1, MA_STASH sends stash requests with DMA0.
// A translation fault ends the task with exception type EXC_TRANSLATE; a
// shape that is not a multiple of 4*L in N and K or does not fit the
// buffers ends it at once with EXC_CONFIG.
//
// The B-stationary tiling with partial sums kept in the buffer follows the
// source design. The parameter-register layout (see maco_pkg), the loop
// order, the lane mapping and the exception codes are this design's
// choices. Timing per (kg, j) pass: 5 preload cycles, M streaming cycles
// at one row per cycle, and ROWS+COLS-1 (+1) cycles to drain.
// The task's MAID field is held with the task but not read here (the STQ
// attaches the MAID to the completion), so lint reports those bits unused.
module accel_controller
  import maco_pkg::*;
#(
  parameter int unsigned ROWS  = 4,
  parameter int unsigned COLS  = 4,
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // task from the STQ
  input  logic                  tsk_valid,
  output logic                  tsk_ready,
  input  task_t                 tsk,
  output logic                  done_o,
  output logic                  exc_en_o,
  output logic [EXC_W-1:0]      exc_type_o,
  // data engine
  output logic [7:0]            page_shift,
  output logic [1:0]            dma_valid,
  input  logic [1:0]            dma_ready,
  output dma_cmd_t [1:0]        dma_cmd,
  input  logic [1:0]            dma_done,
  input  logic [1:0]            dma_fault,
  // buffers
  output logic                  a_re,
  output logic [AW-1:0]         a_raddr,
  input  logic [WORD_W-1:0]     a_rdata,
  output logic                  b_re,
  output logic [AW-1:0]         b_raddr,
  input  logic [WORD_W-1:0]     b_rdata,
  output logic                  c_re,
  output logic [AW-1:0]         c_raddr,
  input  logic [WORD_W-1:0]     c_rdata,
  output logic                  c_we,
  output logic [AW-1:0]         c_waddr,
  output logic [WORD_W-1:0]     c_wdata,
  // systolic array
  output fp_mode_e              sa_mode,
  output logic                  sa_load_b,
  output logic [COLS-1:0][63:0] sa_b,
  output logic                  sa_v,
  output logic [ROWS-1:0][63:0] sa_a,
  output logic [COLS-1:0][63:0] sa_c,
  input  logic                  sa_v_o,
  input  logic [COLS-1:0][63:0] sa_p,
  // status
  output logic                  busy_o,
  output logic                  ev_pass
);
  typedef enum logic [3:0] {
    S_IDLE, S_DECODE, S_DMA, S_LOADC, S_PRE, S_STREAM, S_DRAIN, S_NEXT,
    S_STORE, S_MV_LD, S_MV_ST, S_FINISH
  } state_e;

  state_e       st, ret;
  task_t        t;
  fp_mode_e     mode;
  logic [1:0]   lg;                  // log2 lanes
  logic [15:0]  m_sz, n_sz, ng, awd, kgn;
  logic [31:0]  lda, ldb, ldc;
  logic [15:0]  kg, j, cnt, wr_cnt, row;
  logic         rd_v;                // buffer read issued last cycle
  logic [15:0]  rd_kg;
  logic [1:0]   dq, dw;              // DMA command queued / completion awaited
  logic         dfault;
  logic         exc;
  logic [EXC_W-1:0] exc_t;

  // decode of the incoming task (combinational, latched in S_DECODE)
  logic [15:0]  d_m, d_n, d_k, d_ng, d_aw;
  logic [1:0]   d_lg;
  logic         d_ok;
  always_comb begin
    d_m  = t.regs[3][15:0];
    d_n  = t.regs[3][31:16];
    d_k  = t.regs[3][47:32];
    d_lg = (t.regs[3][49:48] == 2'd1) ? 2'd1 : (t.regs[3][49:48] == 2'd2) ? 2'd2 : 2'd0;
    d_ng = d_n >> (2 + d_lg);
    d_aw = d_k >> (2 + d_lg);
    d_ok = (t.regs[3][49:48] != 2'd3) && d_m != 0 && d_ng != 0 && d_aw != 0 &&
           (d_n & ((16'd4 << d_lg) - 16'd1)) == 0 && (d_k & ((16'd4 << d_lg) - 16'd1)) == 0 &&
           (32'(d_m) * 32'(d_aw) <= DEPTH) && (32'(d_k) * 32'(d_ng) <= DEPTH) &&
           (32'(d_m) * 32'(d_ng) <= DEPTH);
    if (t.op != OP_CFG) begin
      // MOVE / INIT / STASH: rows = R3[15:0], words per row = R3[31:16]
      d_ok = (t.op == OP_MOVE) ? (d_n != 0 && 32'(d_n) <= DEPTH) : 1'b1;
    end
  end

  function automatic dma_cmd_t mk(dma_op_e op, logic z, logic [VA_W-1:0] va, logic [15:0] rows,
                                  logic [15:0] rw, logic [31:0] stride, buf_sel_e bs);
    dma_cmd_t c;
    c.op = op; c.zero = z; c.vaddr = va; c.rows = rows; c.row_words = rw;
    c.stride = stride; c.buf_sel = bs; c.buf_base = '0;
    return c;
  endfunction

  function automatic logic [63:0] bcast(logic [63:0] e, logic [1:0] l);
    case (l)
      2'd1:    return {2{e[31:0]}};
      2'd2:    return {4{e[15:0]}};
      default: return e;
    endcase
  endfunction

  assign tsk_ready  = (st == S_IDLE);
  assign busy_o     = (st != S_IDLE);
  assign sa_mode    = mode;
  assign dma_valid  = dq;

  // buffer reads
  always_comb begin
    a_re = 1'b0; a_raddr = '0; b_re = 1'b0; b_raddr = '0; c_re = 1'b0; c_raddr = '0;
    if (st == S_PRE && cnt < 16'(ROWS)) begin
      b_re    = 1'b1;
      b_raddr = AW'((32'(kg) * 4 + 32'(ROWS) - 1 - 32'(cnt)) * 32'(ng) + 32'(j));
    end
    if (st == S_STREAM) begin
      a_re    = 1'b1;
      a_raddr = AW'(32'(cnt) * 32'(awd) + 32'(kg >> lg));
      c_re    = 1'b1;
      c_raddr = AW'(32'(cnt) * 32'(ng) + 32'(j));
    end
  end

  // array inputs
  always_comb begin
    logic [7:0] off;          // bit offset of the k-group inside the A word
    sa_load_b = (st == S_PRE || st == S_STREAM) && rd_v && (ret == S_PRE);
    sa_v      = rd_v && (ret == S_STREAM);
    off       = 8'((32'(rd_kg) & ((32'd1 << lg) - 1)) * (256 >> lg));
    for (int n = 0; n < int'(COLS); n++) begin
      sa_b[n] = b_rdata[64*n +: 64];
      sa_c[n] = c_rdata[64*n +: 64];
    end
    for (int r = 0; r < int'(ROWS); r++) begin
      logic [63:0] e;
      e = 64'(a_rdata >> (32'(off) + 32'(r) * (32'd64 >> lg)));
      sa_a[r] = bcast(e, lg);
    end
    c_we    = sa_v_o;
    c_waddr = AW'(32'(wr_cnt) * 32'(ng) + 32'(j));
    c_wdata = sa_p;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ret <= S_IDLE; t <= '0; mode <= MODE_FP64; lg <= '0;
      m_sz <= '0; n_sz <= '0; ng <= '0; awd <= '0; kgn <= '0;
      lda <= '0; ldb <= '0; ldc <= '0; kg <= '0; j <= '0; cnt <= '0; wr_cnt <= '0; row <= '0;
      rd_v <= 1'b0; rd_kg <= '0; dq <= '0; dw <= '0; dfault <= 1'b0;
      dma_cmd <= '0; exc <= 1'b0; exc_t <= EXC_NONE; page_shift <= 8'd12;
      done_o <= 1'b0; exc_en_o <= 1'b0; exc_type_o <= EXC_NONE; ev_pass <= 1'b0;
    end else begin
      done_o  <= 1'b0;
      ev_pass <= 1'b0;
      rd_v    <= 1'b0;
      // DMA bookkeeping
      for (int i = 0; i < 2; i++) begin
        if (dq[i] && dma_ready[i]) dq[i] <= 1'b0;
        if (dma_done[i]) begin
          dw[i] <= 1'b0;
          if (dma_fault[i]) dfault <= 1'b1;
        end
      end
      if (sa_v_o) wr_cnt <= wr_cnt + 1'b1;

      unique case (st)
        S_IDLE: if (tsk_valid) begin
          t <= tsk; st <= S_DECODE; exc <= 1'b0; exc_t <= EXC_NONE; dfault <= 1'b0;
        end
        S_DECODE: begin
          page_shift <= (t.regs[3][63:56] == 8'd0) ? 8'd12 : t.regs[3][63:56];
          mode <= fp_mode_e'((t.regs[3][49:48] == 2'd3) ? 2'd0 : t.regs[3][49:48]);
          lg   <= d_lg;
          m_sz <= d_m; n_sz <= d_n; ng <= d_ng; awd <= d_aw; kgn <= d_k >> 2;
          lda  <= t.regs[4][31:0]; ldb <= t.regs[4][63:32]; ldc <= t.regs[5][31:0];
          row  <= '0;
          if (!d_ok) begin
            exc <= 1'b1; exc_t <= EXC_CONFIG; st <= S_FINISH;
          end else begin
            unique case (t.op)
              OP_CFG: begin
                dma_cmd[0] <= mk(DMA_LOAD, 1'b0, t.regs[0][VA_W-1:0], d_m, d_aw, t.regs[4][31:0], BUF_A);
                dma_cmd[1] <= mk(DMA_LOAD, 1'b0, t.regs[1][VA_W-1:0], d_k, d_ng, t.regs[4][63:32], BUF_B);
                dq <= 2'b11; dw <= 2'b11; st <= S_DMA; ret <= S_LOADC;
              end
              OP_INIT: begin
                dma_cmd[1] <= mk(DMA_STORE, 1'b1, t.regs[1][VA_W-1:0], d_m, d_n, t.regs[4][63:32], BUF_C);
                dq <= 2'b10; dw <= 2'b10; st <= S_DMA; ret <= S_FINISH;
              end
              OP_STASH: begin
                dma_cmd[0] <= mk(DMA_STASH, 1'b0, t.regs[0][VA_W-1:0], d_m, d_n, t.regs[4][31:0], BUF_C);
                dq <= 2'b01; dw <= 2'b01; st <= S_DMA; ret <= S_FINISH;
              end
              default: st <= S_MV_LD;   // OP_MOVE
            endcase
          end
        end
        S_DMA: if (dq == '0 && dw == '0) begin
          if (dfault) begin
            exc <= 1'b1; exc_t <= EXC_TRANSLATE; st <= S_FINISH;
          end else begin
            st <= ret;
          end
        end
        S_LOADC: begin
          dma_cmd[0] <= mk(DMA_LOAD, 1'b0, t.regs[2][VA_W-1:0], m_sz, ng, ldc, BUF_C);
          dq <= 2'b01; dw <= 2'b01; st <= S_DMA; ret <= S_PRE;
          kg <= '0; j <= '0; cnt <= '0;
        end
        S_PRE: begin
          rd_v  <= (cnt < 16'(ROWS));
          cnt   <= cnt + 1'b1;
          if (cnt == 16'(ROWS)) begin
            st <= S_STREAM; ret <= S_STREAM; cnt <= '0; wr_cnt <= '0;
          end
        end
        S_STREAM: begin
          rd_v  <= 1'b1;
          rd_kg <= kg;
          cnt   <= cnt + 1'b1;
          if (cnt + 1'b1 == m_sz) st <= S_DRAIN;
        end
        S_DRAIN: if (wr_cnt == m_sz) begin
          st <= S_NEXT; ev_pass <= 1'b1;
        end
        S_NEXT: begin
          cnt <= '0; ret <= S_PRE;
          if (j + 1'b1 == ng) begin
            j <= '0;
            if (kg + 1'b1 == kgn) begin
              dma_cmd[1] <= mk(DMA_STORE, 1'b0, t.regs[2][VA_W-1:0], m_sz, ng, ldc, BUF_C);
              dq <= 2'b10; dw <= 2'b10; st <= S_DMA; ret <= S_FINISH;
            end else begin
              kg <= kg + 1'b1; st <= S_PRE;
            end
          end else begin
            j <= j + 1'b1; st <= S_PRE;
          end
        end
        S_MV_LD: begin
          if (row == m_sz) st <= S_FINISH;
          else begin
            dma_cmd[0] <= mk(DMA_LOAD, 1'b0, t.regs[0][VA_W-1:0] + VA_W'(32'(row) * lda), 16'd1, n_sz, lda, BUF_C);
            dq <= 2'b01; dw <= 2'b01; st <= S_DMA; ret <= S_MV_ST;
          end
        end
        S_MV_ST: begin
          dma_cmd[1] <= mk(DMA_STORE, 1'b0, t.regs[1][VA_W-1:0] + VA_W'(32'(row) * ldb), 16'd1, n_sz, ldb, BUF_C);
          dq <= 2'b10; dw <= 2'b10; st <= S_DMA; ret <= S_MV_LD;
          row <= row + 1'b1;
        end
        S_FINISH: begin
          done_o <= 1'b1; exc_en_o <= exc; exc_type_o <= exc_t; st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule

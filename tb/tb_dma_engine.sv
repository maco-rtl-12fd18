// tb_dma_engine: one DMA engine with an always-hit translation model
// (pa = va + 0x4000_0000 except one faulting page) and the behavioural
// memory. Checks a strided load into the buffer, a store back from the
// buffer, a zero fill and a stash, word by word, that each transfer ends with
// done_o, and that a faulting page stops the transfer with fault_o.
module tb_dma_engine;
  import maco_pkg::*;
  localparam logic [PA_W-1:0] OFF = 48'h4000_0000;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, done_o, fault_o, pf_start, lk_valid, lk_hit, lk_fault;
  dma_cmd_t cmd;
  logic [VA_W-1:0] lk_va; logic [PA_W-1:0] lk_pa;
  logic mreq_valid, mreq_ready, mrsp_valid; mem_req_t mreq; mem_rsp_t mrsp;
  logic buf_we, buf_re; buf_sel_e buf_sel;
  logic [10:0] buf_waddr, buf_raddr; logic [WORD_W-1:0] buf_wdata, buf_rdata;
  logic [WORD_W-1:0] bufm [2048];
  int checks = 0, failures = 0;

  dma_engine dut (.*);
  tb_mem_model mem (.clk, .rst_n, .req_valid(mreq_valid), .req_ready(mreq_ready), .req(mreq),
                    .rsp_valid(mrsp_valid), .rsp(mrsp));
  assign lk_hit   = lk_valid;
  assign lk_pa    = lk_va + OFF;
  assign lk_fault = (lk_va >> 12) == 48'h777;
  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (buf_re) buf_rdata <= bufm[buf_raddr];
    if (buf_we) bufm[buf_waddr] <= buf_wdata;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(logic c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  task automatic run(dma_op_e op, logic z, logic [VA_W-1:0] va, int rows, int rw, int stride,
                     int base, output logic f);
    @(negedge clk);
    cmd.op = op; cmd.zero = z; cmd.vaddr = va; cmd.rows = 16'(rows); cmd.row_words = 16'(rw);
    cmd.stride = 32'(stride); cmd.buf_sel = BUF_C; cmd.buf_base = 16'(base); cmd_valid = 1;
    chk(cmd_ready, "ready when idle");
    @(negedge clk); cmd_valid = 0;
    while (!done_o) @(posedge clk);
    #1 f = fault_o;
  endtask
  initial begin
    logic f; int n0;
    cmd_valid = 0; cmd = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(DMA_LOAD, 0, 48'h10_0000, 10, 5, 1000 - 1000 % 32, 7, f);
    chk(!f, "load no fault");
    for (int r = 0; r < 10; r++) for (int w = 0; w < 5; w++)
      chk(bufm[7 + r*5 + w] === mem.peek(48'h10_0000 + OFF + PA_W'(r*992 + w*32)), "load word");
    run(DMA_STORE, 0, 48'h20_0000, 5, 10, 4096, 7, f);
    for (int r = 0; r < 5; r++) for (int w = 0; w < 10; w++)
      chk(mem.peek(48'h20_0000 + OFF + PA_W'(r*4096 + w*32)) === bufm[7 + r*10 + w], "store word");
    run(DMA_STORE, 1, 48'h30_0000, 3, 4, 128, 0, f);
    for (int i = 0; i < 12; i++) chk(mem.peek(48'h30_0000 + OFF + PA_W'(i*32)) === '0, "zero word");
    n0 = mem.n_stash;
    run(DMA_STASH, 0, 48'h40_0000, 4, 4, 4096, 0, f);
    chk(mem.n_stash - n0 == 16, "stash requests");
    run(DMA_LOAD, 0, 48'h776_f00, 4, 8, 256, 0, f);
    chk(f, "fault");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_ade: accelerator data engine with a behavioural memory (random delays,
// out-of-order responses) and a behavioural MMU (fixed walk latency).
// Runs, on both DMA engines at once, 2-D loads of strided matrices that
// cross 4KB pages into model buffers, a store from a buffer, a zero fill and
// a stash, and checks every buffer word and memory word against values
// computed from the address pattern and the page mapping. Then checks that a
// transfer into a faulting page ends with fault_o. Counts mATLB predictions,
// hits, dropped entries and demand walks; each must occur.
module tb_ade;
  import maco_pkg::*;
  localparam logic [PA_W-1:0] OFF = 48'h100000;   // ppn = vpn + OFF
  logic clk = 0, rst_n = 0;
  logic [7:0] page_shift = 8'd12;
  logic [1:0] cmd_valid, cmd_ready, done_o, fault_o;
  dma_cmd_t [1:0] cmd;
  logic mreq_valid, mreq_ready, mrsp_valid;
  mem_req_t mreq; mem_rsp_t mrsp;
  logic ptw_req_valid, ptw_req_ready, ptw_req_id, ptw_rsp_valid, ptw_rsp_id, ptw_rsp_fault;
  logic [VA_W-1:0] ptw_req_vpn, ptw_rsp_vpn;
  logic [PA_W-1:0] ptw_rsp_ppn;
  logic [1:0] buf_we, buf_re;
  buf_sel_e [1:0] buf_sel;
  logic [1:0][10:0] buf_waddr, buf_raddr;
  logic [1:0][WORD_W-1:0] buf_wdata, buf_rdata;
  logic [1:0] ev_predict, ev_hit, ev_drop, ev_demand;
  logic [VA_W-1:0] fault_lo = '1, fault_hi = '1;
  logic [WORD_W-1:0] bufm [3][2048];
  int checks = 0, failures = 0;
  int n_pred = 0, n_hit = 0, n_drop = 0, n_dem = 0;

  ade dut (.*);
  tb_mem_model mem (.clk, .rst_n, .req_valid(mreq_valid), .req_ready(mreq_ready), .req(mreq),
                    .rsp_valid(mrsp_valid), .rsp(mrsp));
  tb_mmu_model mmu (.clk, .rst_n, .fault_lo, .fault_hi,
    .req_valid(ptw_req_valid), .req_ready(ptw_req_ready), .req_vpn(ptw_req_vpn), .req_id(ptw_req_id),
    .rsp_valid(ptw_rsp_valid), .rsp_id(ptw_rsp_id), .rsp_vpn(ptw_rsp_vpn), .rsp_ppn(ptw_rsp_ppn),
    .rsp_fault(ptw_rsp_fault));
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model buffers
  always @(posedge clk) begin
    for (int i = 0; i < 2; i++) begin
      if (buf_re[i]) buf_rdata[i] <= bufm[buf_sel[i]][buf_raddr[i]];
      if (buf_we[i]) bufm[buf_sel[i]][buf_waddr[i]] <= buf_wdata[i];
    end
    for (int i = 0; i < 2; i++) begin
      n_pred += int'(ev_predict[i]); n_hit += int'(ev_hit[i]);
      n_drop += int'(ev_drop[i]); n_dem += int'(ev_demand[i]);
    end
  end

  function automatic logic [PA_W-1:0] pa(logic [VA_W-1:0] va);
    return ((va >> 12) + OFF) << 12 | (va & 48'hfff);
  endfunction

  task automatic chk(logic c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  function automatic dma_cmd_t mk(dma_op_e op, logic z, logic [VA_W-1:0] va, int rows, int rw,
                                  int stride, buf_sel_e bs, int base);
    dma_cmd_t c;
    c.op = op; c.zero = z; c.vaddr = va; c.rows = 16'(rows); c.row_words = 16'(rw);
    c.stride = 32'(stride); c.buf_sel = bs; c.buf_base = 16'(base);
    return c;
  endfunction

  task automatic run2(dma_cmd_t c0, dma_cmd_t c1, output logic [1:0] flt);
    logic [1:0] got;
    @(negedge clk);
    cmd[0] = c0; cmd[1] = c1; cmd_valid = 2'b11;
    @(negedge clk); cmd_valid = 2'b00;
    got = '0; flt = '0;
    while (got != 2'b11) begin
      @(posedge clk); #1;
      for (int i = 0; i < 2; i++) if (done_o[i]) begin got[i] = 1; flt[i] = fault_o[i]; end
    end
  endtask

  initial begin
    logic [1:0] f;
    logic [VA_W-1:0] a_va, b_va, s_va;
    cmd_valid = 0; cmd = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    // A: 64 rows x 8 words (256B) with a 4096+64 byte stride: every row on a new page
    // B: 16 rows x 16 words (512B) with stride 1024: rows share pages, some cross
    a_va = 48'h0000_0040_0f00;
    b_va = 48'h0000_0080_0e00;
    run2(mk(DMA_LOAD, 0, a_va, 64, 8, 4096 + 64, BUF_A, 0),
         mk(DMA_LOAD, 0, b_va, 16, 16, 1024, BUF_B, 100), f);
    chk(f == 2'b00, "no fault on loads");
    for (int r = 0; r < 64; r++) for (int w = 0; w < 8; w++)
      chk(bufm[BUF_A][r*8+w] === mem.peek(pa(a_va + VA_W'(r*(4096+64) + w*32))), $sformatf("A r%0d w%0d", r, w));
    for (int r = 0; r < 16; r++) for (int w = 0; w < 16; w++)
      chk(bufm[BUF_B][100+r*16+w] === mem.peek(pa(b_va + VA_W'(r*1024 + w*32))), $sformatf("B r%0d w%0d", r, w));
    // store buffer A rows to a new place (DMA0), zero fill (DMA1)
    s_va = 48'h0000_00c0_0000;
    run2(mk(DMA_STORE, 0, s_va, 32, 8, 8192, BUF_A, 0),
         mk(DMA_STORE, 1, 48'h0000_0100_0fe0, 4, 3, 512, BUF_C, 0), f);
    chk(f == 2'b00, "no fault on stores");
    for (int r = 0; r < 32; r++) for (int w = 0; w < 8; w++)
      chk(mem.peek(pa(s_va + VA_W'(r*8192 + w*32))) === bufm[BUF_A][r*8+w], "store");
    for (int r = 0; r < 4; r++) for (int w = 0; w < 3; w++)
      chk(mem.peek(pa(48'h0000_0100_0fe0 + VA_W'(r*512 + w*32))) === '0, "zero fill");
    // stash
    begin
      int n0; n0 = mem.n_stash;
      run2(mk(DMA_STASH, 0, 48'h0000_0200_0000, 8, 8, 256, BUF_C, 0),
           mk(DMA_STASH, 0, 48'h0000_0300_0000, 0, 8, 256, BUF_C, 0), f);
      chk(mem.n_stash - n0 == 64, "stash count");
    end
    // fault: page 0x500 faults; DMA0 reads through it
    fault_lo = 48'h500; fault_hi = 48'h501;
    run2(mk(DMA_LOAD, 0, 48'h0000_004f_f000, 4, 8, 4096, BUF_C, 0),
         mk(DMA_LOAD, 0, 48'h0000_0060_0000, 2, 2, 4096, BUF_C, 200), f);
    chk(f == 2'b01, "fault reported on DMA0 only");
    $display("predict=%0d hit=%0d drop=%0d demand=%0d walks=%0d", n_pred, n_hit, n_drop, n_dem, mmu.n_walk);
    chk(n_pred > 0 && n_hit > 0 && n_drop > 0, "mATLB mechanisms used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

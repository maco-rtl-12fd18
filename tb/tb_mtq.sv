// tb_mtq: drives the Master Task Queue with the entry life cycle of the
// source design's state diagram (allocate by process 0, complete, release
// with MA_STATE, reuse by process 1, query with a stale ASID, exception and
// MA_CLEAR) and then with random instructions from three processes plus
// random completions, checking every Rd, every forwarded task and the entry
// array against a behavioural reference model.
module tb_mtq;
  import maco_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, rd_valid, cfg_valid, cfg_ready, rsp_valid;
  mpais_req_t req;
  gpr_t rd;
  task_t cfg;
  task_rsp_t rsp;
  mtq_entry_t [N-1:0] entries_o;
  mtq_entry_t [N-1:0] model;
  int checks = 0, failures = 0;
  int n_alloc = 0, n_full = 0, n_release = 0, n_stale = 0, n_clear = 0, n_exc = 0;

  mtq #(.ENTRIES(N)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", msg, $time); end
  endtask

  // one instruction; returns Rd; model updated here
  task automatic issue(mpais_op_e op, logic [15:0] asid, int maid, output gpr_t r);
    gpr_t exp_rd; int fi; logic alloc;
    alloc = op inside {OP_CFG, OP_MOVE, OP_INIT, OP_STASH};
    @(negedge clk);
    req_valid = 1; req.op = op; req.asid = asid;
    for (int i = 0; i < 6; i++) req.regs[i] = {$urandom, $urandom};
    if (!alloc) req.regs[0] = gpr_t'(maid);
    while (!req_ready) @(negedge clk);
    // model
    fi = -1;
    for (int i = N - 1; i >= 0; i--) if (!model[i].valid) fi = i;
    if (alloc) begin
      if (fi >= 0) begin
        exp_rd = gpr_t'(fi);
        model[fi] = '{valid: 1, done: 0, asid: asid, exc_en: 0, exc_type: 0};
        n_alloc++;
      end else begin
        exp_rd = {1'b1, 63'd0}; n_full++;
      end
    end else begin
      mtq_entry_t e; logic m;
      e = model[maid]; m = e.valid && e.asid == asid;
      exp_rd = {32'd0, e.asid, 7'd0, m, e.exc_type, 1'b0, e.exc_en, e.done, e.valid};
      if (op == OP_STATE && e.valid && !m) n_stale++;
      if (op == OP_STATE && m && e.done) begin model[maid] = '0; n_release++; end
      if (op == OP_CLEAR && m) begin model[maid] = '0; n_clear++; end
    end
    @(negedge clk);
    req_valid = 0;
    chk(rd_valid === 1'b1, "rd_valid");
    chk(rd === exp_rd, $sformatf("rd op %0d got %h exp %h", op, rd, exp_rd));
    if (alloc && fi >= 0) begin
      chk(cfg_valid && cfg.maid == MAID_W'(fi) && cfg.op == op && cfg.regs == req.regs, "cfg forward");
    end
    r = rd;
    chk(entries_o == model, "entry array");
  endtask

  task automatic complete(int maid, logic exc);
    @(negedge clk);
    rsp_valid = 1; rsp.maid = MAID_W'(maid); rsp.exc_en = exc; rsp.exc_type = exc ? EXC_TRANSLATE : EXC_NONE;
    if (model[maid].valid) begin
      model[maid].done = 1; model[maid].exc_en = exc; model[maid].exc_type = rsp.exc_type;
      if (exc) n_exc++;
    end
    @(negedge clk);
    rsp_valid = 0;
    chk(entries_o == model, "entry array after completion");
  endtask

  initial begin
    gpr_t r, m0;
    req_valid = 0; req = '0; cfg_ready = 1; rsp_valid = 0; rsp = '0; model = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    // state diagram walk
    issue(OP_CFG, 16'h0000, 0, m0);                // state 1
    issue(OP_READ, 16'h0000, int'(m0), r);
    chk(r[1:0] == 2'b01, "state 1 valid, not done");
    complete(int'(m0), 0);                          // state 2
    issue(OP_STATE, 16'h0000, int'(m0), r);        // release
    chk(r[1:0] == 2'b11 && r[8], "state 2 seen");
    chk(!entries_o[m0].valid, "released");
    issue(OP_CFG, 16'h0001, 0, r);                  // state 3: reused by process 1
    chk(r == m0, "entry reused");
    issue(OP_STATE, 16'h0000, int'(m0), r);        // process 0 sees mismatch
    chk(r[0] && !r[8] && r[31:16] == 16'h0001, "state 3 ASID mismatch");
    chk(entries_o[m0].valid, "not released by foreign ASID");
    complete(int'(m0), 1);                          // state 4
    issue(OP_READ, 16'h0001, int'(m0), r);
    chk(r[2] && r[7:4] == EXC_TRANSLATE, "state 4 exception");
    issue(OP_CLEAR, 16'h0001, int'(m0), r);
    chk(!entries_o[m0].valid && !entries_o[m0].exc_en, "cleared");
    // random traffic, including a full queue
    for (int i = 0; i < 3000; i++) begin
      int k; logic [15:0] as;
      k = $urandom_range(0, 9); as = 16'($urandom_range(0, 2));
      if (k < 3) issue(mpais_op_e'($urandom_range(0, 3)), as, 0, r);
      else if (k < 6) complete($urandom_range(0, N-1), $urandom_range(0, 3) == 0);
      else if (k < 8) begin
        int q; q = $urandom_range(0, N-1);
        issue(OP_STATE, ($urandom_range(0, 3) != 0) ? model[q].asid : as, q, r);
      end
      else if (k < 9) issue(OP_READ, as, $urandom_range(0, N-1), r);
      else issue(OP_CLEAR, as, $urandom_range(0, N-1), r);
    end
    $display("alloc=%0d full=%0d release=%0d stale=%0d clear=%0d exc=%0d", n_alloc, n_full, n_release, n_stale, n_clear, n_exc);
    chk(n_full > 0 && n_release > 0 && n_stale > 0 && n_clear > 0 && n_exc > 0, "all cases seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_stq: sends tasks with random MAIDs to the Slave Task Queue while a
// model controller accepts them with random delays and finishes them with
// random exceptions. Checks that tasks start strictly in arrival order with
// their own parameters, that only one runs at a time, that a buffered task
// starts automatically when the active one completes, and that every
// completion is reported to the MTQ with the right MAID and exception.
module tb_stq;
  import maco_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  logic cfg_valid, cfg_ready, tsk_valid, tsk_ready, done_i, exc_en_i, rsp_valid;
  logic [EXC_W-1:0] exc_type_i;
  task_t cfg, tsk;
  task_rsp_t rsp;
  logic [N-1:0][1:0] state_o;
  int checks = 0, failures = 0;
  task_t q[$];
  int exp_rsp_maid[$]; logic exp_rsp_exc[$];
  logic busy[N];
  logic running; task_t cur; int run_left;
  int started = 0, queued_max = 0, autostart = 0;

  stq #(.ENTRIES(N)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model controller
  always @(negedge clk) if (rst_n) begin
    done_i = 0;
    if (running) begin
      if (run_left == 0) begin
        done_i = 1; exc_en_i = $urandom_range(0, 2) == 0; exc_type_i = exc_en_i ? EXC_CONFIG : EXC_NONE;
        exp_rsp_maid.push_back(int'(cur.maid)); exp_rsp_exc.push_back(exc_en_i);
        running = 0;
      end else run_left--;
    end
    tsk_ready = !running && !done_i && ($urandom_range(0, 3) != 0);
  end
  always @(posedge clk) if (rst_n) begin
    if (tsk_valid && tsk_ready) begin
      task_t e;
      checks++;
      if (q.size() == 0) begin failures++; $display("start with empty queue"); end
      else begin
        e = q.pop_front();
        if (tsk !== e) begin failures++; $display("task order/params mismatch"); end
      end
      if (q.size() > 0) autostart++;
      running <= 1; cur <= tsk; run_left <= $urandom_range(0, 12); started++;
    end
    if (rsp_valid) begin
      checks++;
      if (exp_rsp_maid.size() == 0 || rsp.maid != MAID_W'(exp_rsp_maid[0]) || rsp.exc_en != exp_rsp_exc[0]) begin
        failures++; $display("rsp mismatch");
      end else begin
        busy[exp_rsp_maid[0]] = 0;
        void'(exp_rsp_maid.pop_front()); void'(exp_rsp_exc.pop_front());
      end
    end
  end

  initial begin
    cfg_valid = 0; cfg = '0; running = 0; done_i = 0; exc_en_i = 0; exc_type_i = 0; tsk_ready = 0;
    for (int i = 0; i < N; i++) busy[i] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      int m;
      @(negedge clk);
      cfg_valid = 0;
      m = $urandom_range(0, N-1);
      if (!busy[m] && $urandom_range(0, 1)) begin
        cfg_valid = 1; cfg.op = mpais_op_e'($urandom_range(0, 3)); cfg.maid = MAID_W'(m);
        for (int r = 0; r < 6; r++) cfg.regs[r] = {$urandom, $urandom};
        busy[m] = 1; q.push_back(cfg);
        if (q.size() > queued_max) queued_max = q.size();
      end
    end
    @(negedge clk); cfg_valid = 0;
    repeat (200) @(negedge clk);
    checks++;
    if (q.size() != 0 || exp_rsp_maid.size() != 0) begin failures++; $display("tasks left over"); end
    $display("started=%0d queued_max=%0d autostart=%0d", started, queued_max, autostart);
    checks++;
    if (autostart == 0 || started < 20) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

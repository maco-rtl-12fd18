// tb_sram_buffer: writes random words to random addresses, reads them back
// and checks data and the one-cycle read latency against a reference array;
// also checks read-during-write returns the old word.
module tb_sram_buffer;
  localparam int D = 2048, W = 256;
  logic clk = 0, we = 0, re = 0;
  logic [10:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic [W-1:0] ref_mem [D];
  logic         ref_ok [D];
  int checks = 0, failures = 0;
  sram_buffer #(.DEPTH(D), .WIDTH(W)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int i = 0; i < W/32; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction
  initial begin
    for (int i = 0; i < D; i++) ref_ok[i] = 0;
    for (int i = 0; i < 6000; i++) begin
      @(negedge clk);
      we = $urandom_range(0, 1); waddr = 11'($urandom); wdata = rnd();
      re = 1; raddr = (i % 3 == 0) ? waddr : 11'($urandom);
      begin
        logic [W-1:0] expv;
        logic         known;
        logic [10:0]  ra;
        expv = ref_mem[raddr]; known = ref_ok[raddr]; ra = raddr;
        @(posedge clk);
        if (we) begin ref_mem[waddr] = wdata; ref_ok[waddr] = 1; end
        #1;
        if (known) begin
          checks++;
          if (rdata !== expv) begin failures++; $display("addr %0d mismatch", ra); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

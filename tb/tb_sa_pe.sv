// tb_sa_pe: self-checking test of one processing element.
// Preloads B, then applies A and C operands in all three precision modes and
// compares P = A*B + C against references computed with the simulator's
// real arithmetic (FP64, operands chosen so the product is exact and only
// the final add rounds) or with small integers that every format holds
// exactly (FP32x2, FP16x4). Also checks that A is forwarded one cycle later.
module tb_sa_pe;
  import maco_pkg::*;
  logic clk = 0, rst_n = 0;
  fp_mode_e mode;
  logic load_b;
  logic [63:0] a_i, top_i, a_o, bot_o;
  int checks = 0, failures = 0;

  sa_pe dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // encode a small integer into a float format with EW/MW fields
  function automatic logic [63:0] enc(int v, int ew, int mw);
    logic [63:0] r; int m, e; logic s;
    r = '0;
    if (v == 0) return r;
    s = v < 0; m = s ? -v : v; e = 0;
    while ((m >> e) > 1) e++;
    r[ew+mw] = s;
    r[mw +: 16] = 16'(e + (1 << (ew-1)) - 1);
    r[ew+mw] = s;
    for (int i = 0; i < mw; i++)
      r[i] = (i - mw + e >= 0) ? m[i-mw+e] : 1'b0;
    // clear exponent bits above ew
    for (int i = ew+mw+1; i < 64; i++) r[i] = 1'b0;
    r[ew+mw] = s;
    return r;
  endfunction

  task automatic preload(logic [63:0] b);
    @(negedge clk); load_b = 1; top_i = b;
    @(negedge clk); load_b = 0;
    if (bot_o !== b) begin failures++; $display("preload passdown mismatch"); end
    checks++;
  endtask

  task automatic apply(logic [63:0] a, logic [63:0] c, logic [63:0] exp);
    @(negedge clk); a_i = a; top_i = c;
    @(negedge clk);
    checks++;
    if (bot_o !== exp || a_o !== a) begin
      failures++;
      $display("mode %0d a=%h c=%h got %h exp %h (a_o %h)", mode, a, c, bot_o, exp, a_o);
    end
  endtask

  initial begin
    real ra, rb, rc;
    logic [63:0] b, a, c, e;
    mode = MODE_FP64; load_b = 0; a_i = '0; top_i = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---------------- FP64
    for (int t = 0; t < 200; t++) begin
      rb = $itor($urandom_range(1, (1 << 26) - 1)) * (2.0 ** ($urandom_range(0, 40) - 20.0));
      if (t % 3 == 0) rb = -rb;
      b = $realtobits(rb);
      preload(b);
      for (int u = 0; u < 4; u++) begin
        ra = $itor($urandom_range(1, (1 << 26) - 1)) * (2.0 ** ($urandom_range(0, 40) - 20.0));
        if (u % 2) ra = -ra;
        rc = $itor($urandom) * (2.0 ** ($urandom_range(0, 60) - 30.0));
        if (u == 3) rc = -(ra * rb);            // exact cancellation
        if (u == 2 && t % 2) rc = -rc;
        apply($realtobits(ra), $realtobits(rc), $realtobits(ra * rb + rc));
      end
    end
    // ---------------- FP32 x2
    mode = MODE_FP32X2;
    for (int t = 0; t < 100; t++) begin
      int bv[2], av[2], cv[2];
      for (int l = 0; l < 2; l++) bv[l] = $urandom_range(0, 2000) - 1000;
      b = {enc(bv[1], 8, 23)[31:0], enc(bv[0], 8, 23)[31:0]};
      preload(b);
      for (int u = 0; u < 4; u++) begin
        for (int l = 0; l < 2; l++) begin
          av[l] = $urandom_range(0, 2000) - 1000; cv[l] = $urandom_range(0, 200000) - 100000;
        end
        a = {enc(av[1], 8, 23)[31:0], enc(av[0], 8, 23)[31:0]};
        c = {enc(cv[1], 8, 23)[31:0], enc(cv[0], 8, 23)[31:0]};
        e = {enc(av[1]*bv[1]+cv[1], 8, 23)[31:0], enc(av[0]*bv[0]+cv[0], 8, 23)[31:0]};
        apply(a, c, e);
      end
    end
    // ---------------- FP16 x4
    mode = MODE_FP16X4;
    for (int t = 0; t < 100; t++) begin
      int bv[4], av[4], cv[4];
      for (int l = 0; l < 4; l++) bv[l] = $urandom_range(0, 30) - 15;
      for (int l = 0; l < 4; l++) b[16*l +: 16] = enc(bv[l], 5, 10)[15:0];
      preload(b);
      for (int u = 0; u < 4; u++) begin
        for (int l = 0; l < 4; l++) begin
          av[l] = $urandom_range(0, 30) - 15; cv[l] = $urandom_range(0, 400) - 200;
          a[16*l +: 16] = enc(av[l], 5, 10)[15:0];
          c[16*l +: 16] = enc(cv[l], 5, 10)[15:0];
          e[16*l +: 16] = enc(av[l]*bv[l]+cv[l], 5, 10)[15:0];
        end
        apply(a, c, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_systolic_array: checks a 4x4 array on FP64 and FP16x4 tiles.
// B is preloaded, then rows of A and C stream in back to back; every result
// row must equal the integer reference A*B + C (small integers, exact in
// every format) and arrive exactly ROWS+COLS-1 cycles after its input row.
module tb_systolic_array;
  import maco_pkg::*;
  localparam int R = 4, C = 4, LAT = R + C - 1, MROWS = 12;
  logic clk = 0, rst_n = 0;
  fp_mode_e mode;
  logic load_b, v_i, v_o;
  logic [C-1:0][63:0] b_i, c_i, p_o;
  logic [R-1:0][63:0] a_i;
  int checks = 0, failures = 0, cyc = 0;
  int A[MROWS][R][4], B[R][C][4], Cm[MROWS][C][4];
  int in_cyc[MROWS], out_idx;

  systolic_array #(.ROWS(R), .COLS(C)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] enc(int v, int ew, int mw);
    logic [63:0] r; int m, e;
    r = '0;
    if (v == 0) return r;
    m = v < 0 ? -v : v; e = 0;
    while ((m >> e) > 1) e++;
    r[mw +: 16] = 16'(e + (1 << (ew-1)) - 1);
    for (int i = 0; i < mw; i++) r[i] = (i - mw + e >= 0) ? m[i-mw+e] : 1'b0;
    for (int i = ew+mw; i < 64; i++) r[i] = 1'b0;
    r[ew+mw] = v < 0;
    return r;
  endfunction

  function automatic logic [63:0] pack(int v[4], fp_mode_e md);
    logic [63:0] w;
    if (md == MODE_FP64) return enc(v[0], 11, 52);
    for (int l = 0; l < 4; l++) w[16*l +: 16] = enc(v[l], 5, 10)[15:0];
    return w;
  endfunction

  // result checker
  always @(negedge clk) if (rst_n && v_o) begin
    for (int n = 0; n < C; n++) begin
      int s[4];
      for (int l = 0; l < 4; l++) begin
        s[l] = Cm[out_idx][n][l];
        for (int r = 0; r < R; r++) s[l] += A[out_idx][r][l] * B[r][n][l];
      end
      checks++;
      if (p_o[n] !== pack(s, mode)) begin
        failures++; $display("row %0d col %0d got %h exp %h", out_idx, n, p_o[n], pack(s, mode));
      end
    end
    checks++;
    if (cyc - in_cyc[out_idx] != LAT) begin
      failures++; $display("latency %0d", cyc - in_cyc[out_idx]);
    end
    out_idx++;
  end

  task automatic run(fp_mode_e md);
    int lanes = (md == MODE_FP64) ? 1 : 4;
    mode = md; out_idx = 0;
    for (int r = 0; r < R; r++) for (int n = 0; n < C; n++) for (int l = 0; l < 4; l++)
      B[r][n][l] = (l < lanes) ? $urandom_range(0, 14) - 7 : 0;
    for (int m = 0; m < MROWS; m++) for (int l = 0; l < 4; l++) begin
      for (int r = 0; r < R; r++) A[m][r][l] = (l < lanes) ? $urandom_range(0, 14) - 7 : 0;
      for (int n = 0; n < C; n++) Cm[m][n][l] = (l < lanes) ? $urandom_range(0, 100) - 50 : 0;
    end
    // preload, bottom row first
    for (int k = R - 1; k >= 0; k--) begin
      @(negedge clk); load_b = 1;
      for (int n = 0; n < C; n++) begin
        int t[4]; for (int l = 0; l < 4; l++) t[l] = B[k][n][l];
        b_i[n] = pack(t, md);
      end
    end
    @(negedge clk); load_b = 0;
    for (int m = 0; m < MROWS; m++) begin
      v_i = 1;
      for (int r = 0; r < R; r++) begin
        int t[4]; for (int l = 0; l < 4; l++) t[l] = A[m][r][l];
        a_i[r] = pack(t, md);
      end
      for (int n = 0; n < C; n++) begin
        int t[4]; for (int l = 0; l < 4; l++) t[l] = Cm[m][n][l];
        c_i[n] = pack(t, md);
      end
      in_cyc[m] = cyc;
      @(negedge clk);
    end
    v_i = 0;
    repeat (LAT + 3) @(negedge clk);
    checks++;
    if (out_idx != MROWS) begin failures++; $display("only %0d rows out", out_idx); end
  endtask

  initial begin
    load_b = 0; v_i = 0; a_i = '0; c_i = '0; b_i = '0; mode = MODE_FP64;
    repeat (3) @(negedge clk); rst_n = 1;
    run(MODE_FP64);
    run(MODE_FP16X4);
    run(MODE_FP64);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_noc_router: router at mesh position (1,1) of a 4x4 mesh. Random flits
// with random destinations and virtual channels enter all five ports while
// the outputs apply random per-VC back-pressure. Checks that every flit
// leaves on the X-Y output port for its destination, on its own VC, in order
// within each (input, VC) stream, never while that VC is not ready, and that
// no flit is lost. Also checks that a blocked VC does not stop the other VC
// on the same link.
module tb_noc_router;
  import maco_pkg::*;
  localparam int NP = 5, NVC = 2;
  logic clk = 0, rst_n = 0;
  logic [NP-1:0] in_valid, out_valid; logic [NP-1:0][0:0] in_vc, out_vc;
  flit_t [NP-1:0] in_flit, out_flit;
  logic [NP-1:0][NVC-1:0] in_ready, out_ready;
  logic ev_route;
  int checks = 0, failures = 0, sent = 0, got = 0, routed = 0;
  logic block_vc0 = 0;
  flit_t exp_q[NP][NVC][NP][$];   // [out][vc][in]

  noc_router #(.NODE_ID(5)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(logic c, string m);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask
  function automatic int xy_port(logic [3:0] d);
    int dx = d % 4, dy = d / 4;
    if (dx > 1) return 2; if (dx < 1) return 4;
    if (dy > 1) return 3; if (dy < 1) return 1;
    return 0;
  endfunction

  logic driving = 0;
  always @(negedge clk) begin
    for (int o = 0; o < NP; o++)
      for (int v = 0; v < NVC; v++)
        out_ready[o][v] = ($urandom_range(0, 3) != 0) && !(v == 0 && block_vc0);
    for (int p = 0; p < NP; p++) begin
      in_valid[p] = 0;
      if (driving && $urandom_range(0, 2) != 0) begin
        int v;
        v = $urandom_range(0, 1);
        if (!(v == 0 && block_vc0) && in_ready[p][v]) begin
          in_valid[p] = 1; in_vc[p] = 1'(v);
          in_flit[p].src  = 4'(p); in_flit[p].dst = 4'($urandom_range(0, 15));
          in_flit[p].kind = mem_kind_e'($urandom_range(0, 3));
          in_flit[p].addr = {$urandom, $urandom}; in_flit[p].data = {8{$urandom}};
          in_flit[p].tag  = 16'(sent);
        end
      end
    end
  end
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < NP; p++) if (in_valid[p]) begin
      chk(in_ready[p][in_vc[p]], "sender respects ready");
      exp_q[xy_port(in_flit[p].dst)][in_vc[p]][p].push_back(in_flit[p]);
      sent++;
    end
    for (int o = 0; o < NP; o++) if (out_valid[o]) begin
      int src;
      logic ok;
      ok = 0;
      chk(out_ready[o][out_vc[o]], "output only into a ready VC");
      // match the head of the stream from the flit's input port
      src = int'(out_flit[o].src);
      if (src < NP && exp_q[o][out_vc[o]][src].size() > 0) begin
        ok = (exp_q[o][out_vc[o]][src][0] == out_flit[o]);
        void'(exp_q[o][out_vc[o]][src].pop_front());
      end
      chk(ok, $sformatf("flit on port %0d vc %0d in order", o, out_vc[o]));
      got++;
      if (o != 0) routed++;
    end
  end

  initial begin
    in_valid = '0; in_vc = '0; in_flit = '0; out_ready = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    driving = 1;
    repeat (3000) @(negedge clk);
    // VC0 blocked everywhere: VC1 traffic must still flow
    block_vc0 = 1;
    begin
      int g0;
      repeat (20) @(negedge clk);
      g0 = got;
      repeat (500) @(negedge clk);
      chk(got - g0 > 200, "VC1 flows while VC0 is blocked");
    end
    block_vc0 = 0;
    driving = 0;
    repeat (200) @(negedge clk);
    chk(sent == got && sent > 5000, $sformatf("all flits delivered (%0d/%0d)", got, sent));
    chk(routed > 0, "flits routed through mesh ports");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// mmae: matrix multiplication acceleration engine of one compute node.
//
// Wires together the Slave Task Queue, the Accelerator Controller, the
// Accelerator Data Engine (DMA0, DMA1, mATLB), the A, B and C buffers and
// the ROWS x COLS systolic array, as in the engine diagram of the source
// design. Tasks arrive from the CPU's Master Task Queue on the cfg port and
// completions return on rsp. The engine reaches memory (the L3 cache through
// the NOC) only through its own memory port and asks the CPU's MMU for page
// walks through the ptw port; it has no access to the CPU caches.
//
// Buffer port sharing (this design's choice): the DMA engines write the
// buffers and read the C buffer for stores; the controller reads all three
// and writes the C buffer during computation. The controller never runs a
// DMA transfer and the array on the same buffer at once; assertions check it.
module mmae
  import maco_pkg::*;
#(
  parameter int unsigned ROWS    = 4,
  parameter int unsigned COLS    = 4,
  parameter int unsigned DEPTH   = 2048,
  parameter int unsigned ENTRIES = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  // task interface with the MTQ
  input  logic            cfg_valid,
  output logic            cfg_ready,
  input  task_t           cfg,
  output logic            rsp_valid,
  output task_rsp_t       rsp,
  // memory port
  output logic            mreq_valid,
  input  logic            mreq_ready,
  output mem_req_t        mreq,
  input  logic            mrsp_valid,
  input  mem_rsp_t        mrsp,
  // MMU walk port
  output logic            ptw_req_valid,
  input  logic            ptw_req_ready,
  output logic [VA_W-1:0] ptw_req_vpn,
  output logic            ptw_req_id,
  input  logic            ptw_rsp_valid,
  input  logic            ptw_rsp_id,
  input  logic [VA_W-1:0] ptw_rsp_vpn,
  input  logic [PA_W-1:0] ptw_rsp_ppn,
  input  logic            ptw_rsp_fault,
  // monitoring
  output logic            busy_o,
  output logic [ENTRIES-1:0][1:0] stq_state_o,
  output logic            ev_pass,
  output logic            ev_preload,
  output logic [1:0]      ev_predict,
  output logic [1:0]      ev_hit,
  output logic [1:0]      ev_drop,
  output logic [1:0]      ev_demand
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic             tsk_valid, tsk_ready, ac_done, ac_exc;
  logic [EXC_W-1:0] ac_exc_t;
  task_t            tsk;
  logic [7:0]       page_shift;
  logic [1:0]       dma_valid, dma_ready, dma_done, dma_fault;
  dma_cmd_t [1:0]   dma_cmd;
  logic [1:0]           d_we, d_re;
  buf_sel_e [1:0]       d_sel;
  logic [1:0][AW-1:0]   d_waddr, d_raddr;
  logic [1:0][WORD_W-1:0] d_wdata, d_rdata;
  logic             a_re, b_re, c_re, c_we_ac;
  logic [AW-1:0]    a_raddr, b_raddr, c_raddr, c_waddr_ac;
  logic [WORD_W-1:0] a_rdata, b_rdata, c_rdata, c_wdata_ac;
  fp_mode_e         sa_mode;
  logic             sa_load_b, sa_v, sa_v_o;
  logic [COLS-1:0][63:0] sa_b, sa_c, sa_p;
  logic [ROWS-1:0][63:0] sa_a;

  stq #(.ENTRIES(ENTRIES)) u_stq (
    .clk, .rst_n, .cfg_valid, .cfg_ready, .cfg,
    .tsk_valid, .tsk_ready, .tsk,
    .done_i(ac_done), .exc_en_i(ac_exc), .exc_type_i(ac_exc_t),
    .rsp_valid, .rsp, .state_o(stq_state_o)
  );

  accel_controller #(.ROWS(ROWS), .COLS(COLS), .DEPTH(DEPTH)) u_ac (
    .clk, .rst_n, .tsk_valid, .tsk_ready, .tsk,
    .done_o(ac_done), .exc_en_o(ac_exc), .exc_type_o(ac_exc_t),
    .page_shift, .dma_valid, .dma_ready, .dma_cmd, .dma_done, .dma_fault,
    .a_re, .a_raddr, .a_rdata, .b_re, .b_raddr, .b_rdata,
    .c_re, .c_raddr, .c_rdata, .c_we(c_we_ac), .c_waddr(c_waddr_ac), .c_wdata(c_wdata_ac),
    .sa_mode, .sa_load_b, .sa_b, .sa_v, .sa_a, .sa_c, .sa_v_o, .sa_p,
    .busy_o, .ev_pass
  );

  ade #(.BUF_AW(AW)) u_ade (
    .clk, .rst_n, .page_shift,
    .cmd_valid(dma_valid), .cmd_ready(dma_ready), .cmd(dma_cmd),
    .done_o(dma_done), .fault_o(dma_fault),
    .mreq_valid, .mreq_ready, .mreq, .mrsp_valid, .mrsp,
    .ptw_req_valid, .ptw_req_ready, .ptw_req_vpn, .ptw_req_id,
    .ptw_rsp_valid, .ptw_rsp_id, .ptw_rsp_vpn, .ptw_rsp_ppn, .ptw_rsp_fault,
    .buf_we(d_we), .buf_sel(d_sel), .buf_waddr(d_waddr), .buf_wdata(d_wdata),
    .buf_re(d_re), .buf_raddr(d_raddr), .buf_rdata(d_rdata),
    .ev_predict, .ev_hit, .ev_drop, .ev_demand
  );

  // buffer write-port selection
  logic [2:0]             w_en;
  logic [2:0][AW-1:0]     w_addr;
  logic [2:0][WORD_W-1:0] w_data;
  logic                   c_re_m;
  logic [AW-1:0]          c_raddr_m;
  always_comb begin
    for (int b = 0; b < 3; b++) begin
      w_en[b] = 1'b0; w_addr[b] = '0; w_data[b] = '0;
      for (int i = 0; i < 2; i++) begin
        if (d_we[i] && d_sel[i] == buf_sel_e'(b)) begin
          w_en[b] = 1'b1; w_addr[b] = d_waddr[i]; w_data[b] = d_wdata[i];
        end
      end
    end
    if (c_we_ac) begin
      w_en[2] = 1'b1; w_addr[2] = c_waddr_ac; w_data[2] = c_wdata_ac;
    end
    c_re_m    = c_re | d_re[0] | d_re[1];
    c_raddr_m = d_re[1] ? d_raddr[1] : d_re[0] ? d_raddr[0] : c_raddr;
  end
  assign d_rdata = {c_rdata, c_rdata};

  sram_buffer #(.DEPTH(DEPTH), .WIDTH(WORD_W)) u_abuf (
    .clk, .we(w_en[0]), .waddr(w_addr[0]), .wdata(w_data[0]), .re(a_re), .raddr(a_raddr), .rdata(a_rdata));
  sram_buffer #(.DEPTH(DEPTH), .WIDTH(WORD_W)) u_bbuf (
    .clk, .we(w_en[1]), .waddr(w_addr[1]), .wdata(w_data[1]), .re(b_re), .raddr(b_raddr), .rdata(b_rdata));
  sram_buffer #(.DEPTH(DEPTH), .WIDTH(WORD_W)) u_cbuf (
    .clk, .we(w_en[2]), .waddr(w_addr[2]), .wdata(w_data[2]), .re(c_re_m), .raddr(c_raddr_m), .rdata(c_rdata));

  systolic_array #(.ROWS(ROWS), .COLS(COLS)) u_sa (
    .clk, .rst_n, .mode(sa_mode), .load_b(sa_load_b), .b_i(sa_b), .v_i(sa_v),
    .a_i(sa_a), .c_i(sa_c), .v_o(sa_v_o), .p_o(sa_p)
  );

  assign ev_preload = sa_load_b;

  a_c_write_excl: assert property (@(posedge clk) disable iff (!rst_n)
    !(c_we_ac && ((d_we[0] && d_sel[0] == BUF_C) || (d_we[1] && d_sel[1] == BUF_C))));
  a_c_read_excl: assert property (@(posedge clk) disable iff (!rst_n)
    !(c_re && (d_re[0] || d_re[1])));
endmodule

// sa_pe: one processing element of the MACO systolic array.
//
// The PE keeps a stationary B operand. An A operand enters from the left and
// is forwarded to the right one cycle later; a partial sum C enters from the
// top and the result P = A*B + C leaves at the bottom one cycle later. The
// 64-bit operands are SIMD lanes: one FP64 lane, two FP32 lanes or four
// FP16 lanes, each lane computing independently (P_l = A_l*B_l + C_l), as
// the PE drawings of the source design show for its three modes.
//
// B preload reuses the top input (the source design labels it "B/C"):
// while load_b is high the PE captures top_i into its B register and also
// forwards it downwards, so holding load_b for ROWS cycles and feeding the
// bottom row first fills a whole column. Lane packing (lane l in bits
// [l*w +: w]), fused rounding and the separate arithmetic units per
// precision are this design's choices.
//
// Timing: a_o and bot_o are registered; one cycle from input to output.
module sa_pe
  import maco_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  fp_mode_e    mode,
  input  logic        load_b,
  input  logic [63:0] a_i,
  input  logic [63:0] top_i,
  output logic [63:0] a_o,
  output logic [63:0] bot_o
);
  logic [63:0] b_q;
  logic [63:0] p64, p32, p16;

  fp_fma #(.EW(11), .MW(52)) u_f64 (.a(a_i), .b(b_q), .c(top_i), .y(p64));

  for (genvar l = 0; l < 2; l++) begin : g_f32
    fp_fma #(.EW(8), .MW(23)) u_f32 (
      .a(a_i[32*l +: 32]), .b(b_q[32*l +: 32]), .c(top_i[32*l +: 32]), .y(p32[32*l +: 32]));
  end
  for (genvar l = 0; l < 4; l++) begin : g_f16
    fp_fma #(.EW(5), .MW(10)) u_f16 (
      .a(a_i[16*l +: 16]), .b(b_q[16*l +: 16]), .c(top_i[16*l +: 16]), .y(p16[16*l +: 16]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_q   <= '0;
      a_o   <= '0;
      bot_o <= '0;
    end else begin
      a_o <= a_i;
      if (load_b) begin
        b_q   <= top_i;
        bot_o <= top_i;
      end else begin
        unique case (mode)
          MODE_FP32X2: bot_o <= p32;
          MODE_FP16X4: bot_o <= p16;
          default:     bot_o <= p64;
        endcase
      end
    end
  end
endmodule

// systolic_array: ROWS x COLS grid of sa_pe in B-stationary dataflow.
//
// Computes, for every streamed row m, P[m][n] = sum_r A[m][r]*B[r][n] + C[m][n]
// over the ROWS array rows, per SIMD lane. B (a ROWS x COLS tile of 64-bit
// lane words) is preloaded down the columns: hold load_b for ROWS cycles and
// present B rows bottom row first on b_i. Then each cycle one row of A
// (a_i[r] = A[m][r]) and one row of C (c_i[n] = C[m][n]) may enter, marked
// by v_i. A flows left to right, partial sums flow top to bottom, as in the
// source design's tile-GEMM mapping.
//
// The edge skew (row r of A delayed r cycles, column n of C delayed n cycles)
// and the output deskew (column n delayed COLS-1-n cycles) are this
// design's choice, so callers see aligned rows. Result row m leaves on p_o
// with v_o exactly LAT = ROWS + COLS - 1 cycles after it entered.
module systolic_array
  import maco_pkg::*;
#(
  parameter int unsigned ROWS = 4,
  parameter int unsigned COLS = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  fp_mode_e               mode,
  input  logic                   load_b,
  input  logic [COLS-1:0][63:0]  b_i,
  input  logic                   v_i,
  input  logic [ROWS-1:0][63:0]  a_i,
  input  logic [COLS-1:0][63:0]  c_i,
  output logic                   v_o,
  output logic [COLS-1:0][63:0]  p_o
);
  localparam int unsigned LAT = ROWS + COLS - 1;

  logic [ROWS-1:0][COLS:0][63:0] a_h;    // horizontal A wires
  logic [ROWS:0][COLS-1:0][63:0] v_w;    // vertical partial-sum wires
  logic [LAT-1:0]                v_sr;

  // A skew: row r delayed r cycles
  for (genvar r = 0; r < ROWS; r++) begin : g_askew
    if (r == 0) begin : g_0
      assign a_h[r][0] = a_i[r];
    end else begin : g_d
      logic [r-1:0][63:0] sr;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) sr <= '0;
        else begin
          sr[0] <= a_i[r];
          for (int i = 1; i < r; i++) sr[i] <= sr[i-1];
        end
      end
      assign a_h[r][0] = sr[r-1];
    end
  end

  // C skew: column n delayed n cycles; B preload bypasses the skew
  for (genvar n = 0; n < COLS; n++) begin : g_cskew
    logic [63:0] c_sk;
    if (n == 0) begin : g_0
      assign c_sk = c_i[n];
    end else begin : g_d
      logic [n-1:0][63:0] sr;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) sr <= '0;
        else begin
          sr[0] <= c_i[n];
          for (int i = 1; i < n; i++) sr[i] <= sr[i-1];
        end
      end
      assign c_sk = sr[n-1];
    end
    assign v_w[0][n] = load_b ? b_i[n] : c_sk;
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar n = 0; n < COLS; n++) begin : g_col
      sa_pe u_pe (
        .clk, .rst_n, .mode, .load_b,
        .a_i  (a_h[r][n]),
        .top_i(v_w[r][n]),
        .a_o  (a_h[r][n+1]),
        .bot_o(v_w[r+1][n])
      );
    end
  end

  // output deskew: column n delayed COLS-1-n cycles
  for (genvar n = 0; n < COLS; n++) begin : g_deskew
    if (n == COLS - 1) begin : g_0
      assign p_o[n] = v_w[ROWS][n];
    end else begin : g_d
      logic [COLS-2-n:0][63:0] sr;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) sr <= '0;
        else begin
          sr[0] <= v_w[ROWS][n];
          for (int i = 1; i < int'(COLS) - 1 - n; i++) sr[i] <= sr[i-1];
        end
      end
      assign p_o[n] = sr[COLS-2-n];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v_sr <= '0;
    else        v_sr <= {v_sr[LAT-2:0], v_i & ~load_b};
  end
  assign v_o = v_sr[LAT-1];

  // the unused right-hand A outputs of the last column
  logic unused_a;
  always_comb begin
    unused_a = 1'b0;
    for (int r = 0; r < ROWS; r++) unused_a = unused_a ^ (^a_h[r][COLS]);
  end
endmodule

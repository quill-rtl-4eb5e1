// systolic_gemm: output-stationary systolic GEMM engine (C = A * B).
//
// SIZE x SIZE processing elements, each holding one 32-bit accumulator of C.
// Each cycle with in_valid the host presents column k of A (a_col[i] =
// A[i][k], signed 8-bit) and row k of B (b_row[j] = B[k][j]).  Row i of A is
// delayed by i cycles and column j of B by j cycles at the edge of the array;
// operands then move one PE right (A) or down (B) per cycle, so PE(i,j)
// meets A[i][k] and B[k][j] in the same cycle and accumulates their product.
// Cycles without in_valid inject zeros.  The result of a K-deep product is
// complete 2*(SIZE-1)+1 cycles after the last input; clear zeroes every
// accumulator (and the pipeline).  c_row returns row c_sel of C.
// The accelerator has two of these engines, 32x32 before the attention
// (projections and scoring) and 64x64 after it (FFN).  The sizes are the
// paper's; the dataflow (output-stationary) and the interface are this
// design's choices, since the paper only calls them standard systolic GEMMs.
module systolic_gemm #(
  parameter int unsigned SIZE = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic                       in_valid,
  input  logic signed [7:0]          a_col [SIZE],
  input  logic signed [7:0]          b_row [SIZE],
  input  logic [$clog2(SIZE)-1:0]    c_sel,
  output logic signed [31:0]         c_row [SIZE]
);
  // edge skew: a_dl[i][d] is A row i delayed by d+1 cycles (b_dl likewise)
  logic signed [7:0] a_dl [SIZE][SIZE];
  logic signed [7:0] b_dl [SIZE][SIZE];
  logic signed [7:0] a_pe [SIZE][SIZE];   // operand held in PE(i,j), moving right
  logic signed [7:0] b_pe [SIZE][SIZE];   // operand held in PE(i,j), moving down
  logic signed [31:0] acc [SIZE][SIZE];

  // operands entering the array edge: row i of A after i cycles of delay,
  // column j of B after j cycles
  logic signed [7:0] a_edge [SIZE];
  logic signed [7:0] b_edge [SIZE];
  always_comb begin
    a_edge[0] = in_valid ? a_col[0] : 8'sd0;
    b_edge[0] = in_valid ? b_row[0] : 8'sd0;
    for (int i = 1; i < SIZE; i++) begin
      a_edge[i] = a_dl[i][i-1];
      b_edge[i] = b_dl[i][i-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < SIZE; i++)
        for (int d = 0; d < SIZE; d++) begin
          a_dl[i][d] <= '0; b_dl[i][d] <= '0;
        end
    end else if (clear) begin
      for (int i = 0; i < SIZE; i++)
        for (int d = 0; d < SIZE; d++) begin
          a_dl[i][d] <= '0; b_dl[i][d] <= '0;
        end
    end else begin
      for (int i = 0; i < SIZE; i++) begin
        // stage 0 takes the input, stage d is d+1 cycles old
        a_dl[i][0] <= in_valid ? a_col[i] : 8'sd0;
        b_dl[i][0] <= in_valid ? b_row[i] : 8'sd0;
        for (int d = 1; d < SIZE; d++) begin
          a_dl[i][d] <= a_dl[i][d-1];
          b_dl[i][d] <= b_dl[i][d-1];
        end
      end
    end
  end

  // 8 x 8 -> 16-bit signed product of one PE
  function automatic logic signed [15:0] prod(input logic signed [7:0] a, b);
    return 16'(a) * 16'(b);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < SIZE; i++)
        for (int j = 0; j < SIZE; j++) begin
          a_pe[i][j] <= '0; b_pe[i][j] <= '0; acc[i][j] <= '0;
        end
    end else if (clear) begin
      for (int i = 0; i < SIZE; i++)
        for (int j = 0; j < SIZE; j++) begin
          a_pe[i][j] <= '0; b_pe[i][j] <= '0; acc[i][j] <= '0;
        end
    end else begin
      for (int i = 0; i < SIZE; i++)
        for (int j = 0; j < SIZE; j++) begin
          a_pe[i][j] <= (j == 0) ? a_edge[i] : a_pe[i][j-1];
          b_pe[i][j] <= (i == 0) ? b_edge[j] : b_pe[i-1][j];
          acc[i][j]  <= acc[i][j] + 32'(prod(((j == 0) ? a_edge[i] : a_pe[i][j-1]),
                                             ((i == 0) ? b_edge[j] : b_pe[i-1][j])));
        end
    end
  end

  always_comb
    for (int j = 0; j < SIZE; j++) c_row[j] = acc[c_sel][j];
endmodule

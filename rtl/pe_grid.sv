// pe_grid: the ROWS x COLS systolic array of PEs ("grid").
//
// A vectors enter the left column, one per row, and move one PE to the right
// per cycle together with their tag (valid, first, ia, ib); B vectors enter
// the top row, one per column, and move one PE down per cycle. The feeders
// skew the inputs (row r and column c delayed by r and c cycles) so that
// PE(r,c) sees matching A and B vectors r+c cycles after the unskewed issue.
// Every PE keeps its own IL_A x IL_B output elements (output stationary).
// After a tile, the drain selects one PE row (rd_row) and one accumulator
// (rd_ia, rd_ib) and reads COLS results at once through rd_data, a
// combinational multiplexer. The array and its skewed systolic flow follow
// the paper's "2D systolic array"; the read-out multiplexer is this
// design's choice.
module pe_grid
  import mlp_pkg::*;
#(
  parameter int unsigned ROWS = 4,
  parameter int unsigned COLS = 4,
  parameter int unsigned VEC  = 8,
  parameter int unsigned IL_A = 4,
  parameter int unsigned IL_B = 4,
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned IAW = (IL_A > 1) ? $clog2(IL_A) : 1,
  localparam int unsigned IBW = (IL_B > 1) ? $clog2(IL_B) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [VEC-1:0][31:0]  a_in   [ROWS],
  input  pe_tag_t               tag_in [ROWS],
  input  logic [VEC-1:0][31:0]  b_in   [COLS],
  input  logic [RW-1:0]         rd_row,
  input  logic [IAW-1:0]        rd_ia,
  input  logic [IBW-1:0]        rd_ib,
  output fp32_t                 rd_data [COLS]
);

  logic [VEC-1:0][31:0] a_w   [ROWS][COLS+1];
  pe_tag_t              tag_w [ROWS][COLS+1];
  logic [VEC-1:0][31:0] b_w   [ROWS+1][COLS];
  fp32_t                res   [ROWS][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_left
    assign a_w[r][0]   = a_in[r];
    assign tag_w[r][0] = tag_in[r];
  end
  for (genvar c = 0; c < COLS; c++) begin : g_top
    assign b_w[0][c] = b_in[c];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      pe #(.VEC(VEC), .IL_A(IL_A), .IL_B(IL_B)) u_pe (
        .clk     (clk),
        .rst_n   (rst_n),
        .a_in    (a_w[r][c]),
        .tag_in  (tag_w[r][c]),
        .b_in    (b_w[r][c]),
        .a_out   (a_w[r][c+1]),
        .tag_out (tag_w[r][c+1]),
        .b_out   (b_w[r+1][c]),
        .rd_ia   (rd_ia),
        .rd_ib   (rd_ib),
        .rd_data (res[r][c])
      );
    end
  end

  always_comb begin
    for (int c = 0; c < COLS; c++) rd_data[c] = res[rd_row][c];
  end

endmodule

// pe: one processing element of the systolic grid.
//
// Each cycle the PE takes a VEC-wide FP32 vector of A from its left
// neighbour and a VEC-wide vector of B from the PE above, and passes both on
// (registered) to its right and lower neighbours. When the tag travelling
// with A is valid, the PE forms the dot product of the two vectors (VEC
// multipliers and a pairwise adder tree, the VEC DSP lanes the paper counts
// per PE), registers it, and in the next cycle adds it into accumulator
// [ia][ib] of its IL_A x IL_B interleaved accumulators, or overwrites that
// accumulator when the tag's 'first' bit marks the first k-step of a tile.
// Latency: a vector pair reaches the accumulator two clock edges after it
// arrives. The drain reads accumulator [rd_ia][rd_ib] combinationally.
// The vector width and the interleaving follow the paper's grid variables;
// the output-stationary dataflow and the 2-stage pipeline are this design's.
module pe
  import mlp_pkg::*;
#(
  parameter int unsigned VEC  = 8,
  parameter int unsigned IL_A = 4,
  parameter int unsigned IL_B = 4,
  localparam int unsigned IAW = (IL_A > 1) ? $clog2(IL_A) : 1,
  localparam int unsigned IBW = (IL_B > 1) ? $clog2(IL_B) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [VEC-1:0][31:0]  a_in,
  input  pe_tag_t               tag_in,
  input  logic [VEC-1:0][31:0]  b_in,
  output logic [VEC-1:0][31:0]  a_out,
  output pe_tag_t               tag_out,
  output logic [VEC-1:0][31:0]  b_out,
  input  logic [IAW-1:0]        rd_ia,
  input  logic [IBW-1:0]        rd_ib,
  output fp32_t                 rd_data
);

  // ---- systolic forwarding ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tag_out <= '0;
    end else begin
      tag_out <= tag_in;
    end
  end

  always_ff @(posedge clk) begin
    a_out <= a_in;
    b_out <= b_in;
  end

  // ---- dot product: VEC multipliers and a pairwise adder tree ----
  fp32_t node [2*VEC-1];

  for (genvar i = 0; i < VEC; i++) begin : g_mul
    fp32_mul u_mul (.a(a_in[i]), .b(b_in[i]), .y(node[VEC-1+i]));
  end

  for (genvar j = 0; j < VEC-1; j++) begin : g_tree
    fp32_add u_add (.a(node[2*j+1]), .b(node[2*j+2]), .y(node[j]));
  end

  // ---- stage 1 register ----
  fp32_t   s1_sum;
  pe_tag_t s1_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_tag <= '0;
    end else begin
      s1_tag <= tag_in;
    end
  end

  always_ff @(posedge clk) begin
    if (tag_in.valid) s1_sum <= node[0];
  end

  // ---- stage 2: interleaved accumulators ----
  fp32_t acc [IL_A][IL_B];
  fp32_t acc_old, acc_new;
  logic [IAW-1:0] s1_ia;
  logic [IBW-1:0] s1_ib;

  assign s1_ia   = s1_tag.ia[IAW-1:0];
  assign s1_ib   = s1_tag.ib[IBW-1:0];
  assign acc_old = acc[s1_ia][s1_ib];

  fp32_add u_acc (.a(acc_old), .b(s1_sum), .y(acc_new));

  always_ff @(posedge clk) begin
    if (s1_tag.valid) begin
      acc[s1_ia][s1_ib] <= s1_tag.first ? s1_sum : acc_new;
    end
  end

  assign rd_data = acc[rd_ia][rd_ib];

endmodule

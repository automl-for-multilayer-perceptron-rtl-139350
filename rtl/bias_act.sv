// bias_act: bias addition and activation for LANES results leaving the grid.
//
// Combinational. For each lane, y = act(acc + bias) when bias_en is set and
// y = act(acc) otherwise. The FP32 addition uses fp32_add. Activations:
// ACT_NONE (identity) and ACT_RELU, which replaces every negative result
// (sign bit set, including -0) by +0. The paper's grid has "vector additions
// for bias" and activation support, with bias and the activation searched per
// layer; it does not list the functions, so only these two are provided.
module bias_act
  import mlp_pkg::*;
#(
  parameter int unsigned LANES = 4
) (
  input  fp32_t acc  [LANES],
  input  fp32_t bias [LANES],
  input  logic  bias_en,
  input  act_e  act,
  output fp32_t y    [LANES]
);

  fp32_t sum [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    fp32_add u_add (.a(acc[l]), .b(bias_en ? bias[l] : 32'h0000_0000), .y(sum[l]));
    always_comb begin
      if (act == ACT_RELU && sum[l][31]) y[l] = 32'h0000_0000;
      else                              y[l] = sum[l];
    end
  end

endmodule

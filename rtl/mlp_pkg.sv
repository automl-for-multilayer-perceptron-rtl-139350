// mlp_pkg: types and constants shared by the MLP grid accelerator.
//
// All data is IEEE-754 single precision (fp32_t). A layer is described to
// the accelerator by a layer_cfg_t: the sizes are given in whole tiles and
// whole vectors, because the host pads every matrix to the tile grid. All
// addresses are 32-bit word addresses into the external DRAM. The identity
// and ReLU activations and the per-layer bias switch are this design's
// reading of "activation function and bias" as searched layer options.
package mlp_pkg;

  typedef logic [31:0] fp32_t;

  localparam int unsigned ADDR_W = 32;
  localparam int unsigned CNT_W  = 16;

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [CNT_W-1:0]  cnt_t;

  typedef enum logic [0:0] {
    ACT_NONE = 1'b0,
    ACT_RELU = 1'b1
  } act_e;

  // One MLP layer: C[M x N] = act(A[M x K] * W^T + bias), with
  //   M = m_tiles * ROWS * IL_A  (batch), N = n_tiles * COLS * IL_B (neurons),
  //   K = k_vecs * VEC            (inputs of the layer).
  // A is stored row-major (row stride K), the weights W neuron by neuron
  // (N x K, row stride K), the bias as N words and C row-major (stride N).
  typedef struct packed {
    cnt_t  m_tiles;
    cnt_t  n_tiles;
    cnt_t  k_vecs;
    addr_t a_base;
    addr_t w_base;
    addr_t bias_base;
    addr_t c_base;
    logic  bias_en;
    act_e  act;
  } layer_cfg_t;

  // Sideband that travels through the grid with every A vector.
  // ia/ib select the interleaved accumulator, first clears it.
  localparam int unsigned IDX_W = 8;
  typedef struct packed {
    logic             valid;
    logic             first;
    logic [IDX_W-1:0] ia;
    logic [IDX_W-1:0] ib;
  } pe_tag_t;

  localparam fp32_t FP32_QNAN = 32'h7FC0_0000;

endpackage

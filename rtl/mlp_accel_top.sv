// mlp_accel_top: FP32 systolic-grid accelerator for one MLP layer.
//
// Computes C = act(A x W^T + bias) for a layer described by a layer_cfg_t,
// with A (batch x inputs), W (neurons x inputs), the bias and C in external
// DRAM. The layer is cut into output tiles of TM = ROWS*IL_A rows by
// TN = COLS*IL_B neurons; each tile is built from K/VEC k-steps. Per k-step
// the loader fills one bank of the two double-buffered feeders from DRAM
// while the controller replays the other bank into the ROWS x COLS PE grid,
// IL_A*IL_B cycles per k-step with all ROWS*COLS*VEC FP32 multipliers busy.
// When a tile is complete, the drain reads it out of the PEs, adds the bias,
// applies the activation and writes it back. A multi-layer MLP is run by the
// host as a sequence of layer commands, each layer's C being the next A.
//
// Interface: start (one cycle, with cfg) / busy / done (one cycle);
// DRAM read port rd_req_* (valid/ready, word address, one VEC-word vector per
// request) with in-order responses rd_resp_*; DRAM write port wr_* (valid/
// ready, word address, COLS words per beat). All matrices must be padded by
// the host to whole tiles (M, N) and whole vectors (K).
// The grid, its variables (rows, columns, interleaving, vector width), FP32
// data and the bias/activation stage follow the paper; the default sizes,
// memory layout, protocols and schedule are this design's.
module mlp_accel_top
  import mlp_pkg::*;
#(
  parameter int unsigned ROWS = 4,
  parameter int unsigned COLS = 4,
  parameter int unsigned VEC  = 8,
  parameter int unsigned IL_A = 4,
  parameter int unsigned IL_B = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  layer_cfg_t            cfg,
  output logic                  busy,
  output logic                  done,
  output logic                  stall_mem,
  // DRAM read port
  output logic                  rd_req_valid,
  input  logic                  rd_req_ready,
  output addr_t                 rd_req_addr,
  input  logic                  rd_resp_valid,
  input  logic [VEC-1:0][31:0]  rd_resp_data,
  // DRAM write port
  output logic                  wr_valid,
  input  logic                  wr_ready,
  output addr_t                 wr_addr,
  output logic [COLS-1:0][31:0] wr_data
);

  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned CW  = (COLS > 1) ? $clog2(COLS) : 1;
  localparam int unsigned IAW = (IL_A > 1) ? $clog2(IL_A) : 1;
  localparam int unsigned IBW = (IL_B > 1) ? $clog2(IL_B) : 1;

  layer_cfg_t cfg_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     cfg_q <= '0;
    else if (start) cfg_q <= cfg;
  end

  // ---- loader ----
  logic [1:0]           bank_full, bank_release, bias_release;
  logic                 a_wr_en, b_wr_en, bias_wr_en, wr_bank;
  logic [7:0]           wr_lane, wr_il;
  logic [VEC-1:0][31:0] fill_data;
  logic                 ld_busy;

  loader #(.ROWS(ROWS), .COLS(COLS), .VEC(VEC), .IL_A(IL_A), .IL_B(IL_B)) u_loader (
    .clk, .rst_n, .start, .cfg,
    .busy          (ld_busy),
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_resp_valid, .rd_resp_data,
    .bank_full, .bank_release, .bias_release,
    .a_wr_en, .b_wr_en, .bias_wr_en, .wr_bank, .wr_lane, .wr_il,
    .wr_data       (fill_data)
  );

  // ---- controller ----
  logic       iss_valid, iss_bank, iss_first;
  logic [7:0] iss_ia, iss_ib;
  logic       drain_start, drain_bank, drain_done, ctrl_busy, drain_busy;
  cnt_t       drain_mt, drain_nt;

  gemm_ctrl #(.ROWS(ROWS), .COLS(COLS), .VEC(VEC), .IL_A(IL_A), .IL_B(IL_B)) u_ctrl (
    .clk, .rst_n, .start, .cfg,
    .busy (ctrl_busy), .done,
    .bank_full, .bank_release,
    .iss_valid, .iss_bank, .iss_first, .iss_ia, .iss_ib,
    .drain_start, .drain_mt, .drain_nt, .drain_bank, .drain_done,
    .stall_mem
  );

  // ---- feeders ----
  pe_tag_t              iss_tag;
  logic [VEC-1:0][31:0] a_vec [ROWS];
  logic [VEC-1:0][31:0] b_vec [COLS];
  logic [$bits(pe_tag_t)-1:0] a_tag_raw [ROWS];
  pe_tag_t              a_tag [ROWS];
  logic                 a_val [ROWS];
  logic [0:0]           b_tag_raw [COLS];
  logic                 b_val [COLS];

  always_comb begin
    iss_tag.valid = iss_valid;
    iss_tag.first = iss_first;
    iss_tag.ia    = IDX_W'(iss_ia);
    iss_tag.ib    = IDX_W'(iss_ib);
  end

  feeder #(.LANES(ROWS), .IL(IL_A), .VEC(VEC), .TAGW($bits(pe_tag_t))) u_feed_a (
    .clk, .rst_n,
    .wr_en   (a_wr_en),
    .wr_bank (wr_bank),
    .wr_lane (RW'(wr_lane)),
    .wr_il   (IAW'(wr_il)),
    .wr_data (fill_data),
    .rd_en   (iss_valid),
    .rd_bank (iss_bank),
    .rd_il   (IAW'(iss_ia)),
    .rd_tag  (iss_tag),
    .out_vec (a_vec),
    .out_tag (a_tag_raw),
    .out_valid (a_val)
  );

  feeder #(.LANES(COLS), .IL(IL_B), .VEC(VEC), .TAGW(1)) u_feed_b (
    .clk, .rst_n,
    .wr_en   (b_wr_en),
    .wr_bank (wr_bank),
    .wr_lane (CW'(wr_lane)),
    .wr_il   (IBW'(wr_il)),
    .wr_data (fill_data),
    .rd_en   (iss_valid),
    .rd_bank (iss_bank),
    .rd_il   (IBW'(iss_ib)),
    .rd_tag  (1'b1),
    .out_vec (b_vec),
    .out_tag (b_tag_raw),
    .out_valid (b_val)
  );

  for (genvar r = 0; r < ROWS; r++) begin : g_tag
    assign a_tag[r] = pe_tag_t'(a_tag_raw[r]);
  end

  // ---- grid ----
  logic [RW-1:0]  rd_row;
  logic [IAW-1:0] rd_ia;
  logic [IBW-1:0] rd_ib;
  fp32_t          rd_data [COLS];

  pe_grid #(.ROWS(ROWS), .COLS(COLS), .VEC(VEC), .IL_A(IL_A), .IL_B(IL_B)) u_grid (
    .clk, .rst_n,
    .a_in   (a_vec),
    .tag_in (a_tag),
    .b_in   (b_vec),
    .rd_row, .rd_ia, .rd_ib, .rd_data
  );

  // ---- drain ----
  drain #(.ROWS(ROWS), .COLS(COLS), .VEC(VEC), .IL_A(IL_A), .IL_B(IL_B)) u_drain (
    .clk, .rst_n,
    .cfg          (cfg_q),
    .start        (drain_start),
    .tile_mt      (drain_mt),
    .tile_nt      (drain_nt),
    .tile_bank    (drain_bank),
    .busy         (drain_busy),
    .done         (drain_done),
    .bias_release (bias_release),
    .bias_wr_en   (bias_wr_en),
    .bias_wr_bank (wr_bank),
    .bias_wr_idx  (wr_il),
    .bias_wr_data (fill_data),
    .rd_row, .rd_ia, .rd_ib, .rd_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data
  );

  assign busy = ctrl_busy || ld_busy || drain_busy;

  // the systolic inputs of A and B must always arrive together
  for (genvar l = 0; l < ((ROWS < COLS) ? ROWS : COLS); l++) begin : g_chk
    a_skew_aligned: assert property (@(posedge clk) disable iff (!rst_n)
      a_val[l] == b_val[l])
      else $error("mlp_accel_top: A and B feeders out of step");
  end

endmodule

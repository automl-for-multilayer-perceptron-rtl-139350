// drain: reads a finished output tile out of the grid and stores it to DRAM.
//
// On drain_start the unit walks the tile's ROWS*IL_A rows and IL_B column
// groups (ia, then PE row r, then ib fastest). Each step selects PE row r and
// accumulator (ia, ib) of the grid, which returns COLS results for output row
// m = m0 + ia*ROWS + r and neurons n = n0 + ib*COLS + 0..COLS-1; bias_act adds
// the neurons' biases and applies the layer's activation, and the COLS words
// are written as one beat to C at c_base + m*N + n. The beat sits in an
// output register with valid/ready; the walk advances one step per accepted
// beat, so a full-rate port takes TM*IL_B cycles per tile.
// The bias of a tile is held in one of two banks (filled by the loader while
// the previous tile still drains); 'done' pulses, and the bank is released,
// when the last beat of the tile has been accepted.
// Bias addition and activation after the grid follow the paper; the write
// port and the order are this design's.
module drain
  import mlp_pkg::*;
#(
  parameter int unsigned ROWS = 4,
  parameter int unsigned COLS = 4,
  parameter int unsigned VEC  = 8,
  parameter int unsigned IL_A = 4,
  parameter int unsigned IL_B = 4,
  localparam int unsigned TM  = ROWS * IL_A,
  localparam int unsigned TN  = COLS * IL_B,
  localparam int unsigned NB  = (TN + VEC - 1) / VEC,
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned IAW = (IL_A > 1) ? $clog2(IL_A) : 1,
  localparam int unsigned IBW = (IL_B > 1) ? $clog2(IL_B) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  layer_cfg_t            cfg,
  input  logic                  start,
  input  cnt_t                  tile_mt,
  input  cnt_t                  tile_nt,
  input  logic                  tile_bank,
  output logic                  busy,
  output logic                  done,
  output logic [1:0]            bias_release,
  // bias fill from the loader
  input  logic                  bias_wr_en,
  input  logic                  bias_wr_bank,
  input  logic [7:0]            bias_wr_idx,
  input  logic [VEC-1:0][31:0]  bias_wr_data,
  // grid read
  output logic [RW-1:0]         rd_row,
  output logic [IAW-1:0]        rd_ia,
  output logic [IBW-1:0]        rd_ib,
  input  fp32_t                 rd_data [COLS],
  // DRAM write port
  output logic                  wr_valid,
  input  logic                  wr_ready,
  output addr_t                 wr_addr,
  output logic [COLS-1:0][31:0] wr_data
);

  // ---- bias banks ----
  logic [NB*VEC-1:0][31:0] bias_mem [2];

  always_ff @(posedge clk) begin
    if (bias_wr_en) bias_mem[bias_wr_bank][bias_wr_idx*VEC +: VEC] <= bias_wr_data;
  end

  // ---- walk ----
  logic       active, last_in_reg;
  logic [7:0] ia, r, ib;
  cnt_t       mt, nt;
  logic       bank;
  logic       advance, last_step;

  assign rd_row    = RW'(r);
  assign rd_ia     = IAW'(ia);
  assign rd_ib     = IBW'(ib);
  assign advance   = active && (!wr_valid || wr_ready);
  assign last_step = (ia == 8'(IL_A-1)) && (r == 8'(ROWS-1)) && (ib == 8'(IL_B-1));

  fp32_t bias_l [COLS];
  fp32_t y      [COLS];

  always_comb begin
    for (int c = 0; c < COLS; c++) bias_l[c] = bias_mem[bank][int'(ib) * COLS + c];
  end

  bias_act #(.LANES(COLS)) u_bias_act (
    .acc     (rd_data),
    .bias    (bias_l),
    .bias_en (cfg.bias_en),
    .act     (cfg.act),
    .y       (y)
  );

  addr_t m_row, n_col, n_words;
  always_comb begin
    n_words = addr_t'(cfg.n_tiles) * TN;
    m_row   = addr_t'(mt) * TM + addr_t'(ia) * ROWS + addr_t'(r);
    n_col   = addr_t'(nt) * TN + addr_t'(ib) * COLS;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active       <= 1'b0;
      last_in_reg  <= 1'b0;
      ia           <= '0;
      r            <= '0;
      ib           <= '0;
      mt           <= '0;
      nt           <= '0;
      bank         <= 1'b0;
      wr_valid     <= 1'b0;
      wr_addr      <= '0;
      done         <= 1'b0;
      bias_release <= 2'b00;
    end else begin
      done         <= 1'b0;
      bias_release <= 2'b00;
      if (wr_valid && wr_ready) begin
        wr_valid <= 1'b0;
        if (last_in_reg) begin
          last_in_reg        <= 1'b0;
          done               <= 1'b1;
          bias_release[bank] <= 1'b1;
        end
      end
      if (start && !active) begin
        active <= 1'b1;
        ia     <= '0;
        r      <= '0;
        ib     <= '0;
        mt     <= tile_mt;
        nt     <= tile_nt;
        bank   <= tile_bank;
      end else if (advance) begin
        wr_valid <= 1'b1;
        wr_addr  <= cfg.c_base + m_row * n_words + n_col;
        if (last_step) begin
          active      <= 1'b0;
          last_in_reg <= 1'b1;
        end
        if (ib == 8'(IL_B-1)) begin
          ib <= '0;
          if (r == 8'(ROWS-1)) begin
            r  <= '0;
            ia <= ia + 1'b1;
          end else begin
            r <= r + 1'b1;
          end
        end else begin
          ib <= ib + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (advance) begin
      for (int c = 0; c < COLS; c++) wr_data[c] <= y[c];
    end
  end

  assign busy = active || wr_valid;

  a_start_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !busy)
    else $error("drain: started while busy");
  a_wr_stable: assert property (@(posedge clk) disable iff (!rst_n)
    wr_valid && !wr_ready |=> wr_valid && $stable(wr_addr) && $stable(wr_data))
    else $error("drain: write withdrawn or changed while stalled");

endmodule

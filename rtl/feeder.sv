// feeder: double-buffered vector cache for one dimension of the grid.
//
// Holds two banks of LANES x IL vectors (VEC FP32 words each). The loader
// fills one bank through the write port while the controller replays the
// other into the grid: each rd_en cycle reads vector [rd_bank][lane][rd_il]
// of every lane. Lane l is then delayed l further cycles, so the outputs
// enter the systolic grid skewed; a TAGW-bit sideband (the PE tag on the A
// side) is delayed with the data. Latency: lane l's vector appears 1+l
// cycles after rd_en. The same module serves rows (A, lanes = ROWS,
// IL = IL_A) and columns (B, lanes = COLS, IL = IL_B). The paper names these
// per-dimension double-buffer caches and calls their depth interleaving;
// their organisation and timing here are this design's.
module feeder
  import mlp_pkg::*;
#(
  parameter int unsigned LANES = 4,
  parameter int unsigned IL    = 4,
  parameter int unsigned VEC   = 8,
  parameter int unsigned TAGW  = 1,
  localparam int unsigned LW   = (LANES > 1) ? $clog2(LANES) : 1,
  localparam int unsigned ILW  = (IL > 1) ? $clog2(IL) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // fill port
  input  logic                  wr_en,
  input  logic                  wr_bank,
  input  logic [LW-1:0]         wr_lane,
  input  logic [ILW-1:0]        wr_il,
  input  logic [VEC-1:0][31:0]  wr_data,
  // replay port
  input  logic                  rd_en,
  input  logic                  rd_bank,
  input  logic [ILW-1:0]        rd_il,
  input  logic [TAGW-1:0]       rd_tag,
  // skewed outputs
  output logic [VEC-1:0][31:0]  out_vec   [LANES],
  output logic [TAGW-1:0]       out_tag   [LANES],
  output logic                  out_valid [LANES]
);

  logic [VEC-1:0][31:0] mem [2][LANES][IL];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_bank][wr_lane][wr_il] <= wr_data;
  end

  // read stage
  logic [VEC-1:0][31:0] rd_q  [LANES];
  logic [TAGW-1:0]      tag_q;
  logic                 val_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      val_q <= 1'b0;
      tag_q <= '0;
    end else begin
      val_q <= rd_en;
      tag_q <= rd_tag;
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      for (int l = 0; l < LANES; l++) rd_q[l] <= mem[rd_bank][l][rd_il];
    end
  end

  // per-lane skew: lane l delayed by l cycles
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    if (l == 0) begin : g_direct
      assign out_vec[l]   = rd_q[l];
      assign out_tag[l]   = tag_q;
      assign out_valid[l] = val_q;
    end else begin : g_skew
      logic [VEC-1:0][31:0] dv [l];
      logic [TAGW-1:0]      dt [l];
      logic                 dq [l];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int s = 0; s < l; s++) begin
            dq[s] <= 1'b0;
            dt[s] <= '0;
          end
        end else begin
          dq[0] <= val_q;
          dt[0] <= tag_q;
          for (int s = 1; s < l; s++) begin
            dq[s] <= dq[s-1];
            dt[s] <= dt[s-1];
          end
        end
      end
      always_ff @(posedge clk) begin
        dv[0] <= rd_q[l];
        for (int s = 1; s < l; s++) dv[s] <= dv[s-1];
      end
      assign out_vec[l]   = dv[l-1];
      assign out_tag[l]   = dt[l-1];
      assign out_valid[l] = dq[l-1];
    end
  end

endmodule

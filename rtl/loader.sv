// loader: DRAM read unit of the grid accelerator.
//
// Walks the blocked matrix multiplication of one layer in the order
//   output tile (m outer, n inner) -> k-step (one VEC-wide slice of K)
// and, for every k-step, reads into the free bank of the feeders the
// TM = ROWS*IL_A vectors of A and the TN = COLS*IL_B vectors of the weights
// that the grid needs, preceded on the first k-step of a tile (when the
// layer has a bias) by the ceil(TN/VEC) bias vectors of that tile.
// A vector of row m = m0 + il*ROWS + lane goes to A-feeder lane 'lane',
// slot 'il'; neuron n = n0 + il*COLS + lane likewise to the B feeder.
//
// DRAM read port: a request (valid/ready, word address) returns one vector of
// VEC words; responses come back in order, one per cycle at most, and cannot
// be stalled. Each accepted request pushes its destination into a FIFO of
// FIFO_DEPTH entries, which also bounds the requests in flight.
//
// Double-buffer handshake: a bank is claimed when its first request issues
// and marked full (bank_full) when its last response has been written; the
// controller frees it with bank_release once the grid has consumed it. Bias
// banks alternate per tile and are freed by the drain (bias_release).
// The fill data is the read response itself, steered by the FIFO entry.
// The blocked schedule follows the paper; the memory layout, port protocol
// and bookkeeping are this design's.
module loader
  import mlp_pkg::*;
#(
  parameter int unsigned ROWS       = 4,
  parameter int unsigned COLS       = 4,
  parameter int unsigned VEC        = 8,
  parameter int unsigned IL_A       = 4,
  parameter int unsigned IL_B       = 4,
  parameter int unsigned FIFO_DEPTH = 16,
  localparam int unsigned TN  = COLS * IL_B,
  localparam int unsigned TM  = ROWS * IL_A,
  localparam int unsigned NB  = (TN + VEC - 1) / VEC
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  layer_cfg_t            cfg,
  output logic                  busy,
  // DRAM read port
  output logic                  rd_req_valid,
  input  logic                  rd_req_ready,
  output addr_t                 rd_req_addr,
  input  logic                  rd_resp_valid,
  input  logic [VEC-1:0][31:0]  rd_resp_data,
  // double-buffer handshake
  output logic [1:0]            bank_full,
  input  logic [1:0]            bank_release,
  input  logic [1:0]            bias_release,
  // fills
  output logic                  a_wr_en,
  output logic                  b_wr_en,
  output logic                  bias_wr_en,
  output logic                  wr_bank,
  output logic [7:0]            wr_lane,
  output logic [7:0]            wr_il,
  output logic [VEC-1:0][31:0]  wr_data
);

  typedef enum logic [2:0] {PH_IDLE, PH_WAIT, PH_BIAS, PH_A, PH_B} phase_e;
  typedef enum logic [1:0] {K_BIAS, K_A, K_B} kind_e;

  typedef struct packed {
    kind_e      kind;
    logic       bank;
    logic [7:0] lane;
    logic [7:0] il;
    logic       last;
  } dest_t;

  phase_e     phase;
  layer_cfg_t c;
  cnt_t       mt, nt, kv;
  logic       sbank, tbank;
  logic [7:0] lane, il;
  logic [1:0] bank_free, bias_free;

  // ---- addresses ----
  addr_t kw, m_row, n_row;
  always_comb begin
    kw    = addr_t'(c.k_vecs) * VEC;
    m_row = addr_t'(mt) * TM + addr_t'(il) * ROWS + addr_t'(lane);
    n_row = addr_t'(nt) * TN + addr_t'(il) * COLS + addr_t'(lane);
    unique case (phase)
      PH_BIAS: rd_req_addr = c.bias_base + addr_t'(nt) * TN + addr_t'(il) * VEC;
      PH_A:    rd_req_addr = c.a_base + m_row * kw + addr_t'(kv) * VEC;
      default: rd_req_addr = c.w_base + n_row * kw + addr_t'(kv) * VEC;
    endcase
  end

  // ---- destination FIFO ----
  localparam int unsigned FW = $clog2(FIFO_DEPTH);
  dest_t            fifo [FIFO_DEPTH];
  logic [FW-1:0]    wptr, rptr;
  logic [FW:0]      count;
  logic             push, pop;
  dest_t            push_d, pop_d;

  assign rd_req_valid = (phase == PH_BIAS || phase == PH_A || phase == PH_B) &&
                        (count < (FW+1)'(FIFO_DEPTH));
  assign push = rd_req_valid && rd_req_ready;
  assign pop  = rd_resp_valid;
  assign pop_d = fifo[rptr];

  always_comb begin
    push_d.kind = (phase == PH_BIAS) ? K_BIAS : (phase == PH_A) ? K_A : K_B;
    push_d.bank = (phase == PH_BIAS) ? tbank : sbank;
    push_d.lane = lane;
    push_d.il   = il;
    push_d.last = (phase == PH_B) && (lane == 8'(COLS-1)) && (il == 8'(IL_B-1));
  end

  always_ff @(posedge clk) begin
    if (push) fifo[wptr] <= push_d;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= (wptr == FW'(FIFO_DEPTH-1)) ? '0 : wptr + 1'b1;
      if (pop)  rptr <= (rptr == FW'(FIFO_DEPTH-1)) ? '0 : rptr + 1'b1;
      count <= count + (FW+1)'(push) - (FW+1)'(pop);
    end
  end

  // ---- responses into the feeders ----
  always_comb begin
    a_wr_en    = pop && (pop_d.kind == K_A);
    b_wr_en    = pop && (pop_d.kind == K_B);
    bias_wr_en = pop && (pop_d.kind == K_BIAS);
    wr_bank    = pop_d.bank;
    wr_lane    = pop_d.lane;
    wr_il      = pop_d.il;
    wr_data    = rd_resp_data;
  end

  // ---- request sequencing ----
  logic need_bias;
  logic last_tile_step;
  assign need_bias = (kv == '0) && c.bias_en;
  assign last_tile_step = (kv == c.k_vecs - 1'b1) && (nt == c.n_tiles - 1'b1) &&
                          (mt == c.m_tiles - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= PH_IDLE;
      c         <= '0;
      mt        <= '0;
      nt        <= '0;
      kv        <= '0;
      sbank     <= 1'b0;
      tbank     <= 1'b0;
      lane      <= '0;
      il        <= '0;
      bank_free <= 2'b11;
      bias_free <= 2'b11;
      bank_full <= 2'b00;
    end else begin
      // bank bookkeeping
      for (int b = 0; b < 2; b++) begin
        if (bank_release[b]) begin
          bank_full[b] <= 1'b0;
          bank_free[b] <= 1'b1;
        end
        if (bias_release[b]) bias_free[b] <= 1'b1;
      end
      if (pop && pop_d.last) bank_full[pop_d.bank] <= 1'b1;

      unique case (phase)
        PH_IDLE: begin
          if (start) begin
            c         <= cfg;
            mt        <= '0;
            nt        <= '0;
            kv        <= '0;
            sbank     <= 1'b0;
            tbank     <= 1'b0;
            bank_free <= 2'b11;
            bias_free <= 2'b11;
            bank_full <= 2'b00;
            phase     <= PH_WAIT;
          end
        end
        PH_WAIT: begin
          if (bank_free[sbank] && (!need_bias || bias_free[tbank])) begin
            bank_free[sbank] <= 1'b0;
            lane <= '0;
            il   <= '0;
            if (need_bias) begin
              bias_free[tbank] <= 1'b0;
              phase <= PH_BIAS;
            end else begin
              phase <= PH_A;
            end
          end
        end
        PH_BIAS: if (push) begin
          if (il == 8'(NB-1)) begin
            il    <= '0;
            phase <= PH_A;
          end else begin
            il <= il + 1'b1;
          end
        end
        PH_A: if (push) begin
          if (lane == 8'(ROWS-1)) begin
            lane <= '0;
            if (il == 8'(IL_A-1)) begin
              il    <= '0;
              phase <= PH_B;
            end else begin
              il <= il + 1'b1;
            end
          end else begin
            lane <= lane + 1'b1;
          end
        end
        PH_B: if (push) begin
          if (lane == 8'(COLS-1)) begin
            lane <= '0;
            if (il == 8'(IL_B-1)) begin
              il    <= '0;
              sbank <= ~sbank;
              // next k-step / tile
              if (last_tile_step) begin
                phase <= PH_IDLE;
              end else begin
                phase <= PH_WAIT;
                if (kv == c.k_vecs - 1'b1) begin
                  kv    <= '0;
                  tbank <= ~tbank;
                  if (nt == c.n_tiles - 1'b1) begin
                    nt <= '0;
                    mt <= mt + 1'b1;
                  end else begin
                    nt <= nt + 1'b1;
                  end
                end else begin
                  kv <= kv + 1'b1;
                end
              end
            end else begin
              il <= il + 1'b1;
            end
          end else begin
            lane <= lane + 1'b1;
          end
        end
        default: phase <= PH_IDLE;
      endcase
    end
  end

  assign busy = (phase != PH_IDLE) || (count != '0);

  // ---- protocol rules ----
  a_no_unexpected_response: assert property (@(posedge clk) disable iff (!rst_n)
    rd_resp_valid |-> count != '0)
    else $error("loader: read response with no request outstanding");
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    rd_req_valid && !rd_req_ready |=> rd_req_valid && $stable(rd_req_addr))
    else $error("loader: request withdrawn or changed while stalled");

endmodule

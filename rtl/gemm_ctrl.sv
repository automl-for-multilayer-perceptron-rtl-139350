// gemm_ctrl: compute sequencer of the grid accelerator.
//
// Follows the same blocked schedule as the loader (output tile m outer,
// n inner, then k-steps; feeder banks alternate every k-step starting with
// bank 0). For each k-step it waits until the loader reports the bank full,
// then replays it into the grid for IL_A*IL_B cycles, one (ia, ib) pair per
// cycle with ib fastest, marking the first k-step of a tile so that the PEs
// overwrite rather than accumulate. It then frees the bank (bank_release,
// one-cycle pulse). After the last k-step of a tile it waits FLUSH cycles,
// enough for the last vector to cross the feeder skew, the grid and the PE
// pipeline, and starts the drain for that tile. The first k-step of the next
// tile is held back until the drain has read the accumulators. 'done'
// pulses once the last tile has been drained.
// Rate: with data ready, IL_A*IL_B cycles per k-step, i.e. all
// ROWS*COLS*VEC multipliers busy every cycle. The schedule follows the
// paper's blocked GEMM on the grid; its details are this design's.
module gemm_ctrl
  import mlp_pkg::*;
#(
  parameter int unsigned ROWS = 4,
  parameter int unsigned COLS = 4,
  parameter int unsigned VEC  = 8,
  parameter int unsigned IL_A = 4,
  parameter int unsigned IL_B = 4,
  localparam int unsigned FLUSH = ROWS + COLS + 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  layer_cfg_t  cfg,
  output logic        busy,
  output logic        done,
  // double-buffer handshake
  input  logic [1:0]  bank_full,
  output logic [1:0]  bank_release,
  // feeder replay
  output logic        iss_valid,
  output logic        iss_bank,
  output logic        iss_first,
  output logic [7:0]  iss_ia,
  output logic [7:0]  iss_ib,
  // drain
  output logic        drain_start,
  output cnt_t        drain_mt,
  output cnt_t        drain_nt,
  output logic        drain_bank,
  input  logic        drain_done,
  // activity, for performance counting
  output logic        stall_mem
);

  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_ISSUE, S_FIN} state_e;

  state_e     state;
  layer_cfg_t c;
  cnt_t       mt, nt, kv;
  logic       sbank, tbank;
  logic [7:0] ia, ib;

  logic       flush_pend, drain_out;
  logic [7:0] flush_cnt;
  cnt_t       f_mt, f_nt;
  logic       f_bank;

  logic last_k, last_tile, acc_free, step_end;

  assign last_k    = (kv == c.k_vecs - 1'b1);
  assign last_tile = (nt == c.n_tiles - 1'b1) && (mt == c.m_tiles - 1'b1);
  assign acc_free  = !flush_pend && !drain_out;
  assign step_end  = (state == S_ISSUE) && (ia == 8'(IL_A-1)) && (ib == 8'(IL_B-1));

  assign iss_valid = (state == S_ISSUE);
  assign iss_bank  = sbank;
  assign iss_first = (kv == '0);
  assign iss_ia    = ia;
  assign iss_ib    = ib;
  assign stall_mem = (state == S_WAIT) && !bank_full[sbank] && (kv != '0 || acc_free);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      c            <= '0;
      mt           <= '0;
      nt           <= '0;
      kv           <= '0;
      sbank        <= 1'b0;
      tbank        <= 1'b0;
      ia           <= '0;
      ib           <= '0;
      bank_release <= 2'b00;
      done         <= 1'b0;
      flush_pend   <= 1'b0;
      flush_cnt    <= '0;
      f_mt         <= '0;
      f_nt         <= '0;
      f_bank       <= 1'b0;
      drain_out    <= 1'b0;
      drain_start  <= 1'b0;
      drain_mt     <= '0;
      drain_nt     <= '0;
      drain_bank   <= 1'b0;
    end else begin
      bank_release <= 2'b00;
      done         <= 1'b0;
      drain_start  <= 1'b0;

      // pipeline flush, then drain start
      if (flush_pend) begin
        if (flush_cnt == '0) begin
          flush_pend  <= 1'b0;
          drain_out   <= 1'b1;
          drain_start <= 1'b1;
          drain_mt    <= f_mt;
          drain_nt    <= f_nt;
          drain_bank  <= f_bank;
        end else begin
          flush_cnt <= flush_cnt - 1'b1;
        end
      end
      if (drain_done) drain_out <= 1'b0;

      unique case (state)
        S_IDLE: begin
          if (start) begin
            c     <= cfg;
            mt    <= '0;
            nt    <= '0;
            kv    <= '0;
            sbank <= 1'b0;
            tbank <= 1'b0;
            state <= S_WAIT;
          end
        end
        S_WAIT: begin
          if (bank_full[sbank] && (kv != '0 || acc_free)) begin
            ia    <= '0;
            ib    <= '0;
            state <= S_ISSUE;
          end
        end
        S_ISSUE: begin
          if (ib == 8'(IL_B-1)) begin
            ib <= '0;
            ia <= ia + 1'b1;
          end else begin
            ib <= ib + 1'b1;
          end
          if (step_end) begin
            bank_release[sbank] <= 1'b1;
            sbank <= ~sbank;
            state <= S_WAIT;
            if (last_k) begin
              flush_pend <= 1'b1;
              flush_cnt  <= 8'(FLUSH);
              f_mt       <= mt;
              f_nt       <= nt;
              f_bank     <= tbank;
              kv         <= '0;
              tbank      <= ~tbank;
              if (last_tile) begin
                state <= S_FIN;
              end else if (nt == c.n_tiles - 1'b1) begin
                nt <= '0;
                mt <= mt + 1'b1;
              end else begin
                nt <= nt + 1'b1;
              end
            end else begin
              kv <= kv + 1'b1;
            end
          end
        end
        S_FIN: begin
          if (acc_free && !drain_start) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  a_issue_from_full_bank: assert property (@(posedge clk) disable iff (!rst_n)
    iss_valid |-> bank_full[iss_bank])
    else $error("gemm_ctrl: replaying a bank that is not full");

endmodule

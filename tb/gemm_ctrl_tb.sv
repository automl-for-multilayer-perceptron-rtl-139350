// gemm_ctrl_tb: runs the controller against a model of the loader (banks
// become full a random time after being freed, in step order) and of the
// drain (done a random time after start). Checks, cycle by cycle, the replay
// sequence (bank, ia, ib with ib fastest, 'first' on a tile's first k-step),
// that each k-step is replayed in exactly IL_A*IL_B consecutive cycles from
// a full bank, that the bank is released right after, that the drain of each
// tile starts with its tile number and bias bank no earlier than FLUSH cycles
// after the tile's last replay, that the next tile does not start before
// the drain has finished, and the final done pulse.
module gemm_ctrl_tb;
  import mlp_pkg::*;

  localparam int unsigned ROWS = 2, COLS = 2, VEC = 2, IL_A = 2, IL_B = 3;
  localparam int unsigned FLUSH = ROWS + COLS + 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, busy, done, iss_valid, iss_bank, iss_first, drain_start, drain_bank,
        drain_done, stall_mem;
  layer_cfg_t cfg;
  logic [1:0] bank_full, bank_release;
  logic [7:0] iss_ia, iss_ib;
  cnt_t drain_mt, drain_nt;

  gemm_ctrl #(.ROWS(ROWS), .COLS(COLS), .VEC(VEC), .IL_A(IL_A), .IL_B(IL_B)) dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;

  task automatic fail(string s);
    failures++;
    if (failures < 10) $display("MISMATCH at cycle %0d: %s", cyc, s);
  endtask

  // ---- loader model ----
  int fill_step = 0, total_steps = 0;
  int fill_wait = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) begin
      bank_full <= 2'b00;
    end else begin
      for (int b = 0; b < 2; b++) if (bank_release[b]) bank_full[b] <= 1'b0;
      if (fill_step < total_steps && !bank_full[fill_step % 2] && !bank_release[fill_step % 2]) begin
        if (fill_wait == 0) begin
          bank_full[fill_step % 2] <= 1'b1;
          fill_step <= fill_step + 1;
          fill_wait <= int'($urandom % 25);
        end else begin
          fill_wait <= fill_wait - 1;
        end
      end
    end
  end

  // ---- drain model ----
  int drain_wait = -1;
  always @(posedge clk) begin
    drain_done <= 1'b0;
    if (drain_start) drain_wait <= 3 + int'($urandom % 30);
    else if (drain_wait > 0) drain_wait <= drain_wait - 1;
    else if (drain_wait == 0) begin
      drain_done <= 1'b1;
      drain_wait <= -1;
    end
  end

  // ---- checker ----
  int s = 0, ia = 0, ib = 0, kv = 0, tile = 0;
  int mts, nts, kvs;
  longint last_issue_of_tile [int];
  int drains = 0, n_done = 0, n_stall = 0, releases = 0;
  bit drain_finished [int];
  bit expect_release = 0;
  logic exp_rel_bank;

  always @(posedge clk) if (rst_n) begin
    if (stall_mem) n_stall++;
    if (expect_release) begin
      checks++;
      if (bank_release != (2'b01 << exp_rel_bank)) fail("bank not released after k-step");
      expect_release = 0;
    end else if (bank_release != 2'b00) fail("unexpected bank release");
    if (bank_release != 2'b00) releases++;
    if (drain_done) drain_finished[drains - 1] = 1'b1;
    if (iss_valid) begin
      checks++;
      if (iss_bank !== 1'(s) || iss_ia !== 8'(ia) || iss_ib !== 8'(ib) || iss_first !== (kv == 0))
        fail($sformatf("replay bank %0d ia %0d ib %0d first %0d, expected step %0d ia %0d ib %0d kv %0d",
                       iss_bank, iss_ia, iss_ib, iss_first, s, ia, ib, kv));
      if (!bank_full[iss_bank]) fail("replay from a bank that is not full");
      if (kv == 0 && ia == 0 && ib == 0 && tile > 0 && !drain_finished.exists(tile - 1))
        fail("next tile started before the drain finished");
      // advance expectation
      if (ib == int'(IL_B) - 1) begin
        ib = 0;
        if (ia == int'(IL_A) - 1) begin
          ia = 0;
          expect_release = 1;
          exp_rel_bank = 1'(s);
          s++;
          if (kv == kvs - 1) begin
            last_issue_of_tile[tile] = cyc;
            kv = 0;
            tile++;
          end else kv++;
        end else ia++;
      end else ib++;
    end else if (ia != 0 || ib != 0) begin
      checks++;
      fail("k-step replay interrupted");
    end
    if (drain_start) begin
      checks++;
      if (!last_issue_of_tile.exists(drains) ||
          cyc - last_issue_of_tile[drains] < longint'(FLUSH) ||
          drain_mt !== cnt_t'(drains / nts) || drain_nt !== cnt_t'(drains % nts) ||
          drain_bank !== 1'(drains))
        fail($sformatf("drain start for tile %0d (mt %0d nt %0d bank %0d)", drains,
                       drain_mt, drain_nt, drain_bank));
      drains++;
    end
    if (done) n_done++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0;
    start = 0; cfg = '0;
    mts = 2; nts = 3; kvs = 3;
    total_steps = mts * nts * kvs;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    cfg.m_tiles = cnt_t'(mts); cfg.n_tiles = cnt_t'(nts); cfg.k_vecs = cnt_t'(kvs);
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    t0 = cyc;
    while (!done) @(negedge clk);
    repeat (3) @(negedge clk);
    checks += 4;
    if (s != total_steps) fail($sformatf("%0d k-steps replayed, expected %0d", s, total_steps));
    if (drains != mts * nts) fail("wrong number of drains");
    if (n_done != 1 || busy) fail("done/busy");
    if (n_stall == 0) fail("never stalled on memory");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

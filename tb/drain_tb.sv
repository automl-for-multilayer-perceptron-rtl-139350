// drain_tb: presents a model grid to the drain (every accumulator holds a
// distinct small integer that depends on the tile) and drains four tiles
// with different bias banks, bias on/off and ReLU/identity, while the other
// bias bank is refilled. Every beat written (address and COLS words, under
// random write back-pressure) is compared with act(acc + bias) at the
// address of its output row and neuron group; the test also checks the
// number of beats, the done pulse and the release of the right bias bank.
module drain_tb;
  import mlp_pkg::*;
  import fp_ref_pkg::*;

  localparam int unsigned ROWS = 2, COLS = 2, VEC = 2, IL_A = 2, IL_B = 2;
  localparam int unsigned TM = ROWS * IL_A, TN = COLS * IL_B, NB = TN / VEC;
  localparam int NT = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  layer_cfg_t cfg;
  logic start, tile_bank, busy, done, bias_wr_en, bias_wr_bank, wr_valid, wr_ready;
  cnt_t tile_mt, tile_nt;
  logic [1:0] bias_release;
  logic [7:0] bias_wr_idx;
  logic [VEC-1:0][31:0] bias_wr_data;
  logic [0:0] rd_row, rd_ia, rd_ib;
  fp32_t rd_data [COLS];
  addr_t wr_addr;
  logic [COLS-1:0][31:0] wr_data;

  drain #(.ROWS(ROWS), .COLS(COLS), .VEC(VEC), .IL_A(IL_A), .IL_B(IL_B)) dut (.*);

  int checks = 0, failures = 0;
  int tile_no = 0;
  int bias_v [2][TN];

  function automatic int accv(int t, int r, int c, int ia, int ib);
    return (t * 7 + r * 5 + c * 3 + ia * 11 + ib * 13) % 41 - 20;
  endfunction

  always_comb
    for (int c = 0; c < COLS; c++) rd_data[c] = i2f(accv(tile_no, rd_row, c, rd_ia, rd_ib));

  always @(negedge clk) wr_ready <= ($urandom % 100) < 60;

  // expected writes of the running tile
  logic [COLS-1:0][31:0] exp_w [addr_t];
  int beats = 0, n_done = 0;
  logic [1:0] rel_seen;
  always @(posedge clk) if (rst_n) begin
    if (wr_valid && wr_ready) begin
      beats++;
      checks++;
      if (!exp_w.exists(wr_addr)) begin
        failures++;
        $display("MISMATCH unexpected write address %h", wr_addr);
      end else if (wr_data !== exp_w[wr_addr]) begin
        failures++;
        if (failures < 10) $display("MISMATCH at %h: got %h expected %h", wr_addr, wr_data, exp_w[wr_addr]);
      end
    end
    if (done) n_done++;
    rel_seen |= bias_release;
  end

  task automatic load_bias(logic b);
    for (int j = 0; j < int'(NB); j++) begin
      @(negedge clk);
      bias_wr_en = 1'b1; bias_wr_bank = b; bias_wr_idx = 8'(j);
      for (int v = 0; v < int'(VEC); v++) begin
        bias_v[b][j*VEC + v] = int'($urandom % 21) - 10;
        bias_wr_data[v] = i2f(bias_v[b][j*VEC + v]);
      end
    end
    @(negedge clk) bias_wr_en = 1'b0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; tile_mt = '0; tile_nt = '0; tile_bank = 0; bias_wr_en = 0; bias_wr_bank = 0;
    bias_wr_idx = '0; bias_wr_data = '0; rel_seen = '0;
    cfg = '0;
    cfg.n_tiles = cnt_t'(NT);
    cfg.c_base  = 32'h1000;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    load_bias(1'b0);
    for (int t = 0; t < 4; t++) begin
      logic b;
      int m0, n0;
      b = 1'(t);
      tile_no = t;
      cfg.bias_en = (t != 2);
      cfg.act = (t % 2 == 0) ? ACT_RELU : ACT_NONE;
      m0 = (t / NT) * TM;
      n0 = (t % NT) * TN;
      exp_w.delete();
      for (int ia = 0; ia < int'(IL_A); ia++)
        for (int r = 0; r < int'(ROWS); r++)
          for (int ib = 0; ib < int'(IL_B); ib++) begin
            logic [COLS-1:0][31:0] w;
            for (int c = 0; c < int'(COLS); c++) begin
              int v;
              v = accv(t, r, c, ia, ib) + (cfg.bias_en ? bias_v[b][ib*COLS + c] : 0);
              if (cfg.act == ACT_RELU && v < 0) v = 0;
              w[c] = i2f(v);
            end
            exp_w[cfg.c_base + addr_t'((m0 + ia*ROWS + r) * NT * TN + n0 + ib*COLS)] = w;
          end
      beats = 0; n_done = 0; rel_seen = '0;
      @(negedge clk);
      start = 1'b1; tile_mt = cnt_t'(t / NT); tile_nt = cnt_t'(t % NT); tile_bank = b;
      @(negedge clk) start = 1'b0;
      load_bias(~b);          // next tile's bias while this one drains
      while (busy) @(negedge clk);
      @(negedge clk);
      checks += 3;
      if (beats != int'(TM * IL_B)) begin failures++; $display("MISMATCH %0d beats", beats); end
      if (n_done != 1) begin failures++; $display("MISMATCH done pulses %0d", n_done); end
      if (rel_seen != (2'b01 << b)) begin failures++; $display("MISMATCH bias release %b", rel_seen); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

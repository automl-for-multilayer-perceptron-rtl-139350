// loader_tb: runs the loader against a memory model whose word at address
// x is x ^ 0x5A5A0000, with random request back-pressure and random
// in-order response latency. The testbench plays the controller: whenever
// the loader reports the bank of the current k-step full, it checks every
// A and weight vector written into that bank (and, on a tile's first
// k-step, the tile's bias vectors) against the addresses the blocked
// schedule implies, then frees the bank after a random delay. It also checks
// that no more than FIFO_DEPTH reads are ever outstanding, the request
// count with and without bias, and that busy falls at the end.
module loader_tb;
  import mlp_pkg::*;

  localparam int unsigned ROWS = 2, COLS = 2, VEC = 2, IL_A = 2, IL_B = 2, FD = 4;
  localparam int unsigned TM = ROWS * IL_A, TN = COLS * IL_B, NB = (TN + VEC - 1) / VEC;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, busy;
  layer_cfg_t cfg;
  logic rd_req_valid, rd_req_ready, rd_resp_valid;
  addr_t rd_req_addr;
  logic [VEC-1:0][31:0] rd_resp_data, wr_data;
  logic [1:0] bank_full, bank_release, bias_release;
  logic a_wr_en, b_wr_en, bias_wr_en, wr_bank;
  logic [7:0] wr_lane, wr_il;

  loader #(.ROWS(ROWS), .COLS(COLS), .VEC(VEC), .IL_A(IL_A), .IL_B(IL_B), .FIFO_DEPTH(FD)) dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  function automatic logic [VEC-1:0][31:0] vec_at(addr_t a);
    logic [VEC-1:0][31:0] v;
    for (int i = 0; i < VEC; i++) v[i] = (a + addr_t'(i)) ^ 32'h5A5A_0000;
    return v;
  endfunction

  // memory model
  addr_t  q_addr [$];
  longint q_due  [$];
  int outstanding = 0, max_out = 0, n_req = 0;
  always @(posedge clk) if (rst_n) begin
    if (rd_req_valid && rd_req_ready) begin
      q_addr.push_back(rd_req_addr);
      q_due.push_back(cyc + 2 + longint'($urandom % 8));
      n_req++;
    end
    outstanding += int'(rd_req_valid && rd_req_ready) - int'(rd_resp_valid);
    if (outstanding > max_out) max_out = outstanding;
  end
  always @(negedge clk) begin
    rd_req_ready <= ($urandom % 100) < 70;
    if (q_due.size() > 0 && q_due[0] <= cyc) begin
      rd_resp_valid <= 1'b1;
      rd_resp_data  <= vec_at(q_addr.pop_front());
      void'(q_due.pop_front());
    end else begin
      rd_resp_valid <= 1'b0;
    end
  end

  // shadow of the feeder and bias banks
  logic [VEC-1:0][31:0] sh_a [2][ROWS][IL_A];
  logic [VEC-1:0][31:0] sh_b [2][COLS][IL_B];
  logic [VEC-1:0][31:0] sh_bias [2][NB];
  always @(posedge clk) begin
    if (a_wr_en)    sh_a[wr_bank][wr_lane][wr_il] <= wr_data;
    if (b_wr_en)    sh_b[wr_bank][wr_lane][wr_il] <= wr_data;
    if (bias_wr_en) sh_bias[wr_bank][wr_il] <= wr_data;
  end

  task automatic chk(string what, logic [VEC-1:0][31:0] got, logic [VEC-1:0][31:0] e);
    checks++;
    if (got !== e) begin
      failures++;
      if (failures < 10) $display("MISMATCH %s: got %h expected %h", what, got, e);
    end
  endtask

  task automatic run(int mts, int nts, int kvs, bit bias_en);
    int s = 0;
    int K = kvs * VEC;
    int req0 = n_req;
    cfg = '0;
    cfg.m_tiles = cnt_t'(mts); cfg.n_tiles = cnt_t'(nts); cfg.k_vecs = cnt_t'(kvs);
    cfg.a_base = 32'h100; cfg.w_base = 32'h400; cfg.bias_base = 32'h800; cfg.c_base = 32'hC00;
    cfg.bias_en = bias_en;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    for (int mt = 0; mt < mts; mt++)
      for (int nt = 0; nt < nts; nt++)
        for (int kv = 0; kv < kvs; kv++) begin
          logic b, tb;
          b  = 1'(s);
          tb = 1'(mt * nts + nt);
          while (!bank_full[b]) @(negedge clk);
          for (int l = 0; l < int'(ROWS); l++)
            for (int i = 0; i < int'(IL_A); i++)
              chk($sformatf("A step %0d lane %0d il %0d", s, l, i), sh_a[b][l][i],
                  vec_at(cfg.a_base + addr_t'((mt*TM + i*ROWS + l) * K + kv*VEC)));
          for (int l = 0; l < int'(COLS); l++)
            for (int i = 0; i < int'(IL_B); i++)
              chk($sformatf("B step %0d lane %0d il %0d", s, l, i), sh_b[b][l][i],
                  vec_at(cfg.w_base + addr_t'((nt*TN + i*COLS + l) * K + kv*VEC)));
          if (kv == 0 && bias_en)
            for (int j = 0; j < int'(NB); j++)
              chk($sformatf("bias tile %0d,%0d vec %0d", mt, nt, j), sh_bias[tb][j],
                  vec_at(cfg.bias_base + addr_t'(nt*TN + j*VEC)));
          repeat ($urandom % 6) @(negedge clk);
          bank_release[b] = 1'b1;
          if (kv == kvs - 1) bias_release[tb] = 1'b1;
          @(negedge clk);
          bank_release = '0;
          bias_release = '0;
          s++;
        end
    repeat (5) @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("MISMATCH busy after layer"); end
    checks++;
    if (n_req - req0 != mts*nts*kvs*int'(TM+TN) + (bias_en ? mts*nts*int'(NB) : 0)) begin
      failures++;
      $display("MISMATCH request count %0d", n_req - req0);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; cfg = '0; bank_release = '0; bias_release = '0;
    rd_resp_valid = 0; rd_resp_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run(2, 2, 3, 1'b1);
    run(1, 3, 1, 1'b0);
    checks++;
    if (max_out > int'(FD) || max_out < 2) begin
      failures++;
      $display("MISMATCH outstanding reads peaked at %0d", max_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

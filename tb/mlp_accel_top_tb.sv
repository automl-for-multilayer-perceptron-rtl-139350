// mlp_accel_top_tb: end-to-end test of the grid accelerator at its default
// size. The testbench plays the host and the DRAM: it places a two-layer MLP
// (inputs, weights, biases) in a word-addressed memory model, runs layer 1
// (bias, ReLU) and then layer 2 on layer 1's output (no bias, identity), and
// compares every output word with an integer reference. All values are small
// integers, so every FP32 operation is exact and the reference needs no
// rounding model.
// The memory model accepts read requests with random back-pressure and
// answers them in order after a random latency; the write port also stalls
// at random. A third run uses an ideal memory (always ready, one-cycle
// latency). The test counts each mechanism of the design and fails if one
// never happened: compute stalled on memory, loading overlapped with
// compute (double buffering), loader waiting for a free bank, read and write
// back-pressure, several m and n tiles and k-steps, bias on and off, ReLU
// clamping. It also checks the replay rate: IL_A*IL_B issue cycles per
// k-step of every tile.
module mlp_accel_top_tb;
  import mlp_pkg::*;

  localparam int unsigned ROWS = 4, COLS = 4, VEC = 8, IL_A = 4, IL_B = 4;
  localparam int unsigned TM = ROWS * IL_A, TN = COLS * IL_B;
  localparam int MEMW = 1 << 14;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                  start;
  layer_cfg_t            cfg;
  logic                  busy, done, stall_mem;
  logic                  rd_req_valid, rd_req_ready, rd_resp_valid;
  addr_t                 rd_req_addr, wr_addr;
  logic [VEC-1:0][31:0]  rd_resp_data;
  logic                  wr_valid, wr_ready;
  logic [COLS-1:0][31:0] wr_data;

  mlp_accel_top dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  // ---------------- DRAM model ----------------
  logic [31:0] mem [MEMW];
  int  rd_ready_pct = 70, wr_ready_pct = 75, lat_min = 3, lat_max = 12;
  addr_t  q_addr [$];
  longint q_due  [$];

  always_ff @(posedge clk) begin
    if (rd_req_valid && rd_req_ready) begin
      q_addr.push_back(rd_req_addr);
      q_due.push_back(cyc + longint'(lat_min + $urandom % (lat_max - lat_min + 1)));
    end
    if (wr_valid && wr_ready) begin
      for (int c = 0; c < COLS; c++) mem[int'(wr_addr) + c] <= wr_data[c];
    end
  end

  always @(negedge clk) begin
    rd_req_ready <= ($urandom % 100) < rd_ready_pct;
    wr_ready     <= ($urandom % 100) < wr_ready_pct;
    if (q_due.size() > 0 && q_due[0] <= cyc) begin
      rd_resp_valid <= 1'b1;
      for (int v = 0; v < VEC; v++) rd_resp_data[v] <= mem[int'(q_addr[0]) + v];
      void'(q_addr.pop_front());
      void'(q_due.pop_front());
    end else begin
      rd_resp_valid <= 1'b0;
    end
  end

  // ---------------- mechanism counters ----------------
  int n_stall_mem = 0, n_overlap = 0, n_loader_wait = 0, n_rd_bp = 0, n_wr_bp = 0;
  int n_issue = 0, n_relu_clamp = 0, n_bias_layers = 0, n_nobias_layers = 0;
  int n_multi_k = 0, n_multi_m = 0, n_multi_n = 0;

  always @(posedge clk) if (rst_n) begin
    if (stall_mem) n_stall_mem++;
    if (dut.u_ctrl.iss_valid && dut.rd_resp_valid) n_overlap++;
    if (dut.u_loader.phase == dut.u_loader.PH_WAIT &&
        !dut.u_loader.bank_free[dut.u_loader.sbank]) n_loader_wait++;
    if (rd_req_valid && !rd_req_ready) n_rd_bp++;
    if (wr_valid && !wr_ready) n_wr_bp++;
    if (dut.u_ctrl.iss_valid) n_issue++;
  end

  // ---------------- host ----------------
  int A  [][];   // M x K
  int W  [][];   // N x K
  int Bi [];

  task automatic check_eq(string what, logic [31:0] got, logic [31:0] exp_v);
    checks++;
    if (got !== exp_v) begin
      failures++;
      if (failures < 10) $display("MISMATCH %s: got %h expected %h", what, got, exp_v);
    end
  endtask

  function automatic logic [31:0] i2f(int v);
    logic [31:0] r;
    int a, e;
    if (v == 0) return 32'h0;
    a = (v < 0) ? -v : v;
    e = 0;
    while ((a >> e) > 1) e++;
    r[31]    = v < 0;
    r[30:23] = 8'(e + 127);
    r[22:0]  = 23'((longint'(a) << 23 >> e) & 32'h7FFFFF);
    return r;
  endfunction

  // run one layer: C = act(A*W^T + b); A stored at a_base (M x K) etc.
  task automatic run_layer(int mt, int nt, int kvs, addr_t a_base, addr_t w_base,
                           addr_t b_base, addr_t c_base, bit bias_en, act_e act,
                           ref int Ain [][], output int Cout [][]);
    int M = mt * TM, N = nt * TN, K = kvs * VEC;
    int issue0;
    longint t0;
    // weights and bias
    W  = new[N];
    Bi = new[N];
    foreach (W[n]) begin
      W[n] = new[K];
      foreach (W[n][k]) begin
        W[n][k] = int'($urandom % 7) - 3;
        mem[int'(w_base) + n*K + k] = i2f(W[n][k]);
      end
      Bi[n] = int'($urandom % 41) - 20;
      mem[int'(b_base) + n] = i2f(Bi[n]);
    end
    foreach (Ain[m, k]) mem[int'(a_base) + m*K + k] = i2f(Ain[m][k]);
    // command
    cfg = '0;
    cfg.m_tiles = cnt_t'(mt);
    cfg.n_tiles = cnt_t'(nt);
    cfg.k_vecs = cnt_t'(kvs);
    cfg.a_base = a_base;
    cfg.w_base = w_base;
    cfg.bias_base = b_base;
    cfg.c_base = c_base;
    cfg.bias_en = bias_en;
    cfg.act = act;
    issue0 = n_issue;
    t0 = cyc;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    while (!done) @(posedge clk);
    @(posedge clk);
    $display("layer %0dx%0dx%0d: %0d cycles", M, K, N, cyc - t0);
    if (bias_en) n_bias_layers++; else n_nobias_layers++;
    if (kvs > 1) n_multi_k++;
    if (mt > 1) n_multi_m++;
    if (nt > 1) n_multi_n++;
    // replay rate
    checks++;
    if (n_issue - issue0 != mt * nt * kvs * IL_A * IL_B) begin
      failures++;
      $display("MISMATCH issue cycles %0d expected %0d", n_issue - issue0, mt*nt*kvs*IL_A*IL_B);
    end
    // reference
    Cout = new[M];
    foreach (Cout[m]) begin
      Cout[m] = new[N];
      foreach (Cout[m][n]) begin
        int s = 0;
        for (int k = 0; k < K; k++) s += Ain[m][k] * W[n][k];
        if (bias_en) s += Bi[n];
        if (act == ACT_RELU && s < 0) begin
          s = 0;
          n_relu_clamp++;
        end
        Cout[m][n] = s;
        check_eq($sformatf("C[%0d][%0d]", m, n), mem[int'(c_base) + m*N + n], i2f(s));
      end
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int X [][];
    int H [][];
    int Y [][];
    start = 1'b0;
    cfg = '0;
    rd_resp_valid = 1'b0;
    rd_resp_data = '0;
    foreach (mem[i]) mem[i] = 32'hDEAD_BEEF;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // batch of 2 tiles (32 inputs) with 24 features
    X = new[2 * TM];
    foreach (X[m]) begin
      X[m] = new[3 * VEC];
      foreach (X[m][k]) X[m][k] = int'($urandom % 9) - 4;
    end
    // layer 1: 24 -> 32 neurons, bias, ReLU
    run_layer(2, 2, 3, 32'h0000, 32'h0400, 32'h0800, 32'h0C00, 1'b1, ACT_RELU, X, H);
    // layer 2: 32 -> 16 neurons, no bias, identity
    run_layer(2, 1, 4, 32'h0C00, 32'h1000, 32'h1400, 32'h1800, 1'b0, ACT_NONE, H, Y);
    // same layer 2 again with an ideal memory
    rd_ready_pct = 100; wr_ready_pct = 100; lat_min = 1; lat_max = 1;
    run_layer(2, 1, 4, 32'h0C00, 32'h1000, 32'h1400, 32'h2000, 1'b1, ACT_RELU, H, Y);

    $display("mechanisms: stall_mem=%0d overlap=%0d loader_wait=%0d rd_bp=%0d wr_bp=%0d relu_clamp=%0d bias=%0d nobias=%0d multi_k=%0d multi_m=%0d multi_n=%0d",
             n_stall_mem, n_overlap, n_loader_wait, n_rd_bp, n_wr_bp, n_relu_clamp,
             n_bias_layers, n_nobias_layers, n_multi_k, n_multi_m, n_multi_n);
    if (n_stall_mem == 0)     begin failures++; $display("never: compute stalled on memory"); end
    if (n_overlap == 0)       begin failures++; $display("never: load overlapped compute"); end
    if (n_loader_wait == 0)   begin failures++; $display("never: loader waited for a bank"); end
    if (n_rd_bp == 0)         begin failures++; $display("never: read back-pressure"); end
    if (n_wr_bp == 0)         begin failures++; $display("never: write back-pressure"); end
    if (n_relu_clamp == 0)    begin failures++; $display("never: ReLU clamp"); end
    if (n_bias_layers == 0)   begin failures++; $display("never: bias layer"); end
    if (n_nobias_layers == 0) begin failures++; $display("never: layer without bias"); end
    if (n_multi_k == 0 || n_multi_m == 0 || n_multi_n == 0) begin
      failures++; $display("never: multiple k-steps / m tiles / n tiles");
    end
    checks += 9;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

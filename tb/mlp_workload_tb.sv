// mlp_workload_tb: runs one batch of TM=16 inputs through a two-layer MLP
// shaped like each of the six benchmark datasets, on the accelerator at its
// default size. Input widths and class counts are the datasets' public
// sizes (MNIST and Fashion-MNIST 784 -> 10, HAR 561 -> 6, Bioresponse
// 1776 -> 2, Phishing 30 -> 2, Credit-g 20 -> 2); the hidden layer of 32
// ReLU neurons is an arbitrary choice, since evolved layer sizes vary.
// Inputs are padded with zeros to whole vectors and classes to a whole tile.
// Values are random small integers, so every output is checked exactly
// against an integer reference. The testbench prints cycles per network and
// the implied outputs per second at 250 MHz for a single-bank-like memory
// (one vector per cycle, fixed latency).
module mlp_workload_tb;
  import mlp_pkg::*;

  localparam int unsigned ROWS = 4, COLS = 4, VEC = 8, IL_A = 4, IL_B = 4;
  localparam int unsigned TM = ROWS * IL_A, TN = COLS * IL_B;
  localparam int MEMW = 1 << 17;
  localparam int HID = 32;

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

  // memory: always ready, responses after a fixed latency
  logic [31:0] mem [MEMW];
  addr_t  q_addr [$];
  longint q_due  [$];
  assign rd_req_ready = 1'b1;
  assign wr_ready     = 1'b1;
  always @(posedge clk) begin
    if (rd_req_valid && rd_req_ready) begin
      q_addr.push_back(rd_req_addr);
      q_due.push_back(cyc + 8);
    end
    if (wr_valid && wr_ready)
      for (int c = 0; c < COLS; c++) mem[int'(wr_addr) + c] <= wr_data[c];
  end
  always @(negedge clk) begin
    if (q_due.size() > 0 && q_due[0] <= cyc) begin
      rd_resp_valid <= 1'b1;
      for (int v = 0; v < VEC; v++) rd_resp_data[v] <= mem[int'(q_addr[0]) + v];
      void'(q_addr.pop_front());
      void'(q_due.pop_front());
    end else begin
      rd_resp_valid <= 1'b0;
    end
  end

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

  // one layer; X is M x K (K padded), returns M x N (N padded)
  task automatic layer(int K, int N_real, bit relu, bit bias_en, ref int X [][], output int Y [][]);
    int Kp = ((K + VEC - 1) / VEC) * VEC;
    int Np = ((N_real + TN - 1) / TN) * TN;
    int W [][];
    int B [];
    addr_t a_base = 32'h0, w_base = 32'h8000, b_base = 32'h1_8000, c_base = 32'h1_9000;
    W = new[Np];
    B = new[Np];
    foreach (W[n]) begin
      W[n] = new[Kp];
      foreach (W[n][k]) begin
        W[n][k] = (n < N_real && k < K) ? int'($urandom % 5) - 2 : 0;
        mem[int'(w_base) + n*Kp + k] = i2f(W[n][k]);
      end
      B[n] = (n < N_real) ? int'($urandom % 21) - 10 : 0;
      mem[int'(b_base) + n] = i2f(B[n]);
    end
    foreach (X[m, k]) mem[int'(a_base) + m*Kp + k] = i2f(X[m][k]);
    cfg = '0;
    cfg.m_tiles = 1;
    cfg.n_tiles = cnt_t'(Np / TN);
    cfg.k_vecs = cnt_t'(Kp / VEC);
    cfg.a_base = a_base; cfg.w_base = w_base; cfg.bias_base = b_base; cfg.c_base = c_base;
    cfg.bias_en = bias_en;
    cfg.act = relu ? ACT_RELU : ACT_NONE;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    while (!done) @(posedge clk);
    @(posedge clk);
    Y = new[TM];
    foreach (Y[m]) begin
      Y[m] = new[Np];
      foreach (Y[m][n]) begin
        int s = 0;
        for (int k = 0; k < Kp; k++) s += X[m][k] * W[n][k];
        if (bias_en) s += B[n];
        if (relu && s < 0) s = 0;
        Y[m][n] = s;
        checks++;
        if (mem[int'(c_base) + m*Np + n] !== i2f(s)) begin
          failures++;
          if (failures < 10) $display("MISMATCH C[%0d][%0d] got %h expected %h", m, n,
                                      mem[int'(c_base) + m*Np + n], i2f(s));
        end
      end
    end
  endtask

  task automatic network(string name, int n_in, int n_out);
    int X [][];
    int H [][];
    int Y [][];
    int Kp = ((n_in + VEC - 1) / VEC) * VEC;
    longint t0;
    X = new[TM];
    foreach (X[m]) begin
      X[m] = new[Kp];
      foreach (X[m][k]) X[m][k] = (k < n_in) ? int'($urandom % 7) - 3 : 0;
    end
    t0 = cyc;
    layer(n_in, HID, 1'b1, 1'b1, X, H);
    layer(HID, n_out, 1'b0, 1'b1, H, Y);
    $display("%-14s %4d-%0d-%0d: %0d cycles for %0d inputs, %0.3g outputs/s at 250 MHz",
             name, n_in, HID, n_out, cyc - t0, TM, real'(TM) * 250.0e6 / real'(cyc - t0));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 1'b0;
    cfg = '0;
    rd_resp_valid = 1'b0;
    rd_resp_data = '0;
    foreach (mem[i]) mem[i] = 32'h0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    network("MNIST",         784, 10);
    network("Fashion-MNIST", 784, 10);
    network("HAR",           561, 6);
    network("Bioresponse",  1776, 2);
    network("Phishing",       30, 2);
    network("Credit-g",       20, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

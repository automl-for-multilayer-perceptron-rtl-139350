// pe_grid_tb: runs two output tiles through a small grid (2 x 3 PEs, VEC 2,
// interleave 2 x 2) with inputs skewed by the testbench as the feeders do:
// row r and column c see issue i at cycle i+r and i+c. Values are small
// integers, so the reference is an exact integer matrix product. After each
// tile every accumulator of every PE is read through the drain port and
// compared; the second tile checks that 'first' restarts the accumulation.
module pe_grid_tb;
  import mlp_pkg::*;
  import fp_ref_pkg::*;

  localparam int unsigned ROWS = 2, COLS = 3, VEC = 2, IL_A = 2, IL_B = 2, KV = 3;
  localparam int unsigned TM = ROWS * IL_A, TN = COLS * IL_B, K = KV * VEC;
  localparam int unsigned NI = KV * IL_A * IL_B;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [VEC-1:0][31:0] a_in [ROWS];
  pe_tag_t              tag_in [ROWS];
  logic [VEC-1:0][31:0] b_in [COLS];
  logic [0:0]           rd_row, rd_ia, rd_ib;
  fp32_t                rd_data [COLS];

  pe_grid #(.ROWS(ROWS), .COLS(COLS), .VEC(VEC), .IL_A(IL_A), .IL_B(IL_B)) dut (.*);

  int checks = 0, failures = 0;
  int A [TM][K];
  int B [TN][K];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_row = '0; rd_ia = '0; rd_ib = '0;
    for (int r = 0; r < ROWS; r++) begin a_in[r] = '0; tag_in[r] = '0; end
    for (int c = 0; c < COLS; c++) b_in[c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int tile = 0; tile < 2; tile++) begin
      foreach (A[m, k]) A[m][k] = int'($urandom % 9) - 4;
      foreach (B[n, k]) B[n][k] = int'($urandom % 9) - 4;
      // issue i: kv = i / (IL_A*IL_B), ia = (i / IL_B) % IL_A, ib = i % IL_B
      for (int t = 0; t < int'(NI + ROWS + COLS); t++) begin
        @(negedge clk);
        for (int r = 0; r < ROWS; r++) begin
          int i;
          i = t - r;
          if (i >= 0 && i < int'(NI)) begin
            int kv, ia, ib;
            kv = i / (IL_A * IL_B); ia = (i / IL_B) % IL_A; ib = i % IL_B;
            for (int v = 0; v < VEC; v++) a_in[r][v] = i2f(A[ia*ROWS + r][kv*VEC + v]);
            tag_in[r] = '{valid: 1'b1, first: (kv == 0), ia: 8'(ia), ib: 8'(ib)};
          end else begin
            tag_in[r] = '0;
            a_in[r]   = {VEC{32'h7FC0_0000}};
          end
        end
        for (int c = 0; c < COLS; c++) begin
          int i;
          i = t - c;
          if (i >= 0 && i < int'(NI)) begin
            int kv, ib;
            kv = i / (IL_A * IL_B); ib = i % IL_B;
            for (int v = 0; v < VEC; v++) b_in[c][v] = i2f(B[ib*COLS + c][kv*VEC + v]);
          end else begin
            b_in[c] = {VEC{32'h7FC0_0000}};
          end
        end
      end
      @(negedge clk);
      for (int r = 0; r < ROWS; r++) tag_in[r] = '0;
      repeat (ROWS + COLS + 2) @(negedge clk);
      for (int r = 0; r < ROWS; r++)
        for (int ia = 0; ia < IL_A; ia++)
          for (int ib = 0; ib < IL_B; ib++) begin
            rd_row = 1'(r); rd_ia = 1'(ia); rd_ib = 1'(ib);
            #1;
            for (int c = 0; c < COLS; c++) begin
              int s;
              s = 0;
              for (int k = 0; k < K; k++) s += A[ia*ROWS + r][k] * B[ib*COLS + c][k];
              checks++;
              if (rd_data[c] !== i2f(s)) begin
                failures++;
                if (failures < 10) $display("MISMATCH tile %0d C[%0d][%0d]: got %h expected %h",
                                            tile, ia*ROWS + r, ib*COLS + c, rd_data[c], i2f(s));
              end
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

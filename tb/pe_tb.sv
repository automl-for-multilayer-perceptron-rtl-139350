// pe_tb: drives one PE with random integer-valued FP32 vectors (exact
// arithmetic, integer reference) and random accumulator tags, including
// 'first' overwrites and idle cycles. Checks the registered forwarding of
// A, B and the tag, the two-edge latency from input to accumulator, and
// finally every accumulator through the read port.
module pe_tb;
  import mlp_pkg::*;
  import fp_ref_pkg::*;

  localparam int unsigned VEC = 4, IL_A = 2, IL_B = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [VEC-1:0][31:0] a_in, b_in, a_out, b_out;
  pe_tag_t              tag_in, tag_out;
  logic [0:0]           rd_ia;
  logic [1:0]           rd_ib;
  fp32_t                rd_data;

  pe #(.VEC(VEC), .IL_A(IL_A), .IL_B(IL_B)) dut (.*);

  int checks = 0, failures = 0;
  int model [IL_A][IL_B];
  bit touched [IL_A][IL_B];

  task automatic chk(string what, logic [31:0] got, logic [31:0] e);
    checks++;
    if (got !== e) begin
      failures++;
      if (failures < 10) $display("MISMATCH %s: got %h expected %h", what, got, e);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [VEC-1:0][31:0] pa, pb;
    pe_tag_t pt;
    int dot;
    a_in = '0; b_in = '0; tag_in = '0; rd_ia = '0; rd_ib = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // latency: one valid input, accumulator visible after exactly 2 edges
    for (int i = 0; i < VEC; i++) begin
      a_in[i] = i2f(i + 1);
      b_in[i] = i2f(2);
    end
    tag_in = '{valid: 1'b1, first: 1'b1, ia: 8'd1, ib: 8'd2};
    rd_ia = 1'b1; rd_ib = 2'd2;
    @(negedge clk);
    tag_in = '0;
    chk("acc after 1 edge", rd_data !== i2f(20) ? 32'd1 : 32'd0, 32'd1);
    @(negedge clk);
    chk("acc after 2 edges", rd_data, i2f(20));
    model[1][2] = 20;
    touched[1][2] = 1'b1;
    // random stream
    for (int t = 0; t < 1500; t++) begin
      @(negedge clk);
      for (int i = 0; i < VEC; i++) begin
        pa[i] = i2f(int'($urandom % 11) - 5);
        pb[i] = i2f(int'($urandom % 11) - 5);
      end
      pt.valid = ($urandom % 4) != 0;
      pt.ia    = 8'($urandom % IL_A);
      pt.ib    = 8'($urandom % IL_B);
      pt.first = ($urandom % 16) == 0 || !touched[pt.ia][pt.ib];
      // forwarding of the previous cycle's inputs
      chk("a_out", a_out, a_in);
      chk("b_out", b_out, b_in);
      chk("tag_out", 32'(tag_out), 32'(tag_in));
      a_in = pa; b_in = pb; tag_in = pt;
      if (pt.valid) begin
        dot = 0;
        for (int i = 0; i < VEC; i++) begin
          dot += int'(f2r(pa[i]) * f2r(pb[i]));
        end
        model[pt.ia][pt.ib] = pt.first ? dot : model[pt.ia][pt.ib] + dot;
        touched[pt.ia][pt.ib] = 1'b1;
      end
    end
    @(negedge clk);
    tag_in = '0;
    repeat (3) @(negedge clk);
    for (int i = 0; i < IL_A; i++)
      for (int j = 0; j < IL_B; j++) begin
        rd_ia = 1'(i); rd_ib = 2'(j);
        #1;
        if (touched[i][j]) chk($sformatf("acc[%0d][%0d]", i, j), rd_data, i2f(model[i][j]));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// fp32_add_tb: self-checking test of fp32_add. Directed special cases
// (zeros, infinities, NaN, overflow, flush of tiny results, exact cases)
// and random operands are compared bit for bit with the double-precision
// reference of fp_ref_pkg. Combinational block: a watchdog on simulated
// time guards the run.
module fp32_add_tb;
  import fp_ref_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_add dut (.a(a), .b(b), .y(y));

  task automatic check(logic [31:0] x, logic [31:0] z);
    logic [31:0] exp_y;
    a = x; b = z;
    #1;
    exp_y = ref_add(x, z);
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("MISMATCH %h add %h: got %h expected %h", x, z, y, exp_y);
    end
  endtask

  function automatic logic [31:0] rnd_fp(int emin, int emax);
    logic [31:0] r;
    r = $urandom;
    r[30:23] = 8'(emin + ($urandom % (emax - emin + 1)));
    return r;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] x, z;
    // directed
    check(32'h3F800000, 32'h40000000);   // 1, 2
    check(32'h3FC00000, 32'hBFC00000);   // 1.5, -1.5
    check(32'h00000000, 32'h80000000);   // +0, -0
    check(32'h80000000, 32'h80000000);   // -0, -0
    check(32'h7F800000, 32'h3F800000);   // inf, 1
    check(32'h7F800000, 32'hFF800000);   // inf, -inf
    check(32'h7F800000, 32'h00000000);   // inf, 0
    check(32'h7FC00001, 32'h3F800000);   // NaN
    check(32'h7F7FFFFF, 32'h7F7FFFFF);   // overflow
    check(32'h00800000, 32'h80800001);   // tiny results
    check(32'h00800000, 32'h3F000000);   // min normal * 0.5
    check(32'h00400000, 32'h3F800000);   // subnormal input
    check(32'h3F800001, 32'h3F800001);
    check(32'h4B7FFFFF, 32'h3F000000);
    check(32'h3F800000, 32'h33800000);   // 1 + 2^-24 (tie)
    check(32'h3F800001, 32'h33800000);
    check(32'h3F800000, 32'hB3800000);
    for (int i = 0; i < 40000; i++) begin
      case (i % 4)
        0: begin x = rnd_fp(100, 154); z = rnd_fp(100, 154); end
        1: begin x = rnd_fp(1, 254);   z = rnd_fp(1, 254);   end
        2: begin x = rnd_fp(120, 130); z = x ^ 32'h8000_0000; z[7:0] = 8'($urandom); end
        default: begin x = rnd_fp(110, 140); z = rnd_fp(110, 140); z[30:23] = x[30:23] - 8'($urandom % 30); end
      endcase
      check(x, z);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

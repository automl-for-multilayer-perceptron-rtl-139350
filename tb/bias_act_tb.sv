// bias_act_tb: checks bias addition and both activations of bias_act on
// random lanes: small integers (exact results, integer reference) and
// random FP32 values (reference rounding from fp_ref_pkg), with the bias
// switched on and off, and ReLU on negative sums including -0.
module bias_act_tb;
  import mlp_pkg::*;
  import fp_ref_pkg::*;

  localparam int unsigned LANES = 4;
  fp32_t acc [LANES], bias [LANES], y [LANES];
  logic  bias_en;
  act_e  act;
  int checks = 0, failures = 0, n_clamp = 0;

  bias_act #(.LANES(LANES)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] e;
    int iv [LANES], ib [LANES];
    for (int t = 0; t < 2000; t++) begin
      bias_en = 1'($urandom);
      act     = act_e'($urandom % 2);
      for (int l = 0; l < LANES; l++) begin
        if (t % 2 == 0) begin
          iv[l] = int'($urandom % 201) - 100;
          ib[l] = int'($urandom % 201) - 100;
          acc[l]  = i2f(iv[l]);
          bias[l] = i2f(ib[l]);
        end else begin
          acc[l]  = {1'($urandom), 8'(100 + $urandom % 50), 23'($urandom)};
          bias[l] = {1'($urandom), 8'(100 + $urandom % 50), 23'($urandom)};
        end
      end
      if (t == 7) acc[0] = 32'h8000_0000;
      #1;
      for (int l = 0; l < LANES; l++) begin
        e = bias_en ? ref_add(acc[l], bias[l]) : ref_add(acc[l], 32'h0);
        if (act == ACT_RELU && e[31]) begin
          e = 32'h0;
          n_clamp++;
        end
        checks++;
        if (y[l] !== e) begin
          failures++;
          if (failures < 10) $display("MISMATCH lane %0d: %h + %h (en %0d act %0d) got %h expected %h",
                                      l, acc[l], bias[l], bias_en, act, y[l], e);
        end
      end
    end
    checks++;
    if (n_clamp == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

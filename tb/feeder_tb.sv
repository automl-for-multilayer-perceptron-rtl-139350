// feeder_tb: fills both banks of a feeder, replays them while the other
// bank is being rewritten, and checks that lane l delivers vector
// [bank][l][il] with its tag exactly 1+l cycles after the replay request,
// and that out_valid marks exactly those cycles.
module feeder_tb;
  localparam int unsigned LANES = 3, IL = 2, VEC = 2, TAGW = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 wr_en, wr_bank, rd_en, rd_bank;
  logic [1:0]           wr_lane;
  logic [0:0]           wr_il, rd_il;
  logic [VEC-1:0][31:0] wr_data;
  logic [TAGW-1:0]      rd_tag;
  logic [VEC-1:0][31:0] out_vec   [LANES];
  logic [TAGW-1:0]      out_tag   [LANES];
  logic                 out_valid [LANES];

  feeder #(.LANES(LANES), .IL(IL), .VEC(VEC), .TAGW(TAGW)) dut (.*);

  int checks = 0, failures = 0;
  logic [VEC-1:0][31:0] model [2][LANES][IL];
  // expected output per cycle and lane
  logic                 exp_v [int][LANES];
  logic [VEC-1:0][31:0] exp_d [int][LANES];
  logic [TAGW-1:0]      exp_t [int][LANES];
  int cyc = 0;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker, sampled just before each rising edge
  always @(negedge clk) if (rst_n) begin
    for (int l = 0; l < LANES; l++) begin
      logic ev;
      ev = exp_v.exists(cyc) ? exp_v[cyc][l] : 1'b0;
      checks++;
      if (out_valid[l] !== ev) begin
        failures++;
        $display("MISMATCH valid cycle %0d lane %0d", cyc, l);
      end else if (ev) begin
        checks++;
        if (out_vec[l] !== exp_d[cyc][l] || out_tag[l] !== exp_t[cyc][l]) begin
          failures++;
          $display("MISMATCH data cycle %0d lane %0d: %h/%h expected %h/%h", cyc, l,
                   out_vec[l], out_tag[l], exp_d[cyc][l], exp_t[cyc][l]);
        end
      end
    end
  end

  always @(posedge clk) if (rst_n) cyc++;

  task automatic write(logic b, int l, int i, logic [VEC-1:0][31:0] d);
    wr_en = 1'b1; wr_bank = b; wr_lane = 2'(l); wr_il = 1'(i); wr_data = d;
    model[b][l][i] = d;
  endtask

  task automatic read(logic b, int i, logic [TAGW-1:0] t);
    rd_en = 1'b1; rd_bank = b; rd_il = 1'(i); rd_tag = t;
    for (int l = 0; l < LANES; l++) begin
      if (!exp_v.exists(cyc + 1 + l))
        for (int ll = 0; ll < LANES; ll++) exp_v[cyc + 1 + l][ll] = 1'b0;
      exp_v[cyc + 1 + l][l] = 1'b1;
      exp_d[cyc + 1 + l][l] = model[b][l][i];
      exp_t[cyc + 1 + l][l] = t;
    end
  endtask

  initial begin
    wr_en = 0; rd_en = 0; wr_bank = 0; rd_bank = 0; wr_lane = 0; wr_il = 0; rd_il = 0;
    wr_data = '0; rd_tag = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 6; round++) begin
      logic b;
      b = 1'(round);
      // fill bank b
      for (int l = 0; l < LANES; l++)
        for (int i = 0; i < IL; i++) begin
          @(negedge clk);
          rd_en = 1'b0;
          write(b, l, i, {32'($urandom), 32'($urandom)});
        end
      @(negedge clk);
      wr_en = 1'b0;
      // replay bank b while bank ~b is rewritten
      for (int k = 0; k < 2 * IL; k++) begin
        @(negedge clk);
        read(b, k % IL, 4'($urandom));
        if (k < LANES) write(~b, k, 0, {32'($urandom), 32'($urandom)});
        else           wr_en = 1'b0;
      end
      @(negedge clk);
      rd_en = 1'b0;
      wr_en = 1'b0;
      repeat ($urandom % 3) @(negedge clk);
    end
    repeat (LANES + 3) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_coef_regs: drives random segment words and stage-0 operations and checks the
// staggering of the coefficient registers: g0 now, b1 one clock later, a2 (alpha0 placed
// at the integer bits) two clocks later, and delta taken straight on a LOAD, held in
// between, reloaded on a TURN and kept on the TURN at the symmetry centre.
module tb_coef_regs;
  import spline_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  segment_t seg = '0;
  acc_op_e op0 = OP_IDLE;
  logic keep_d = 1'b0;
  coef_t d0, g0, b1, a2;
  int checks = 0, failures = 0;

  coef_regs dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    segment_t h1, h2;
    coef_t dm;
    repeat (2) @(negedge clk);
    rst = 1'b0;
    dm = '0; h1 = '0; h2 = '0;
    for (int i = 0; i < 3000; i++) begin
      seg = segment_t'({$urandom, $urandom, $urandom, $urandom, $urandom});
      op0 = acc_op_e'($urandom_range(0, 4));
      keep_d = 1'($urandom_range(0, 1));
      #1;
      checks++;
      if (g0 != seg.gamma || d0 != ((op0 == OP_LOAD) ? seg.delta : dm)) begin
        failures++;
        if (failures < 5) $display("cycle %0d: d0/g0 wrong (op %s)", i, op0.name());
      end
      if (i >= 2) begin
        checks++;
        if (b1 != h1.beta || a2 != alpha_to_coef(h2.alpha)) begin
          failures++;
          if (failures < 5) $display("cycle %0d: b1/a2 wrong", i);
        end
      end
      if (op0 == OP_LOAD || (op0 == OP_TURN && !keep_d)) dm = seg.delta;
      h2 = h1; h1 = seg;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

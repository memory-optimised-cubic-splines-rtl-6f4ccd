// tb_spline_acc: checks every operation of one accumulator against a model in 64-bit
// arithmetic wrapped to 36 bits, over random operations and operands, including acc_prev
// (the value one clock earlier) and synchronous reset.
module tb_spline_acc;
  import spline_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  acc_op_e op = OP_IDLE;
  coef_t coef = '0, addend = '0, sub_in = '0, turn_val = '0;
  coef_t acc, acc_prev;
  int checks = 0, failures = 0;
  int seen [5] = '{default: 0};

  spline_acc dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint w36(input longint v);
    longint m;
    m = v & 64'hF_FFFF_FFFF;
    if (m[35]) m = m | 64'hFFFF_FFF0_0000_0000;
    return m;
  endfunction

  function automatic coef_t rnd36();
    return coef_t'({$urandom, $urandom});
  endfunction

  longint m_acc, m_prev, nxt;

  initial begin
    @(posedge clk); @(negedge clk);
    checks++;
    if (acc != 0 || acc_prev != 0) begin failures++; $display("reset value wrong"); end
    rst = 1'b0;
    m_acc = 0; m_prev = 0;
    for (int i = 0; i < 2000; i++) begin
      op = acc_op_e'($urandom_range(0, 4));
      coef = rnd36(); addend = rnd36(); sub_in = rnd36(); turn_val = rnd36();
      case (op)
        OP_LOAD: nxt = w36(longint'(coef) + longint'(addend));
        OP_ADD:  nxt = w36(m_acc + longint'(addend));
        OP_SUB:  nxt = w36(m_acc - longint'(sub_in));
        OP_TURN: nxt = longint'(turn_val);
        default: nxt = m_acc;
      endcase
      seen[op]++;
      @(negedge clk);
      m_prev = m_acc; m_acc = nxt;
      checks++;
      if (longint'(acc) != m_acc || longint'(acc_prev) != m_prev) begin
        failures++;
        if (failures < 5) $display("op %s: acc %0d prev %0d, expected %0d %0d", op.name(),
                                   acc, acc_prev, m_acc, m_prev);
      end
    end
    for (int k = 0; k < 5; k++) begin
      checks++;
      if (seen[k] == 0) begin failures++; $display("operation %0d never exercised", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

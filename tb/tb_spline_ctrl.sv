// tb_spline_ctrl: runs the control FSM against a model of the segment memory (a table of
// segment lengths behind a one-clock read register) and checks, for plain and mirrored
// pulses of random lengths: the stage-0 operation of every clock (LOAD on the first
// sample of a forward segment, ADD after it, SUB on backward samples, TURN on the last
// sample before each backward segment), the turn-around index, the final-sample flag, the
// number of samples, that every forward segment is read before it is loaded, and that a
// start is ignored while busy or when seg_num is zero.
module tb_spline_ctrl;
  import spline_pkg::*;
  localparam int unsigned SEG_AW = 10;

  logic clk = 1'b0, rst = 1'b1;
  logic start_pulse = 1'b0, pulse_sym = 1'b0, accept_ok = 1'b1;
  logic [SEG_AW-1:0] start_addr = '0;
  logic [SEG_AW:0] seg_num = '0;
  logic started, busy, rd_en;
  logic [SEG_AW-1:0] rd_addr;
  seglen_t mem_len;
  ctrl_t ctrl0;
  symidx_t idx0;
  int checks = 0, failures = 0;

  int lens [1024];
  int last_read;

  spline_ctrl #(.SEG_AW(SEG_AW)) dut (.*);

  always #5 clk = ~clk;

  // memory model: registered read of the length table
  always_ff @(posedge clk) if (rd_en) begin
    mem_len   <= seglen_t'(lens[rd_addr]);
    last_read <= int'(rd_addr);
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic play(input int base, input int n, input logic sym);
    acc_op_e exp_op [4096]; int exp_idx [4096]; int exp_seg [4096]; int ne; int errs;
    int vs [64]; logic vf [64]; int nv;
    nv = 0;
    for (int s = 0; s < n; s++) begin vs[nv] = s; vf[nv] = 1; nv++; end
    if (sym) for (int s = n - 1; s >= 0; s--) begin vs[nv] = s; vf[nv] = 0; nv++; end
    ne = 0;
    for (int v = 0; v < nv; v++)
      for (int t = 0; t < lens[base + vs[v]]; t++) begin
        logic lastslot;
        lastslot = (t == lens[base + vs[v]] - 1);
        exp_seg[ne] = base + vs[v];
        exp_idx[ne] = -1;
        if (lastslot && v + 1 < nv && !vf[v + 1]) begin
          exp_op[ne] = OP_TURN; exp_idx[ne] = vs[v + 1];
        end else if (!vf[v]) exp_op[ne] = OP_SUB;
        else if (t == 0)     exp_op[ne] = OP_LOAD;
        else                 exp_op[ne] = OP_ADD;
        ne++;
      end
    @(negedge clk);
    start_addr = SEG_AW'(base); seg_num = (SEG_AW+1)'(n); pulse_sym = sym; start_pulse = 1'b1;
    @(negedge clk);
    start_pulse = 1'b0;
    errs = 0;
    for (int i = 0; i < ne; i++) begin
      checks++;
      if (!ctrl0.valid || ctrl0.op != exp_op[i] || ctrl0.last != (i == ne - 1)
          || (exp_idx[i] >= 0 && int'(idx0) != exp_idx[i])
          || (exp_op[i] == OP_LOAD && last_read != exp_seg[i])) begin
        failures++; errs++;
        if (errs < 5) $display("pulse %0d+%0d sym %0b slot %0d: op %s idx %0d last %0b, expected %s idx %0d (read %0d)",
                               base, n, sym, i, ctrl0.op.name(), idx0, ctrl0.last,
                               exp_op[i].name(), exp_idx[i], last_read);
      end
      // a start while busy must be ignored
      if (i == 1) start_pulse = 1'b1;
      @(negedge clk);
      start_pulse = 1'b0;
    end
    checks++;
    if (ctrl0.valid || busy) begin failures++; $display("still busy after %0d samples", ne); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst = 1'b0;
    for (int s = 0; s < 1024; s++) lens[s] = $urandom_range(1, 9);
    lens[5] = 1; lens[6] = 1; lens[7] = 1;
    play(5, 3, 1'b0);
    play(5, 3, 1'b1);
    for (int r = 0; r < 40; r++)
      play($urandom_range(0, 1000), $urandom_range(1, 12), r[0]);
    // seg_num = 0 does nothing
    @(negedge clk);
    seg_num = '0; start_pulse = 1'b1;
    @(negedge clk);
    start_pulse = 1'b0;
    checks++;
    if (busy || started) begin failures++; $display("started with seg_num 0"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_spline_pipeline: drives the accumulator pipeline directly with a schedule built in
// the testbench (one control word per clock, coefficients staggered by stage) and checks
// y against the closed form alpha_t = a + t*b + g*t(t+1)/2 + d*t(t+1)(t+2)/6 (mod 2**36).
// Cases: the 4-sample mirrored segment of the paper's timing diagram (expected samples
// a0 a1 a2 a3 a3 a2 a1 a0), plain multi-segment pulses, and mirrored multi-segment pulses
// whose backward segments restart from the turn-around store. y must follow the stage-0
// word by exactly three clocks.
module tb_spline_pipeline;
  import spline_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  ctrl_t ctrl0 = '0;
  symidx_t idx0 = '0;
  coef_t d0 = '0, g0 = '0, b1 = '0, a2 = '0;
  coef_t y;
  logic y_valid, y_last;
  int checks = 0, failures = 0;

  spline_pipeline dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint sa [8], sb [8], sg [8], sd [8];
  int     sl [8];

  function automatic longint w36(input longint v);
    longint m;
    m = v & 64'hF_FFFF_FFFF;
    if (m[35]) m = m | 64'hFFFF_FFF0_0000_0000;
    return m;
  endfunction

  function automatic longint ref_alpha(input int s, input longint t);
    return w36((sa[s] <<< 20) + t * sb[s] + sg[s] * ((t * (t + 1)) / 2)
               + sd[s] * ((t * (t + 1) * (t + 2)) / 6));
  endfunction

  // per-cycle schedule
  ctrl_t   sc_ctrl [1024];
  symidx_t sc_idx  [1024];
  int      sc_seg  [1024];
  int      ncyc;
  longint  exp_y [1024];
  int      exp_n;

  task automatic schedule(input int n, input logic sym);
    int vis_s [16]; logic vis_f [16]; int nv;
    nv = 0;
    for (int s = 0; s < n; s++) begin vis_s[nv] = s; vis_f[nv] = 1'b1; nv++; end
    if (sym) for (int s = n - 1; s >= 0; s--) begin vis_s[nv] = s; vis_f[nv] = 1'b0; nv++; end
    ncyc = 0;
    for (int v = 0; v < nv; v++) begin
      for (int t = 0; t < sl[vis_s[v]]; t++) begin
        ctrl_t c;
        logic lastslot, nextbwd;
        lastslot = (t == sl[vis_s[v]] - 1);
        nextbwd  = (v + 1 < nv) && !vis_f[v + 1];
        c = '0;
        c.valid  = 1'b1;
        c.fwd    = vis_f[v];
        c.first  = vis_f[v] && t == 0;
        c.cap    = vis_f[v] && lastslot && sym;
        c.turn   = lastslot && nextbwd;
        c.bypass = c.turn && vis_f[v];
        c.last   = lastslot && v == nv - 1;
        c.op     = c.turn ? OP_TURN : (!vis_f[v] ? OP_SUB : (t == 0 ? OP_LOAD : OP_ADD));
        sc_ctrl[ncyc] = c;
        sc_idx[ncyc]  = symidx_t'((c.turn && !vis_f[v]) ? vis_s[v + 1] : vis_s[v]);
        // the delta in use is that of the segment being played, or of the one turned to
        sc_seg[ncyc]  = vis_s[v];
        ncyc++;
      end
    end
    exp_n = 0;
    for (int s = 0; s < n; s++)
      for (int t = 0; t < sl[s]; t++) exp_y[exp_n++] = ref_alpha(s, longint'(t));
    if (sym) begin
      int k; k = exp_n;
      for (int i = 0; i < k; i++) exp_y[exp_n++] = exp_y[k - 1 - i];
    end
  endtask

  task automatic run(input int n, input logic sym, input string name);
    int got, errs;
    schedule(n, sym);
    got = 0; errs = 0;
    for (int c = 0; c < ncyc + 4; c++) begin
      // stage-0 inputs for cycle c
      if (c < ncyc) begin
        ctrl0 = sc_ctrl[c]; idx0 = sc_idx[c];
        d0 = coef_t'(sd[sc_seg[c]]); g0 = coef_t'(sg[sc_seg[c]]);
      end else begin
        ctrl0 = '0; idx0 = '0;
      end
      // stage 1 works on the word of cycle c-1, stage 2 on that of c-2
      if (c >= 1 && c - 1 < ncyc) b1 = coef_t'(sb[sc_seg[c - 1]]);
      if (c >= 2 && c - 2 < ncyc) a2 = alpha_to_coef(16'(sa[sc_seg[c - 2]]));
      #1;
      // y now holds the result of stage-0 cycle c-3
      if (c >= 3 && c - 3 < ncyc) begin
        checks++;
        if (!y_valid || y != coef_t'(exp_y[c - 3]) || y_last != (c - 3 == ncyc - 1)) begin
          failures++; errs++;
          if (errs < 5) $display("%s: sample %0d: valid %0b y %h, expected %h", name, c - 3,
                                 y_valid, y, exp_y[c - 3][35:0]);
        end
        got++;
      end else if (c >= 3) begin
        checks++;
        if (y_valid) begin failures++; $display("%s: y_valid after the end", name); end
      end
      @(negedge clk);
    end
    $display("%s: %0d samples", name, got);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst = 1'b0;
    // timing-diagram case: one 4-sample segment, mirrored
    sa[0] = 100; sb[0] = 3 <<< 20; sg[0] = 2 <<< 20; sd[0] = 1 <<< 20; sl[0] = 4;
    run(1, 1'b1, "diagram");
    checks++;
    if (exp_y[3] != exp_y[4] || exp_y[0] != exp_y[7]) begin
      failures++; $display("diagram: expected sequence not mirrored");
    end
    for (int r = 0; r < 20; r++) begin
      int n;
      n = $urandom_range(1, 6);
      for (int s = 0; s < n; s++) begin
        sa[s] = longint'($urandom_range(0, 60000)) - 30000;
        sb[s] = w36({$urandom, $urandom});
        sg[s] = w36({$urandom, $urandom}) >>> 6;
        sd[s] = w36({$urandom, $urandom}) >>> 12;
        sl[s] = $urandom_range(1, 12);
      end
      run(n, r[0], r[0] ? "mirrored" : "plain");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

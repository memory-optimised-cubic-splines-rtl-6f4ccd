// tb_workloads: plays the pulse shapes the design is meant for on the full-size design.
//
//   blackman  : 20 us Blackman envelope at 1 GS/s (20000 samples), 6 segments, mirrored,
//               so only 3 segments are stored
//   gaussian  : Gaussian envelope exp(-(t-15000)^2/1.6e7), 30000 samples, 7 segments
//   transport : piecewise-quadratic frequency ramp of 31 us at 500 MS/s (15500 samples),
//               6 segments, scaled to the 16-bit range
//   40000-sample Gaussian, Blackman and sigmoid envelopes at 4 and 10 segments, the
//               sizes of the published fitting-error comparison; the Gaussian width
//               (sigma = 3769 samples, the 30000-sample one stretched) and the sigmoid
//               slope (30000 / (1 + exp(-(t - 20000) / 2000))) are chosen here
// The testbench fits each segment with a cubic Hermite polynomial p(u) = p0 + p1 u +
// p2 u^2 + p3 u^3 (u = sample index in the segment), converts it to the recursion's start
// values a = p0, b = p1 - p2 + p3, g = 2 p2 - 6 p3, d = 6 p3, and rounds them to 16-bit
// integer (a) and 36-bit/20-fraction fixed point (b, g, d). It then checks every sample:
//   - the 36-bit accumulator equals the closed form of the rounded coefficients exactly;
//   - its distance from the unrounded cubic equals the accumulated rounding error
//     e_a + n e_b + n(n+1)/2 e_g + n(n+1)(n+2)/6 e_d (to 1e-3, modulo the 36-bit range:
//     with plain rounding and 10000-sample segments the error exceeds the range and the
//     accumulator wraps, which the testbench reports);
//   - pulse_out is that value truncated to 16 bits;
// and prints the largest deviation from the ideal pulse, which grows with segment length
// as the cubic error term predicts.
//
// Each long pulse is played twice: once with every coefficient rounded to nearest, and once
// with a rounding-aware fit. That fit rounds d first, then shifts g, b and a before rounding
// them, each time by the least-squares amount that lets the lower-order terms cancel the
// error the already-rounded terms accumulate over the segment. The hardware sees only another
// coefficient set. Besides the deviation from the ideal pulse (fit error plus rounding
// error) the testbench tracks the rounding error alone, the distance between the hardware
// output and the unrounded cubic. Wherever plain rounding leaves more than 10 LSB of it,
// the rounding-aware fit must cut it by at least a factor of five.
module tb_workloads;
  import spline_pkg::*;

  localparam int unsigned SEG_AW = 10;
  localparam real PI = 3.14159265358979;
  localparam real SCALE = 1048576.0;  // 2**20

  logic clk = 1'b0, rst = 1'b1;
  logic avs_write = 1'b0;
  logic [COEF_W-1:0] writedata = '0;
  logic [SEG_AW+BANK_W-1:0] avs_address = '0;
  logic start_pulse = 1'b0, pulse_sym = 1'b0;
  logic [SEG_AW-1:0] start_addr = '0;
  logic [SEG_AW:0] seg_num = '0;
  logic [31:0] freq_word = 32'h0100_0000, phase_word = '0;
  sample_t pulse_out, dac_data;
  logic pulse_running, pulse_valid, pulse_done, dac_valid;
  int checks = 0, failures = 0;

  dds_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ideal pulses, in output LSB, as a function of the sample index
  function automatic real shape(input int kind, input real t);
    real x, tp, f0, ff;
    case (kind)
      0, 4: begin  // Blackman, 20000 or 40000 samples, symmetric about the centre
        x = (t + 0.5) / ((kind == 0) ? 20000.0 : 40000.0);
        return 30000.0 * (0.42 - 0.5 * $cos(2.0 * PI * x) + 0.08 * $cos(4.0 * PI * x));
      end
      1: return 30000.0 * $exp(-((t - 15000.0) ** 2) / 1.6e7);
      3: return 30000.0 * $exp(-((t - 19999.5) ** 2) / 2.8444e7);
      5: return 30000.0 / (1.0 + $exp(-(t - 20000.0) / 2000.0));
      default: begin  // piecewise quadratic ramp from f0 to ff over tp samples
        tp = 15500.0; f0 = -15000.0; ff = 15000.0;
        if (t <= tp / 2.0) return f0 + 2.0 * (ff - f0) / (tp * tp) * t * t;
        return ff - 2.0 * (ff - f0) / (tp * tp) * (t - tp) * (t - tp);
      end
    endcase
  endfunction

  function automatic real dshape(input int kind, input real t);
    return (shape(kind, t + 0.5) - shape(kind, t - 0.5));
  endfunction

  function automatic longint w36(input longint v);
    longint m;
    m = v & 64'hF_FFFF_FFFF;
    if (m[35]) m = m | 64'hFFFF_FFF0_0000_0000;
    return m;
  endfunction

  // per segment: float cubic, rounded coefficients, rounding errors
  real    p0 [16], p1 [16], p2 [16], p3 [16];
  longint qa [16], qb [16], qg [16], qd [16];
  real    ea [16], eb [16], eg [16], ed [16];
  int     len [16], t0 [16];

  task automatic avs_wr(input int seg, input int bank, input logic [COEF_W-1:0] data);
    @(negedge clk);
    avs_write = 1'b1; avs_address = {seg[SEG_AW-1:0], bank[1:0]}; writedata = data;
    @(negedge clk);
    avs_write = 1'b0;
  endtask

  // Least-squares shift of the free coefficients (the last nfree of a, b, g) that best
  // cancels the error err(u) = e_b u + e_g u(u+1)/2 + e_d u(u+1)(u+2)/6 of those already
  // rounded, over u = 0 .. n-1. Basis functions are scaled by powers of n to keep the
  // normal equations well conditioned. Returns the shifts in k[0] (a), k[1] (b), k[2] (g).
  task automatic comp_shift(input int n, input int nfree, input real eb_, input real eg_,
                            input real ed_, output real k [3]);
    real m [3][4], phi [3], sc [3], e, uu, piv, f;
    int  lo;
    lo = 3 - nfree;
    sc[0] = 1.0; sc[1] = real'(n); sc[2] = real'(n) * real'(n);
    for (int i = 0; i < 3; i++) for (int j = 0; j < 4; j++) m[i][j] = 0.0;
    for (int u = 0; u < n; u++) begin
      uu = real'(u);
      phi[0] = 1.0; phi[1] = uu / sc[1]; phi[2] = uu * (uu + 1.0) / 2.0 / sc[2];
      e = eb_ * uu + eg_ * uu * (uu + 1.0) / 2.0 + ed_ * uu * (uu + 1.0) * (uu + 2.0) / 6.0;
      for (int i = lo; i < 3; i++) begin
        for (int j = lo; j < 3; j++) m[i][j] += phi[i] * phi[j];
        m[i][3] -= phi[i] * e;
      end
    end
    for (int i = lo; i < 3; i++) begin  // Gauss-Jordan elimination
      piv = m[i][i];
      for (int j = lo; j < 4; j++) m[i][j] /= piv;
      for (int r = lo; r < 3; r++) if (r != i) begin
        f = m[r][i];
        for (int j = lo; j < 4; j++) m[r][j] -= f * m[i][j];
      end
    end
    for (int i = 0; i < 3; i++) k[i] = (i < lo) ? 0.0 : m[i][3] / sc[i];
  endtask

  task automatic fit_and_load(input int kind, input int total, input int nseg,
                              input logic qaware);
    int base;
    real f0, f1, m0, m1, n, b, g, d;
    real k [3];
    base = 0;
    for (int s = 0; s < nseg; s++) begin
      len[s] = total / nseg + ((s < total % nseg) ? 1 : 0);
      t0[s] = base;
      base += len[s];
      n  = real'(len[s]);
      f0 = shape(kind, real'(t0[s]));      f1 = shape(kind, real'(t0[s]) + n);
      m0 = dshape(kind, real'(t0[s]));     m1 = dshape(kind, real'(t0[s]) + n);
      p0[s] = f0; p1[s] = m0;
      p2[s] = (3.0 * (f1 - f0) / n - 2.0 * m0 - m1) / n;
      p3[s] = (m0 + m1 - 2.0 * (f1 - f0) / n) / (n * n);
      b = p1[s] - p2[s] + p3[s]; g = 2.0 * p2[s] - 6.0 * p3[s]; d = 6.0 * p3[s];
      qd[s] = longint'(d * SCALE);
      k = '{0.0, 0.0, 0.0};
      if (qaware) comp_shift(len[s], 3, 0.0, 0.0, real'(qd[s]) / SCALE - d, k);
      qg[s] = longint'((g + k[2]) * SCALE);
      if (qaware) comp_shift(len[s], 2, 0.0, real'(qg[s]) / SCALE - g,
                             real'(qd[s]) / SCALE - d, k);
      qb[s] = longint'((b + k[1]) * SCALE);
      if (qaware) comp_shift(len[s], 1, real'(qb[s]) / SCALE - b, real'(qg[s]) / SCALE - g,
                             real'(qd[s]) / SCALE - d, k);
      qa[s] = longint'(p0[s] + k[0]);
      ea[s] = real'(qa[s]) - p0[s];
      eb[s] = real'(qb[s]) / SCALE - b;
      eg[s] = real'(qg[s]) / SCALE - g;
      ed[s] = real'(qd[s]) / SCALE - d;
      avs_wr(s, 0, {LEN_W'(len[s]), 16'(qa[s])});
      avs_wr(s, 1, 36'(qb[s]));
      avs_wr(s, 2, 36'(qg[s]));
      avs_wr(s, 3, 36'(qd[s]));
    end
  endtask

  task automatic run(input int kind, input int total, input int nseg, input logic sym,
                     input logic qaware, input string name, output real worst);
    real maxq, q, diff;
    int  nwrap;
    int stored, nsamp, got, errs, s, seq [2];
    longint u;
    real maxdev, dev;
    longint exact;
    real hw, fl, pred;
    stored = sym ? nseg / 2 : nseg;
    fit_and_load(kind, sym ? total / 2 : total, stored, qaware);
    nsamp = total;
    @(negedge clk);
    start_addr = '0; seg_num = (SEG_AW+1)'(stored); pulse_sym = sym; start_pulse = 1'b1;
    @(negedge clk);
    start_pulse = 1'b0;
    while (!pulse_valid) @(negedge clk);
    got = 0; errs = 0; maxdev = 0.0; maxq = 0.0; nwrap = 0;
    while (pulse_valid) begin
      // which stored segment and which step of it this sample is
      int k; k = (sym && got >= nsamp / 2) ? (nsamp - 1 - got) : got;
      s = 0;
      while (s + 1 < stored && k >= t0[s + 1]) s++;
      u = longint'(k) - longint'(t0[s]);
      exact = w36((qa[s] <<< 20) + longint'(u) * qb[s] + qg[s] * ((longint'(u) * (u + 1)) / 2)
                  + qd[s] * ((longint'(u) * (u + 1) * (u + 2)) / 6));
      hw   = real'(dut.u_shaper.u_pipe.y) / SCALE;
      fl   = p0[s] + p1[s] * u + p2[s] * u * u + p3[s] * u * u * u;
      pred = ea[s] + u * eb[s] + u * (u + 1) / 2.0 * eg[s] + u * (u + 1.0) * (u + 2.0) / 6.0 * ed[s];
      checks += 3;
      if (longint'(dut.u_shaper.u_pipe.y) != exact) begin
        failures++; errs++;
        if (errs < 5) $display("%s: sample %0d not bit exact", name, got);
      end
      // the accumulator wraps modulo 2**16 output LSB; so does the model comparison
      diff = hw - fl - pred;
      if (diff > 32768.0 || diff < -32768.0) begin
        nwrap++;
        diff = diff - 65536.0 * real'($rtoi(diff / 65536.0 + (diff > 0 ? 0.5 : -0.5)));
      end
      if (diff > 1e-3 || diff < -1e-3) begin
        failures++; errs++;
        if (errs < 5) $display("%s: sample %0d error %f, rounding model predicts %f", name, got,
                               hw - fl, pred);
      end
      if (pulse_out != sample_t'(exact[35:20])) begin
        failures++; errs++;
      end
      q = hw - fl;
      if (q < 0) q = -q;
      if (q > maxq) maxq = q;
      dev = real'(pulse_out) - shape(kind, real'(k));
      if (dev < 0) dev = -dev;
      if (dev > maxdev) maxdev = dev;
      got++;
      @(negedge clk);
    end
    checks++;
    if (got != nsamp) begin failures++; $display("%s: %0d samples, expected %0d", name, got, nsamp); end
    $display("%s: %0d samples, %0d segments (%0d stored), %0d memory bits used, max deviation from ideal %0.1f LSB, of it rounding %0.1f LSB",
             name, got, nseg, stored, stored * 4 * 36, maxdev, maxq);
    if (nwrap > 0) $display("%s: accumulated rounding error wrapped the 36-bit accumulator on %0d samples",
                            name, nwrap);
    worst = maxq;
  endtask

  // the rounding-aware fit must beat plain rounding by at least a factor of five
  task automatic compare(input string name, input real plain, input real aware);
    checks++;
    if (plain > 10.0 && aware * 5.0 > plain) begin
      failures++;
      $display("%s: rounding-aware fit %0.1f LSB, plain rounding %0.1f LSB", name, aware, plain);
    end
  endtask

  real w_plain, w_aware;
  localparam int    fig_kind [3] = '{3, 4, 5};
  localparam string fig_name [3] = '{"gaussian", "blackman", "sigmoid"};
  localparam int    fig_seg  [2] = '{4, 10};

  initial begin
    repeat (4) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    run(0, 20000, 6, 1'b1, 1'b0, "blackman 20us 1GS/s", w_plain);
    run(0, 20000, 6, 1'b1, 1'b1, "blackman 20us 1GS/s, rounding-aware", w_aware);
    compare("blackman", w_plain, w_aware);
    run(1, 30000, 7, 1'b0, 1'b0, "gaussian 30000", w_plain);
    run(1, 30000, 7, 1'b0, 1'b1, "gaussian 30000, rounding-aware", w_aware);
    compare("gaussian", w_plain, w_aware);
    run(2, 15500, 6, 1'b0, 1'b0, "transport 31us 500MS/s", w_plain);
    run(0, 20000, 20, 1'b1, 1'b0, "blackman 20 segments", w_plain);
    foreach (fig_kind[i]) foreach (fig_seg[j]) begin
      run(fig_kind[i], 40000, fig_seg[j], 1'b0, 1'b0,
          $sformatf("%s 40000, %0d segments", fig_name[i], fig_seg[j]), w_plain);
      run(fig_kind[i], 40000, fig_seg[j], 1'b0, 1'b1,
          $sformatf("%s 40000, %0d segments, rounding-aware", fig_name[i], fig_seg[j]), w_aware);
      compare(fig_name[i], w_plain, w_aware);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

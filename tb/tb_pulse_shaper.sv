// tb_pulse_shaper: self-checking test of the cubic-spline pulse shaper.
//
// Loads segments through the Avalon write port, plays plain and mirrored pulses and
// compares every sample with a reference computed from the closed form of the recursion,
// alpha_t = a + t*b + g*t(t+1)/2 + d*t(t+1)(t+2)/6 (mod 2**36), which does not use the
// recursion itself. A mirrored pulse must equal its forward half followed by the same
// samples in reverse order. Also checked: the start-to-first-sample latency (3 clocks),
// one sample per clock with no gap at any segment boundary, pulse_done on the last sample
// and pulse_running around the pulse.
module tb_pulse_shaper;
  import spline_pkg::*;

  localparam int unsigned SEG_AW = 10;
  localparam int MAXS = 4096;

  logic clk = 1'b0, rst = 1'b1;
  logic avs_write = 1'b0;
  logic [COEF_W-1:0] writedata = '0;
  logic [SEG_AW+BANK_W-1:0] avs_address = '0;
  logic start_pulse = 1'b0, pulse_sym = 1'b0;
  logic [SEG_AW-1:0] start_addr = '0;
  logic [SEG_AW:0] seg_num = '0;
  sample_t pulse_out;
  logic pulse_running, pulse_valid, pulse_done;

  int checks = 0, failures = 0;

  pulse_shaper #(.SEG_AW(SEG_AW)) dut (.*);

  always #5 clk = ~clk;

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // segments written to memory, mirrored in the testbench
  longint sa [1024], sb [1024], sg [1024], sd [1024];
  int     sl [1024];

  function automatic longint wrap36(input longint v);
    longint m;
    m = v & 64'hF_FFFF_FFFF;
    if (m[35]) m = m | 64'hFFFF_FFF0_0000_0000;
    return m;
  endfunction

  // closed form of the forward recursion for sample t of segment s
  function automatic longint ref_alpha(input int s, input longint t);
    longint v;
    v = (sa[s] <<< 20) + t * sb[s] + sg[s] * ((t * (t + 1)) / 2)
        + sd[s] * ((t * (t + 1) * (t + 2)) / 6);
    return wrap36(v);
  endfunction

  task automatic avs_wr(input int seg, input int bank, input logic [COEF_W-1:0] data);
    @(negedge clk);
    avs_write   = 1'b1;
    avs_address = {seg[SEG_AW-1:0], bank[1:0]};
    writedata   = data;
    @(negedge clk);
    avs_write   = 1'b0;
  endtask

  task automatic write_seg(input int s, input int len, input longint a, input longint b,
                           input longint g, input longint d);
    sa[s] = a; sb[s] = wrap36(b); sg[s] = wrap36(g); sd[s] = wrap36(d); sl[s] = len;
    avs_wr(s, 0, {len[LEN_W-1:0], a[15:0]});
    avs_wr(s, 1, b[35:0]);
    avs_wr(s, 2, g[35:0]);
    avs_wr(s, 3, d[35:0]);
  endtask

  // random coefficients of a moderate size, so that the envelope stays meaningful
  task automatic rand_seg(input int s, input int len);
    longint a, b, g, d;
    a = longint'($urandom_range(0, 20000)) - 10000;
    b = (longint'($urandom) << 4) - (longint'(1) << 35);
    b = b >>> 6;
    g = (longint'($urandom) - (longint'(1) << 31)) >>> 8;
    d = (longint'($urandom) - (longint'(1) << 31)) >>> 14;
    write_seg(s, len, a, b, g, d);
  endtask

  longint exp_y [MAXS];
  int     exp_n;

  task automatic build_expected(input int base, input int n, input logic sym);
    int k;
    exp_n = 0;
    for (int s = base; s < base + n; s++) begin
      k = (sl[s] == 0) ? 1 : sl[s];
      for (int t = 0; t < k; t++) exp_y[exp_n++] = ref_alpha(s, longint'(t));
    end
    if (sym) begin
      k = exp_n;
      for (int i = 0; i < k; i++) exp_y[exp_n++] = exp_y[k - 1 - i];
    end
  endtask

  int gaps_seen = 0;

  task automatic play(input int base, input int n, input logic sym, input string name);
    int got, lat, errs;
    logic [COEF_W-1:0] yfull;
    build_expected(base, n, sym);
    @(negedge clk);
    start_addr  = base[SEG_AW-1:0];
    seg_num     = n[SEG_AW:0];
    pulse_sym   = sym;
    start_pulse = 1'b1;
    @(posedge clk);          // edge 0: start sampled
    @(negedge clk);
    start_pulse = 1'b0;
    checks++;
    if (!pulse_running) begin failures++; $display("%s: pulse_running not set", name); end
    lat = 0;
    while (!pulse_valid) begin @(posedge clk); lat++; @(negedge clk); end
    checks++;
    if (lat != 3) begin failures++; $display("%s: latency %0d, expected 3", name, lat); end
    got = 0; errs = 0;
    while (pulse_valid) begin
      yfull = dut.u_pipe.y;
      if (got < exp_n) begin
        checks++;
        if (yfull != exp_y[got][35:0] || pulse_out != sample_t'(exp_y[got][35:20])) begin
          failures++; errs++;
          if (errs < 6)
            $display("%s: sample %0d got %h (%0d) expected %h", name, got, yfull, pulse_out,
                     exp_y[got][35:0]);
        end
        checks++;
        if (pulse_done != (got == exp_n - 1)) begin
          failures++; $display("%s: pulse_done wrong at sample %0d", name, got);
        end
      end
      got++;
      @(posedge clk); @(negedge clk);
    end
    checks++;
    if (got != exp_n) begin
      failures++; gaps_seen++;
      $display("%s: %0d samples, expected %0d (gap or overrun)", name, got, exp_n);
    end
    checks++;
    if (pulse_running) begin failures++; $display("%s: still running after pulse", name); end
    $display("%s: %0d samples checked", name, got);
  endtask

  initial begin
    repeat (4) @(posedge clk);
    @(negedge clk) rst = 1'b0;

    // segment 100: the 4-sample segment of the timing diagram (8 samples when mirrored)
    write_seg(100, 4, 1000, 64'sd5 <<< 20, 64'sd2 <<< 20, 64'sd1 <<< 20);
    // plain pulse of segments with long, short and one-sample lengths
    rand_seg(10, 5); rand_seg(11, 1); rand_seg(12, 7); rand_seg(13, 2);
    rand_seg(14, 1); rand_seg(15, 30);
    // mirrored pulse of several segments, and one with a one-sample centre
    rand_seg(20, 4); rand_seg(21, 2); rand_seg(22, 1); rand_seg(23, 3);
    rand_seg(30, 3); rand_seg(31, 1);
    rand_seg(40, 0);   // length 0 is played as 1

    play(100, 1, 1'b0, "single forward");
    play(100, 1, 1'b1, "single mirrored");
    play(10, 6, 1'b0, "six forward");
    play(20, 4, 1'b1, "four mirrored");
    play(30, 2, 1'b1, "one-sample centre");
    play(40, 1, 1'b0, "length zero");
    play(11, 1, 1'b1, "one-sample mirrored");
    play(10, 6, 1'b1, "six mirrored");
    // back-to-back restart straight after pulse_done
    play(12, 3, 1'b0, "restart");

    // start while running is ignored
    @(negedge clk);
    start_addr = 10'd15; seg_num = 11'd1; pulse_sym = 1'b0; start_pulse = 1'b1;
    @(negedge clk);
    start_addr = 10'd100; start_pulse = 1'b1;
    @(negedge clk);
    start_pulse = 1'b0;
    begin
      automatic int cnt = 0;
      repeat (60) begin @(posedge clk); if (pulse_valid) cnt++; end
      checks++;
      if (cnt != 30) begin failures++; $display("ignored start: %0d samples, expected 30", cnt); end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

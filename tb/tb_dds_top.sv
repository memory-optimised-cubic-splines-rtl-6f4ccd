// tb_dds_top: end-to-end test of the DDS channel at its default parameters.
//
// Writes spline segments over the Avalon port, plays plain and mirrored pulses and checks
//   - every envelope sample against the closed form of the recursion (bit exact, via the
//     16-bit pulse_out), with one sample per clock and the 3-clock start latency;
//   - every DAC sample against envelope * sin(phase) >> 15, the sine taken from a real-
//     arithmetic model of the oscillator (one LSB of tolerance for the table's rounding);
//   - zero DAC output outside pulses.
// It counts how often each mechanism of the design happened and fails on any that never
// did: forward segment stitching, the turn at the symmetry centre (bypass), backward
// turns served by the turn-around store, backward steps, one-sample segments, a
// length-0 segment, a start ignored while a pulse runs, and a start with seg_num = 0.
// The last pulse is a complete 20000-sample mirrored pulse (a 20 us pulse at 1 GS/s).
module tb_dds_top;
  import spline_pkg::*;

  localparam int unsigned SEG_AW = 10;
  localparam int MAXS = 40000;

  logic clk = 1'b0, rst = 1'b1;
  logic avs_write = 1'b0;
  logic [COEF_W-1:0] writedata = '0;
  logic [SEG_AW+BANK_W-1:0] avs_address = '0;
  logic start_pulse = 1'b0, pulse_sym = 1'b0;
  logic [SEG_AW-1:0] start_addr = '0;
  logic [SEG_AW:0] seg_num = '0;
  logic [31:0] freq_word = 32'h0333_3333, phase_word = 32'h1000_0000;
  sample_t pulse_out, dac_data;
  logic pulse_running, pulse_valid, pulse_done, dac_valid;

  int checks = 0, failures = 0;

  dds_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters (stage-0 control words) ----------------
  int n_stitch = 0, n_turn_centre = 0, n_turn_store = 0, n_sub = 0, n_one = 0;
  int n_len0 = 0, n_ignored = 0, n_zero_seg = 0, n_writes = 0;

  always @(posedge clk) if (!rst) begin
    ctrl_t c;
    c = dut.u_shaper.ctrl0;
    if (c.valid && c.op == OP_LOAD && dut.u_shaper.u_pipe.ctrl1.valid) n_stitch++;
    if (c.valid && c.op == OP_TURN && c.bypass) n_turn_centre++;
    if (c.valid && c.op == OP_TURN && !c.bypass) n_turn_store++;
    if (c.valid && c.op == OP_SUB) n_sub++;
    if (c.valid && c.first && c.last) n_one++;
    if (avs_write) n_writes++;
  end

  // ---------------- reference models ----------------
  longint sa [1024], sb [1024], sg [1024], sd [1024];
  int     sl [1024];

  function automatic longint wrap36(input longint v);
    longint m;
    m = v & 64'hF_FFFF_FFFF;
    if (m[35]) m = m | 64'hFFFF_FFF0_0000_0000;
    return m;
  endfunction

  function automatic longint ref_alpha(input int s, input longint t);
    return wrap36((sa[s] <<< 20) + t * sb[s] + sg[s] * ((t * (t + 1)) / 2)
                  + sd[s] * ((t * (t + 1) * (t + 2)) / 6));
  endfunction

  // oscillator model: accumulator advanced every clock since reset; the table output
  // seen at a clock comes from the accumulator value two clocks earlier
  longint unsigned cyc = 0;
  always @(posedge clk) if (rst) cyc <= 0; else cyc <= cyc + 1;

  function automatic int ref_sin(input longint unsigned c);
    logic [31:0] acc, ph;
    real v;
    int idx;
    if (c < 2) return 0;
    acc = 32'((c - 2) * longint'(freq_word));
    ph  = acc + phase_word;
    idx = int'(ph >> 22);
    v = $sin(2.0 * 3.14159265358979 * real'(idx) / 1024.0) * 32767.0;
    return $rtoi(v >= 0 ? v + 0.5 : v - 0.5);
  endfunction

  // DAC check, every clock: dac_data is the product of the previous clock's envelope and
  // carrier
  sample_t prev_env; logic prev_valid = 1'b0; int prev_sin = 0;
  int dac_checks = 0;
  always @(negedge clk) if (!rst) begin
    longint e;
    e = (longint'(prev_env) * longint'(prev_sin)) >>> 15;
    if (!prev_valid) e = 0;
    checks++; dac_checks++;
    if (longint'(dac_data) - e > 1 || e - longint'(dac_data) > 1 || dac_valid != prev_valid) begin
      failures++;
      if (failures < 10) $display("dac: got %0d expected %0d", dac_data, e);
    end
    prev_env = pulse_out; prev_valid = pulse_valid; prev_sin = ref_sin(cyc);
  end

  // ---------------- stimulus ----------------
  task automatic avs_wr(input int seg, input int bank, input logic [COEF_W-1:0] data);
    @(negedge clk);
    avs_write = 1'b1; avs_address = {seg[SEG_AW-1:0], bank[1:0]}; writedata = data;
    @(negedge clk);
    avs_write = 1'b0;
  endtask

  task automatic write_seg(input int s, input int len, input longint a, input longint b,
                           input longint g, input longint d);
    sa[s] = a; sb[s] = wrap36(b); sg[s] = wrap36(g); sd[s] = wrap36(d); sl[s] = len;
    avs_wr(s, 0, {len[LEN_W-1:0], a[15:0]});
    avs_wr(s, 1, b[35:0]);
    avs_wr(s, 2, g[35:0]);
    avs_wr(s, 3, d[35:0]);
  endtask

  task automatic rand_seg(input int s, input int len);
    longint a, b, g, d;
    a = longint'($urandom_range(0, 20000)) - 10000;
    b = (longint'($urandom) - (longint'(1) << 31)) >>> 4;
    g = (longint'($urandom) - (longint'(1) << 31)) >>> 10;
    d = (longint'($urandom) - (longint'(1) << 31)) >>> 18;
    write_seg(s, len, a, b, g, d);
  endtask

  longint exp_y [MAXS];
  int     exp_n;

  task automatic play(input int base, input int n, input logic sym, input string name);
    int got, lat, errs, k;
    exp_n = 0;
    for (int s = base; s < base + n; s++) begin
      k = (sl[s] == 0) ? 1 : sl[s];
      for (int t = 0; t < k; t++) exp_y[exp_n++] = ref_alpha(s, longint'(t));
    end
    if (sym) begin
      k = exp_n;
      for (int i = 0; i < k; i++) exp_y[exp_n++] = exp_y[k - 1 - i];
    end
    @(negedge clk);
    start_addr = base[SEG_AW-1:0]; seg_num = n[SEG_AW:0]; pulse_sym = sym; start_pulse = 1'b1;
    @(negedge clk);
    start_pulse = 1'b0;
    // lat counts clock edges after the one that sampled start_pulse
    lat = 0;
    while (!pulse_valid) begin
      // a second start while the pulse runs must be ignored
      if (lat == 0) begin start_pulse = 1'b1; start_addr = '0; n_ignored++; end
      @(negedge clk); lat++;
      start_pulse = 1'b0;
    end
    checks++;
    if (lat != 3) begin failures++; $display("%s: latency %0d, expected 3", name, lat); end
    got = 0; errs = 0;
    while (pulse_valid) begin
      if (got < exp_n) begin
        checks++;
        if (pulse_out != sample_t'(exp_y[got][35:20]) || pulse_done != (got == exp_n - 1)) begin
          failures++; errs++;
          if (errs < 5) $display("%s: sample %0d got %0d expected %0d", name, got, pulse_out,
                                 sample_t'(exp_y[got][35:20]));
        end
      end
      got++;
      @(negedge clk);
    end
    checks++;
    if (got != exp_n) begin failures++; $display("%s: %0d samples, expected %0d", name, got, exp_n); end
    $display("%s: %0d samples", name, got);
  endtask

  initial begin
    repeat (4) @(posedge clk);
    @(negedge clk) rst = 1'b0;

    rand_seg(0, 6); rand_seg(1, 1); rand_seg(2, 9); rand_seg(3, 3);
    rand_seg(8, 0); n_len0++;
    rand_seg(16, 5); rand_seg(17, 2); rand_seg(18, 1);
    play(0, 4, 1'b0, "plain");
    play(0, 4, 1'b1, "mirrored");
    play(16, 3, 1'b1, "mirrored, one-sample centre");
    play(8, 1, 1'b0, "length 0");

    // seg_num = 0 is not a pulse
    @(negedge clk);
    seg_num = '0; start_pulse = 1'b1;
    @(negedge clk);
    start_pulse = 1'b0;
    repeat (5) @(negedge clk);
    checks++;
    if (pulse_running || pulse_valid) begin failures++; $display("seg_num 0 started a pulse"); end
    else n_zero_seg++;

    // a complete 20 us mirrored pulse at 1 GS/s: 3 stored segments of 3334/3333/3333
    // samples, played forwards and backwards (20000 samples)
    write_seg(100, 3334, 0,     64'sd2 <<< 16, 64'sd3 <<< 8, 64'sd0);
    write_seg(101, 3333, 4000,  64'sd18 <<< 20, 64'sd0, -64'sd4);
    write_seg(102, 3333, 20000, 64'sd3 <<< 20, -64'sd1 <<< 10, 64'sd1);
    play(100, 3, 1'b1, "20000-sample mirrored pulse");

    begin
      string nm [9];
      int    ct [9];
      nm = '{"forward stitch", "turn at centre", "turn from store", "backward step",
             "one-sample segment", "length-0 segment", "start ignored while running",
             "seg_num 0 ignored", "Avalon write"};
      ct = '{n_stitch, n_turn_centre, n_turn_store, n_sub, n_one, n_len0, n_ignored,
             n_zero_seg, n_writes};
      for (int i = 0; i < 9; i++) begin
        checks++;
        $display("mechanism %-30s %0d", nm[i], ct[i]);
        if (ct[i] == 0) begin failures++; $display("mechanism never happened: %s", nm[i]); end
      end
    end
    $display("DAC samples checked: %0d", dac_checks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

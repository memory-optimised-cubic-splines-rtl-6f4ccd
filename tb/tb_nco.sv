// tb_nco: checks the oscillator against an independent model: phase accumulator in
// 64-bit integers and sin() evaluated in real arithmetic, at two clocks of latency, for
// several frequency and phase words; the table is allowed one LSB of rounding.
module tb_nco;
  logic clk = 1'b0, rst = 1'b1;
  logic [31:0] freq_word = '0, phase_word = '0;
  logic signed [15:0] sin_out;
  int checks = 0, failures = 0;

  nco dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned acc;
    logic [31:0] ph [3];
    int errs;
    repeat (2) @(negedge clk);
    for (int r = 0; r < 6; r++) begin
      rst = 1'b1;
      freq_word = (r == 0) ? 32'h0100_0000 : $urandom;
      phase_word = (r < 2) ? 32'h0 : $urandom;
      @(negedge clk);
      rst = 1'b0;
      acc = 0; errs = 0;
      ph[0] = 0; ph[1] = 0; ph[2] = 0;
      for (int i = 0; i < 3000; i++) begin
        // the phase presented two clocks ago sets sin_out now
        real expf; int e, idx;
        idx = int'(ph[1] >> 22);
        expf = $sin(2.0 * 3.14159265358979 * real'(idx) / 1024.0) * 32767.0;
        e = $rtoi(expf >= 0 ? expf + 0.5 : expf - 0.5);
        if (i >= 2) begin
          checks++;
          if (int'(sin_out) - e > 1 || e - int'(sin_out) > 1) begin
            failures++; errs++;
            if (errs < 5) $display("run %0d sample %0d: %0d expected %0d", r, i, sin_out, e);
          end
        end
        ph[1] = ph[0];
        ph[0] = 32'(acc) + phase_word;
        acc = acc + longint'(freq_word);
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

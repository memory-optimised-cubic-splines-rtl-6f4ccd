// tb_amp_mixer: random and corner-case envelope and carrier samples; checks the scaled
// product (env*carrier) >> 15, the saturation of the one product that overflows, zero
// output outside a pulse and the one-clock latency.
module tb_amp_mixer;
  logic clk = 1'b0, rst = 1'b1;
  logic signed [15:0] env = '0, carrier = '0;
  logic env_valid = 1'b0;
  logic signed [15:0] dac_data;
  logic dac_valid;
  int checks = 0, failures = 0, sats = 0;

  amp_mixer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint p, e;
    repeat (2) @(negedge clk);
    rst = 1'b0;
    for (int i = 0; i < 3000; i++) begin
      env_valid = ($urandom_range(0, 7) != 0);
      env = 16'($urandom); carrier = 16'($urandom);
      if (i == 5) begin env = -16'sd32768; carrier = -16'sd32768; end
      if (i == 6) begin env = 16'sd32767;  carrier = -16'sd32768; end
      p = longint'(env) * longint'(carrier);
      e = p >>> 15;
      if (e > 32767) begin e = 32767; sats++; end
      if (!env_valid) e = 0;
      @(negedge clk);
      checks++;
      if (longint'(dac_data) != e || dac_valid != env_valid) begin
        failures++;
        if (failures < 5) $display("%0d * %0d: got %0d expected %0d", env, carrier, dac_data, e);
      end
    end
    checks++;
    if (sats == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_avalon_wr_if: random Avalon writes; checks that the next clock carries a one-hot bank
// enable for the addressed bank, the segment index and the data, and that idle cycles
// write nothing.
module tb_avalon_wr_if;
  import spline_pkg::*;
  localparam int unsigned SEG_AW = 10;

  logic clk = 1'b0, rst = 1'b1;
  logic avs_write = 1'b0;
  logic [SEG_AW+BANK_W-1:0] avs_address = '0;
  logic [COEF_W-1:0] writedata = '0;
  logic [BANKS-1:0] bank_we;
  logic [SEG_AW-1:0] wr_addr;
  logic [COEF_W-1:0] wr_data;
  int checks = 0, failures = 0;

  avalon_wr_if #(.SEG_AW(SEG_AW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic w; logic [SEG_AW-1:0] s; logic [1:0] b; logic [COEF_W-1:0] d;
    repeat (2) @(negedge clk);
    rst = 1'b0;
    for (int i = 0; i < 1000; i++) begin
      w = ($urandom_range(0, 3) != 0);
      s = SEG_AW'($urandom); b = 2'($urandom); d = COEF_W'({$urandom, $urandom});
      avs_write = w; avs_address = {s, b}; writedata = d;
      @(negedge clk);
      checks++;
      if (w) begin
        if (bank_we != (4'b1 << b) || wr_addr != s || wr_data != d) begin
          failures++;
          if (failures < 5) $display("write %0d: we %b addr %0d data %h, expected bank %0d addr %0d data %h",
                                     i, bank_we, wr_addr, wr_data, b, s, d);
        end
      end else if (bank_we != '0) begin
        failures++; $display("idle cycle %0d wrote bank %b", i, bank_we);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

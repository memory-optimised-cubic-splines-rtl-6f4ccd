// tb_seg_memory: fills the four banks through their write enables, then reads random
// segments back and checks the one-clock read latency, the unpacking of the length and
// alpha fields, and that the output holds while rd_en is low.
module tb_seg_memory;
  import spline_pkg::*;
  localparam int unsigned SEG_AW = 10;
  localparam int DEPTH = 2**SEG_AW;

  logic clk = 1'b0;
  logic [BANKS-1:0] bank_we = '0;
  logic [SEG_AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [COEF_W-1:0] wr_data = '0;
  logic rd_en = 1'b0;
  segment_t rd_seg;
  int checks = 0, failures = 0;

  logic [COEF_W-1:0] model [BANKS][DEPTH];

  seg_memory #(.SEG_AW(SEG_AW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_seg(input int a, input string what);
    checks++;
    if (rd_seg.len != model[0][a][COEF_W-1:ALPHA_W] || rd_seg.alpha != model[0][a][ALPHA_W-1:0]
        || rd_seg.beta != model[1][a] || rd_seg.gamma != model[2][a] || rd_seg.delta != model[3][a]) begin
      failures++;
      if (failures < 5) $display("%s: segment %0d read wrong", what, a);
    end
  endtask

  initial begin
    int a, prev;
    @(negedge clk);
    for (int s = 0; s < DEPTH; s++)
      for (int b = 0; b < BANKS; b++) begin
        model[b][s] = COEF_W'({$urandom, $urandom});
        bank_we = 4'b1 << b; wr_addr = SEG_AW'(s); wr_data = model[b][s];
        @(negedge clk);
      end
    bank_we = '0;
    prev = 0;
    for (int i = 0; i < 2000; i++) begin
      a = $urandom_range(0, DEPTH - 1);
      rd_en = 1'b1; rd_addr = SEG_AW'(a);
      @(negedge clk);
      check_seg(a, "read");
      rd_en = 1'b0; rd_addr = SEG_AW'($urandom);
      @(negedge clk);
      check_seg(a, "hold");
      // overwrite one bank of the segment just read, then read it again
      if (i % 7 == 0) begin
        model[1][a] = COEF_W'({$urandom, $urandom});
        bank_we = 4'b0010; wr_addr = SEG_AW'(a); wr_data = model[1][a];
        @(negedge clk);
        bank_we = '0; rd_en = 1'b1; rd_addr = SEG_AW'(a);
        @(negedge clk);
        rd_en = 1'b0;
        check_seg(a, "rewrite");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

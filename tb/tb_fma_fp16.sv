// Testbench of fma_fp16: random fused multiply-adds against a
// double-precision reference, special values, and the 4-cycle latency.
module tb_fma_fp16;
  import tb_fp16_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  logic [15:0] a, b, c, z;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  fma_fp16 dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .a_i(a), .b_i(b), .c_i(c), .z_o(z));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [15:0] ta, tb_, tc, input logic [15:0] exp_z);
    @(negedge clk);
    a = ta; b = tb_; c = tc; en = 1;
    @(negedge clk);
    a = 16'h0; b = 16'h0; c = 16'h0;
    // result after PIPE = 4 enabled edges: 3 more
    repeat (3) @(negedge clk);
    checks++;
    if (z !== exp_z) begin
      failures++;
      if (failures < 10) $display("FAIL %h*%h+%h = %h, expected %h", ta, tb_, tc, z, exp_z);
    end
  endtask

  initial begin
    a = 0; b = 0; c = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // exact small cases
    run(16'h3c00, 16'h4000, 16'h3c00, 16'h4200);   // 1*2+1 = 3
    run(16'h4200, 16'hc000, 16'h4400, 16'hc000);   // 3*-2+4 = -2
    run(16'h3c00, 16'h3c00, 16'hbc00, 16'h0000);   // 1*1-1 = 0
    run(16'h7c00, 16'h3c00, 16'h3c00, 16'h7c00);   // inf
    run(16'h7c00, 16'h0000, 16'h3c00, 16'h7e00);   // inf*0 = NaN
    run(16'h7bff, 16'h4000, 16'h0000, 16'h7c00);   // overflow
    for (int i = 0; i < 3000; i++) begin
      logic [15:0] ra, rb, rc;
      ra = rand_fp16(8, 22); rb = rand_fp16(8, 22); rc = rand_fp16(8, 22);
      run(ra, rb, rc, fma_ref(ra, rb, rc));
    end
    // hold: with en low the output must not move
    @(negedge clk); a = 16'h3c00; b = 16'h3c00; c = 16'h0; en = 1;
    @(negedge clk); en = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (z === 16'h3c00) failures++;   // only 1 of 4 stages advanced
    en = 1; repeat (3) @(negedge clk);
    checks++;
    if (z !== 16'h3c00) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

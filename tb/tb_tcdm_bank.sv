// Testbench of tcdm_bank: random byte-enabled writes and reads against a
// reference array; read data must appear on the cycle after the request.
module tb_tcdm_bank;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic req, we;
  logic [9:0] addr;
  logic [3:0] be;
  logic [31:0] wdata, rdata;
  logic [31:0] ref_mem [1024];

  tcdm_bank dut (.clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr), .be_i(be),
                 .wdata_i(wdata), .rdata_o(rdata));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = 0; we = 0; addr = 0; be = 0; wdata = 0;
    // initialise every word
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk);
      req = 1; we = 1; addr = 10'(i); be = 4'hf; wdata = $urandom;
      ref_mem[i] = wdata;
    end
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      req = 1; we = 1'($urandom); addr = 10'($urandom % 64); be = 4'($urandom); wdata = $urandom;
      if (we) begin
        for (int b = 0; b < 4; b++) if (be[b]) ref_mem[addr][8*b +: 8] = wdata[8*b +: 8];
      end else begin
        logic [31:0] e;
        e = ref_mem[addr];
        @(negedge clk);
        req = 0;
        checks++;
        if (rdata !== e) begin
          failures++;
          if (failures < 5) $display("FAIL addr %0d: %h vs %h", addr, rdata, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

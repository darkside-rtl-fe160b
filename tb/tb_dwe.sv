// Testbench of the DWE: random int8 HWC input and 3x3 weights, depth-wise
// convolution with ReLU/shift/clip computed independently here, output
// compared byte by byte; checks the 4-cycle-per-pixel rhythm (36 MAC/cycle
// peak) on a full-bandwidth port, and correctness under random stalls.
module tb_dwe;
  import darkside_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  periph_req_t cfg;
  periph_rsp_t cfg_rsp;
  hwpe_req_t   req;
  hwpe_rsp_t   rsp;
  logic        gnt, evt, busy;
  int          gnt_pct = 100;

  dwe dut (.clk_i(clk), .rst_ni(rst_n), .clk_en_i(1'b1), .cfg_req_i(cfg), .cfg_rsp_o(cfg_rsp),
           .evt_o(evt), .data_req_o(req), .data_gnt_i(gnt), .data_rsp_i(rsp), .busy_o(busy));

  logic [31:0] mem [16384];
  always_comb gnt = req.req && (($urandom % 100) < gnt_pct);
  always_ff @(posedge clk) begin
    rsp.r_valid <= gnt;
    if (gnt) begin
      for (int i = 0; i < 9; i++) begin
        int unsigned wa;
        wa = ((req.addr >> 2) + i) % 16384;
        if (req.we) begin
          for (int bb = 0; bb < 4; bb++)
            if (req.be[4*i + bb]) mem[wa][8*bb +: 8] <= req.wdata[32*i + 8*bb +: 8];
        end else rsp.r_data[32*i +: 32] <= mem[wa];
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk);
    cfg.req = 1; cfg.we = 1; cfg.addr = a; cfg.wdata = d;
    @(negedge clk);
    cfg = '0;
  endtask

  function automatic logic signed [7:0] rd8(input int unsigned a);
    return mem[a >> 2][8*a[1:0] +: 8];
  endfunction
  task automatic wr8(input int unsigned a, input logic [7:0] v);
    mem[a >> 2][8*a[1:0] +: 8] = v;
  endtask

  task automatic run_dw(input int H, input int W, input int C, input int sh, input bit relu,
                        input int pct, output int cycles);
    int unsigned IA = 32'h0000, WA = 32'h6000, OA = 32'h8000;
    int Ho, Wo;
    gnt_pct = pct;
    Ho = H - 2; Wo = W - 2;
    for (int i = 0; i < 16384; i++) mem[i] = $urandom;
    cfg_wr(16'h008, IA); cfg_wr(16'h00c, WA); cfg_wr(16'h010, OA);
    cfg_wr(16'h014, H);  cfg_wr(16'h018, W);  cfg_wr(16'h01c, C);
    cfg_wr(16'h020, sh); cfg_wr(16'h024, relu);
    cfg_wr(16'h000, 1);
    cycles = 0;
    @(posedge clk);
    while (!evt) begin @(posedge clk); cycles++; end
    for (int y = 0; y < Ho; y++)
      for (int x = 0; x < Wo; x++)
        for (int c = 0; c < C; c++) begin
          int acc, v;
          logic [7:0] e;
          acc = 0;
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++)
              acc += int'(rd8(IA + ((y+ky)*W + (x+kx))*C + c)) *
                     int'(rd8(WA + (c/16)*144 + (c%16)*9 + ky*3 + kx));
          v = (relu && acc < 0) ? 0 : acc;
          v = v >>> sh;
          e = (v > 127) ? 8'd127 : (v < -128) ? 8'h80 : 8'(v);
          checks++;
          if (8'(rd8(OA + (y*Wo + x)*C + c)) !== e) begin
            failures++;
            if (failures < 8) $display("FAIL y%0d x%0d c%0d got %0d exp %0d", y, x, c,
                                       rd8(OA + (y*Wo + x)*C + c), $signed(e));
          end
        end
  endtask

  initial begin
    int cyc;
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_dw(5, 4, 16, 4, 1'b0, 100, cyc);
    run_dw(18, 5, 32, 6, 1'b1, 100, cyc);
    // 16 rows x 3 cols x 2 groups = 96 pixels, 4 cycles each ideal, plus
    // 9-load column starts and 4 weight loads per group
    $display("DWE 18x5x32 input, 16x3x32 output: %0d cycles, %0.1f MAC/cycle", cyc, 96.0 * 144 / cyc);
    checks++;
    // 4 cycles per pixel, at most 16 per column start, 8 per weight load
    if (cyc > 96*4 + 6*16 + 2*8 + 8) failures++;
    run_dw(7, 6, 16, 3, 1'b1, 55, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

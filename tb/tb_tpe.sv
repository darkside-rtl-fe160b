// Testbench of the TPE: programs matrix multiplications through the control
// port, serves the 288-bit data port from a local memory (with random grant
// stalls in one run), and compares every Z element with a reference that
// chains the same fused multiply-adds (k = 0, 1, 2, ... in order, padding
// adds nothing). Also checks the utilisation of a full tile sequence.
module tb_tpe;
  import darkside_pkg::*;
  import tb_fp16_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  periph_req_t cfg;
  periph_rsp_t cfg_rsp;
  hwpe_req_t   req;
  hwpe_rsp_t   rsp;
  logic        gnt, evt, busy, stall;
  int          gnt_pct = 100;

  tpe dut (.clk_i(clk), .rst_ni(rst_n), .clk_en_i(1'b1), .cfg_req_i(cfg), .cfg_rsp_o(cfg_rsp),
           .evt_o(evt), .data_req_o(req), .data_gnt_i(gnt), .data_rsp_i(rsp),
           .busy_o(busy), .stall_o(stall));

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

  function automatic logic [15:0] rd16(input int unsigned byte_addr);
    logic [31:0] w;
    w = mem[byte_addr >> 2];
    return byte_addr[1] ? w[31:16] : w[15:0];
  endfunction
  task automatic wr16(input int unsigned byte_addr, input logic [15:0] v);
    if (byte_addr[1]) mem[byte_addr >> 2][31:16] = v;
    else              mem[byte_addr >> 2][15:0]  = v;
  endtask

  task automatic run_mm(input int M, input int N, input int K, input int pct, output int cycles);
    int unsigned XA = 32'h0000, WA = 32'h4000, ZA = 32'h8000;
    logic [15:0] zr;
    gnt_pct = pct;
    for (int i = 0; i < 16384; i++) mem[i] = 32'hdead_beef;
    for (int r = 0; r < M; r++) for (int k = 0; k < K; k++) wr16(XA + 2*(r*K + k), rand_fp16(13, 16));
    for (int k = 0; k < K; k++) for (int n = 0; n < N; n++) wr16(WA + 2*(k*N + n), rand_fp16(13, 16));
    cfg_wr(16'h008, XA); cfg_wr(16'h00c, WA); cfg_wr(16'h010, ZA);
    cfg_wr(16'h014, M);  cfg_wr(16'h018, N);  cfg_wr(16'h01c, K);
    cfg_wr(16'h000, 1);
    cycles = 0;
    @(posedge clk);
    while (!evt) begin @(posedge clk); cycles++; end
    for (int r = 0; r < M; r++)
      for (int n = 0; n < N; n++) begin
        zr = 16'h0000;
        for (int k = 0; k < K; k++) zr = fma_ref(rd16(XA + 2*(r*K + k)), rd16(WA + 2*(k*N + n)), zr);
        checks++;
        if (rd16(ZA + 2*(r*N + n)) !== zr) begin
          failures++;
          if (failures < 8) $display("FAIL M%0d N%0d K%0d Z[%0d][%0d]=%h exp %h", M, N, K, r, n,
                                     rd16(ZA + 2*(r*N + n)), zr);
        end
      end
    // elements just past the matrix must be untouched
    checks++;
    if (mem[(ZA + 2*M*N) >> 2] !== 32'hdead_beef) failures++;
  endtask

  initial begin
    int cyc;
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_mm(8, 16, 4, 100, cyc);
    run_mm(8, 16, 64, 100, cyc);
    // 16 loops of 16 cycles: 8 * 16 * 64 = 8192 MACs; 32 MAC/cycle ideal
    checks++;
    if (cyc > 256 + 64) begin
      failures++;
      $display("FAIL: 8x16x64 took %0d cycles", cyc);
    end
    $display("8x16x64: %0d cycles, %0.1f MAC/cycle", cyc, 8192.0 / cyc);
    run_mm(16, 32, 32, 100, cyc);
    $display("16x32x32: %0d cycles, %0.1f MAC/cycle", cyc, 16.0*32*32 / cyc);
    checks++;
    if (16.0*32*32 / cyc < 24.0) failures++;
    run_mm(12, 20, 6, 60, cyc);      // partial tiles, random stalls
    run_mm(3, 2, 2, 50, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

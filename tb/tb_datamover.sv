// Testbench of the DataMover: the transposition example of the paper's
// figure (d = 8), then random tensors for every element size from 1 to 32
// bits, checked element by element against an index-based reference, with
// random grant stalls; also checks the number of memory transactions.
module tb_datamover;
  import darkside_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  periph_req_t cfg;
  periph_rsp_t cfg_rsp;
  tcdm_req_t   req;
  tcdm_rsp_t   rsp;
  logic        gnt, evt, busy;
  int          gnt_pct = 100, n_acc = 0;

  datamover dut (.clk_i(clk), .rst_ni(rst_n), .clk_en_i(1'b1), .cfg_req_i(cfg),
                 .cfg_rsp_o(cfg_rsp), .evt_o(evt), .tcdm_req_o(req), .tcdm_gnt_i(gnt),
                 .tcdm_rsp_i(rsp), .busy_o(busy));

  logic [31:0] mem [8192];
  always_comb gnt = req.req && (($urandom % 100) < gnt_pct);
  always_ff @(posedge clk) begin
    rsp.r_valid <= gnt;
    if (gnt) begin
      n_acc <= n_acc + 1;
      if (req.we) mem[(req.addr >> 2) % 8192] <= req.wdata;
      else        rsp.r_data <= mem[(req.addr >> 2) % 8192];
    end
  end

  initial begin
    repeat (300000) @(posedge clk);
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

  // element idx (0 = most significant chunk of word 0) of a d-bit array
  function automatic logic [31:0] get_el(input int unsigned base, input int unsigned idx,
                                         input int d);
    int unsigned bit0, w, pos;
    bit0 = idx * d;
    w = base / 4 + bit0 / 32;
    pos = 32 - (bit0 % 32) - d;   // MSB-first within the word
    return (mem[w] >> pos) & ((d == 32) ? 32'hffff_ffff : ((32'd1 << d) - 1));
  endfunction

  task automatic run_tr(input int lgd, input int R, input int C, input int D, input int pct);
    int unsigned SA = 32'h0000, DA = 32'h4000;
    int d, n0;
    d = 1 << lgd;
    gnt_pct = pct;
    for (int i = 0; i < 8192; i++) mem[i] = $urandom;
    cfg_wr(16'h008, SA); cfg_wr(16'h00c, DA); cfg_wr(16'h010, R);
    cfg_wr(16'h014, C);  cfg_wr(16'h018, lgd); cfg_wr(16'h01c, D);
    n0 = n_acc;
    cfg_wr(16'h000, 1);
    while (!evt) @(posedge clk);
    @(posedge clk);
    for (int z = 0; z < D; z++)
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          checks++;
          if (get_el(DA, z*R*C + c*R + r, d) !== get_el(SA, z*R*C + r*C + c, d)) begin
            failures++;
            if (failures < 8) $display("FAIL d=%0d R%0d C%0d z%0d r%0d c%0d: %h %h", d, R, C, z, r, c, get_el(DA, z*R*C + c*R + r, d), get_el(SA, z*R*C + r*C + c, d));
          end
        end
    // every word is read once and written once
    checks++;
    if (n_acc - n0 != 2 * D * R * C * d / 32) begin
      failures++;
      $display("FAIL d=%0d: %0d transactions", d, n_acc - n0);
    end
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // the example of the figure: 4 words of 4 bytes
    for (int i = 0; i < 8192; i++) mem[i] = 0;
    mem[0] = 32'hDEADBEEF; mem[1] = 32'h01020304; mem[2] = 32'hABBAABBA; mem[3] = 32'h0BADF00D;
    cfg_wr(16'h008, 0); cfg_wr(16'h00c, 32'h100); cfg_wr(16'h010, 4);
    cfg_wr(16'h014, 4); cfg_wr(16'h018, 3); cfg_wr(16'h01c, 1);
    cfg_wr(16'h000, 1);
    while (!evt) @(posedge clk);
    @(posedge clk);
    checks += 4;
    if (mem[64] !== 32'hDE01AB0B) failures++;
    if (mem[65] !== 32'hAD02BAAD) failures++;
    if (mem[66] !== 32'hBE03ABF0) failures++;
    if (mem[67] !== 32'hEF04BA0D) failures++;
    run_tr(3, 4, 8, 1, 100);
    run_tr(3, 8, 12, 2, 100);
    run_tr(0, 32, 64, 1, 70);
    run_tr(1, 32, 16, 2, 100);
    run_tr(2, 16, 24, 1, 60);
    run_tr(4, 6, 4, 3, 80);
    run_tr(5, 5, 3, 2, 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

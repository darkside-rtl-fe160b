// Testbench of rvnn_ml_unit. Loads the NN-RF through the load-store write
// port, issues Mac&Load (M&L) instructions that read the NN-RF while a new
// word is written into it in the same cycle (the instruction must use the
// old value), checks the MPC slice counter stepping through the RS2 slices
// and wrapping at Pa/Pw, the CSR write resetting the counter, and plain
// GP-RF dot products. Results appear one cycle after valid.
module tb_rvnn_ml_unit;
  import darkside_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic csr_we, valid, is_ml, lsu_we, res_valid;
  logic [31:0] csr_wdata, csr_rdata, rs1, rs2, acc, lsu_wdata, result;
  logic [0:0] act_sel;
  logic [1:0] wgt_sel;
  logic [2:0] lsu_idx;
  logic [31:0] nnrf [6];
  int mpc;

  rvnn_ml_unit dut (.clk_i(clk), .rst_ni(rst_n), .csr_we_i(csr_we), .csr_wdata_i(csr_wdata),
    .csr_rdata_o(csr_rdata), .valid_i(valid), .is_ml_i(is_ml), .rs1_i(rs1), .rs2_i(rs2),
    .acc_i(acc), .act_sel_i(act_sel), .wgt_sel_i(wgt_sel), .lsu_we_i(lsu_we),
    .lsu_idx_i(lsu_idx), .lsu_wdata_i(lsu_wdata), .res_valid_o(res_valid), .result_o(result));

  task automatic chk(input logic c, input string m);
    checks++;
    if (!c) begin failures++; if (failures < 8) $display("FAIL %s", m); end
  endtask

  function automatic longint elem(input logic [31:0] v, input int pos, input int p, input logic s);
    longint x;
    x = (v >> pos) & ((64'd1 << p) - 1);
    if (s && x[p-1]) x -= (64'd1 << p);
    return x;
  endfunction

  function automatic logic [31:0] ref_dot(input logic [31:0] x, input logic [31:0] w,
      input logic [31:0] ac, input int pa, input int pw, input int sl, input logic sx, input logic sw);
    longint r;
    int ne;
    ne = 32 / pa;
    r = longint'(ac);
    for (int j = 0; j < ne; j++) r += elem(x, j * pa, pa, sx) * elem(w, (sl * ne + j) * pw, pw, sw);
    return 32'(r);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int mpc_steps;
    mpc_steps = 0;
    {csr_we, valid, is_ml, lsu_we} = '0;
    {csr_wdata, rs1, rs2, acc, lsu_wdata} = '0;
    act_sel = 0; wgt_sel = 0; lsu_idx = 0;
    for (int i = 0; i < 6; i++) nnrf[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int blk = 0; blk < 40; blk++) begin
      int pa, pw;
      logic sx, sw;
      logic [5:0] csr;
      // configure precisions (A >= W)
      pa = 2 << ($urandom % 4); if (pa == 32) pa = 16;
      pw = 2 << ($urandom % 4); if (pw > pa) pw = pa;
      sx = 1'($urandom); sw = 1'($urandom);
      csr = {sw, sx, 2'(pw == 16 ? 0 : pw == 8 ? 1 : pw == 4 ? 2 : 3),
                     2'(pa == 16 ? 0 : pa == 8 ? 1 : pa == 4 ? 2 : 3)};
      @(negedge clk);
      csr_we = 1; csr_wdata = {26'b0, csr};
      @(negedge clk);
      csr_we = 0;
      chk(csr_rdata[5:0] == csr, "csr readback");
      mpc = 0;
      // fill the NN-RF
      for (int i = 0; i < 6; i++) begin
        lsu_we = 1; lsu_idx = 3'(i); lsu_wdata = $urandom; nnrf[i] = lsu_wdata;
        @(negedge clk);
      end
      lsu_we = 0;
      // stream of M&L / plain dotp instructions with concurrent loads
      for (int k = 0; k < 24; k++) begin
        logic [31:0] exp;
        int sl;
        is_ml = 1'($urandom % 4 != 0);
        valid = 1;
        act_sel = 1'($urandom); wgt_sel = 2'($urandom);
        rs1 = $urandom; rs2 = $urandom; acc = $urandom;
        sl = (pw < pa) ? mpc : 0;
        if (is_ml) exp = ref_dot(nnrf[4 + act_sel], nnrf[wgt_sel], acc, pa, pw, sl, sx, sw);
        else       exp = ref_dot(rs1, rs2, acc, pa, pw, sl, sx, sw);
        lsu_we = 1'($urandom);
        lsu_idx = 3'($urandom % 6);
        lsu_wdata = $urandom;
        @(negedge clk);
        chk(res_valid && result == exp, "M&L result with concurrent load");
        if (lsu_we) nnrf[lsu_idx] = lsu_wdata;
        if (pw < pa) begin
          mpc = (mpc + 1) % (pa / pw);
          mpc_steps++;
        end
        valid = 0; lsu_we = 0;
        if ($urandom % 3 == 0) begin
          @(negedge clk);
          chk(!res_valid, "no result without valid");
        end
      end
    end
    chk(mpc_steps > 200, "MPC slicing exercised");
    $display("MPC slice steps: %0d", mpc_steps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

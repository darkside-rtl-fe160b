// End-to-end testbench of the cluster at its default size (8 cores, 32 banks
// of 1024 words, 10 logarithmic ports, 288-bit HWPE port).
//
// The testbench plays the parts that are not RTL here: the DMA (loads and
// reads back the TCDM through the DMA port), the cores' load/store units
// (random reads and writes on the 8 core ports, checked against a private
// reference per core) and the cores' issue of dot-product instructions into
// the per-core extension units. It then runs one complete job on every
// engine, concurrently with core traffic:
//   1. TPE, 8x16x32 FP16 matrix multiplication, shallow branch has priority,
//      with a window of gated engine clock in the middle of the job;
//   2. HWPE_SEL switched to the DWE, log branch given priority with a short
//      maximum stall, 3x3 depthwise convolution on 6x6x16 int8;
//   3. DataMover transposition of a 16x8 matrix of 8-bit elements;
//   4. Mac&Load with concurrent NN-RF loads fed from the TCDM on all cores,
//      with mixed precision so that the MPC slice counter advances.
// Every result is compared with a reference computed here. Each mechanism
// is counted (bank collisions won by either side, core stalls, TPE stalls,
// gated cycles, HWPE_SEL switches, engine events, transposed elements, M&L
// with concurrent load, MPC slice steps); a mechanism that never happened
// counts as a failure.
module tb_darkside_cluster;
  import darkside_pkg::*;
  import tb_fp16_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  tcdm_req_t [N_CORES-1:0]  core_req;
  logic      [N_CORES-1:0]  core_gnt;
  tcdm_rsp_t [N_CORES-1:0]  core_rsp;
  tcdm_req_t                dma_req;
  logic                     dma_gnt;
  tcdm_rsp_t                dma_rsp;
  periph_req_t              preq;
  periph_rsp_t              prsp;
  logic [2:0]               evt, busy;
  logic [N_CORES-1:0]       ml_csr_we, ml_valid, ml_is_ml, ml_act_sel, ml_lsu_we, ml_res_valid;
  logic [N_CORES-1:0][31:0] ml_csr_wdata, ml_csr_rdata, ml_rs1, ml_rs2, ml_acc, ml_lsu_wdata, ml_result;
  logic [N_CORES-1:0][1:0]  ml_wgt_sel;
  logic [N_CORES-1:0][2:0]  ml_lsu_idx;
  logic                     collision;

  darkside_cluster dut (
    .clk_i(clk), .rst_ni(rst_n),
    .core_req_i(core_req), .core_gnt_o(core_gnt), .core_rsp_o(core_rsp),
    .dma_req_i(dma_req), .dma_gnt_o(dma_gnt), .dma_rsp_o(dma_rsp),
    .periph_req_i(preq), .periph_rsp_o(prsp), .evt_o(evt), .busy_o(busy),
    .ml_csr_we_i(ml_csr_we), .ml_csr_wdata_i(ml_csr_wdata), .ml_csr_rdata_o(ml_csr_rdata),
    .ml_valid_i(ml_valid), .ml_is_ml_i(ml_is_ml), .ml_rs1_i(ml_rs1), .ml_rs2_i(ml_rs2),
    .ml_acc_i(ml_acc), .ml_act_sel_i(ml_act_sel), .ml_wgt_sel_i(ml_wgt_sel),
    .ml_lsu_we_i(ml_lsu_we), .ml_lsu_idx_i(ml_lsu_idx), .ml_lsu_wdata_i(ml_lsu_wdata),
    .ml_res_valid_o(ml_res_valid), .ml_result_o(ml_result), .hci_collision_o(collision));

  task automatic chk(input logic c, input string m);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask

  // ---------------------------------------------------------------- counters
  int n_coll_sh, n_coll_log, n_core_stall, n_tpe_stall, n_gated, n_switch;
  int n_evt [3];
  int n_transposed, n_ml_concurrent, n_mpc_steps;
  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (collision &&  dut.sh_gnt_port) n_coll_sh  <= n_coll_sh + 1;
      if (collision && !dut.sh_gnt_port) n_coll_log <= n_coll_log + 1;
      for (int c = 0; c < N_CORES; c++)
        if (core_req[c].req && !core_gnt[c]) n_core_stall <= n_core_stall + 1;
      if (busy[0] && dut.tpe_stall) n_tpe_stall <= n_tpe_stall + 1;
      if (busy[0] && !dut.clk_en[0]) n_gated <= n_gated + 1;
      for (int e = 0; e < 3; e++) if (evt[e]) n_evt[e] <= n_evt[e] + 1;
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------- DMA port (host)
  task automatic dma_acc(input logic we, input int unsigned a, input logic [31:0] wd,
                         input logic [3:0] be, output logic [31:0] rd);
    @(negedge clk);
    dma_req.req = 1; dma_req.we = we; dma_req.addr = a; dma_req.be = be; dma_req.wdata = wd;
    #1;
    while (!dma_gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    dma_req = '0;
    chk(dma_rsp.r_valid, "DMA response");
    rd = dma_rsp.r_data;
  endtask
  task automatic dma_wr(input int unsigned a, input logic [31:0] wd);
    logic [31:0] d;
    dma_acc(1, a, wd, 4'hf, d);
  endtask
  task automatic dma_rd(input int unsigned a, output logic [31:0] rd);
    dma_acc(0, a, 0, 4'h0, rd);
  endtask

  // -------------------------------------------------- control port (cores)
  task automatic cfg_acc(input logic we, input logic [15:0] a, input logic [31:0] d,
                         output logic [31:0] rd);
    @(negedge clk);
    preq.req = 1; preq.we = we; preq.addr = a; preq.wdata = d;
    @(negedge clk);
    preq = '0;
    rd = prsp.r_data;
  endtask
  task automatic cfg_wr(input logic [15:0] a, input logic [31:0] d);
    logic [31:0] rd;
    cfg_acc(1, a, d, rd);
  endtask

  // ------------------------------------------------ core load/store traffic
  bit traffic_on;
  int n_running;                          // forked core processes still active
  task automatic core_traffic(input int c);
    logic [31:0] refm [256];
    bit          vld  [256];
    bit          pend, pend_rd;
    logic [31:0] pend_exp;
    pend = 0;
    for (int i = 0; i < 256; i++) vld[i] = 0;
    while (traffic_on || pend) begin
      int unsigned w;
      @(negedge clk);
      if (pend) begin
        chk(core_rsp[c].r_valid, "core response valid");
        if (pend_rd) chk(core_rsp[c].r_data == pend_exp, "core read data");
        pend = 0;
      end
      core_req[c] = '0;
      if (!traffic_on || $urandom % 4 == 0) continue;
      w = $urandom % 256;
      core_req[c].req   = 1;
      core_req[c].we    = !vld[w] || 1'($urandom);
      core_req[c].addr  = 32'h1_0000 + 32'(c) * 32'h400 + w * 4;
      core_req[c].be    = 4'hf;
      core_req[c].wdata = $urandom;
      #1;
      while (!core_gnt[c]) begin @(negedge clk); #1; end
      pend = 1;
      pend_rd = !core_req[c].we;
      if (core_req[c].we) begin refm[w] = core_req[c].wdata; vld[w] = 1; end
      else pend_exp = refm[w];
    end
    core_req[c] = '0;
    n_running--;
  endtask

  task automatic start_traffic();
    traffic_on = 1;
    n_running = N_CORES;
    for (int c = 0; c < N_CORES; c++) begin
      fork
        automatic int cc = c;
        core_traffic(cc);
      join_none
    end
  endtask
  task automatic stop_traffic();
    traffic_on = 0;
    wait (n_running == 0);
  endtask

  // ------------------------------------------------------------------- TPE
  localparam int TM = 8, TN = 16, TK = 32;
  localparam int unsigned TX = 32'h0000, TW = 32'h0400, TZ = 32'h0c00;
  logic [15:0] xm [TM*TK];
  logic [15:0] wm [TK*TN];

  task automatic run_tpe();
    logic [31:0] d;
    int cyc;
    for (int i = 0; i < TM*TK; i++) xm[i] = rand_fp16(13, 16);
    for (int i = 0; i < TK*TN; i++) wm[i] = rand_fp16(13, 16);
    for (int i = 0; i < TM*TK/2; i++) dma_wr(TX + 4*i, {xm[2*i+1], xm[2*i]});
    for (int i = 0; i < TK*TN/2; i++) dma_wr(TW + 4*i, {wm[2*i+1], wm[2*i]});
    cfg_wr(16'h0008, TX); cfg_wr(16'h000c, TW); cfg_wr(16'h0010, TZ);
    cfg_wr(16'h0014, TM); cfg_wr(16'h0018, TN); cfg_wr(16'h001c, TK);
    start_traffic();
    cfg_wr(16'h0000, 1);
    cyc = 0;
    while (!evt[0]) begin
      @(posedge clk);
      cyc++;
      if (cyc == 60) cfg_wr(16'h200c, 3'b110);   // gate the TPE for a while
      if (cyc == 90) cfg_wr(16'h200c, 3'b111);
    end
    stop_traffic();
    $display("TPE %0dx%0dx%0d with core traffic: %0d cycles", TM, TN, TK, cyc);
    for (int r = 0; r < TM; r++)
      for (int n = 0; n < TN; n += 2) begin
        logic [15:0] z0, z1;
        z0 = 0; z1 = 0;
        for (int k = 0; k < TK; k++) begin
          z0 = fma_ref(xm[r*TK + k], wm[k*TN + n], z0);
          z1 = fma_ref(xm[r*TK + k], wm[k*TN + n + 1], z1);
        end
        dma_rd(TZ + 2*(r*TN + n), d);
        chk(d == {z1, z0}, $sformatf("TPE Z[%0d][%0d]", r, n));
      end
  endtask

  // ------------------------------------------------------------------- DWE
  localparam int DH = 6, DWD = 6, DC = 16, DSH = 4;
  localparam int unsigned DI = 32'h2000, DWT = 32'h2400, DO = 32'h2800;
  logic [7:0] im [DH*DWD*DC];
  logic [7:0] km [DC*9];

  task automatic run_dwe();
    logic [31:0] d;
    for (int i = 0; i < DH*DWD*DC; i++) im[i] = $urandom;
    for (int i = 0; i < DC*9; i++) km[i] = $urandom;
    for (int i = 0; i < DH*DWD*DC/4; i++) dma_wr(DI + 4*i, {im[4*i+3], im[4*i+2], im[4*i+1], im[4*i]});
    for (int i = 0; i < DC*9/4; i++) dma_wr(DWT + 4*i, {km[4*i+3], km[4*i+2], km[4*i+1], km[4*i]});
    cfg_wr(16'h2008, 1);                  // HWPE_SEL: the DWE owns the HWPE port
    n_switch++;
    cfg_wr(16'h2000, 0);                  // log branch has priority ...
    cfg_wr(16'h2004, 3);                  // ... for at most 3 stalls of the DWE
    cfg_wr(16'h0008, DI); cfg_wr(16'h000c, DWT); cfg_wr(16'h0010, DO);
    cfg_wr(16'h0014, DH); cfg_wr(16'h0018, DWD); cfg_wr(16'h001c, DC);
    cfg_wr(16'h0020, DSH); cfg_wr(16'h0024, 1);
    start_traffic();
    cfg_wr(16'h0000, 1);
    while (!evt[1]) @(posedge clk);
    stop_traffic();
    for (int y = 0; y < DH-2; y++)
      for (int x = 0; x < DWD-2; x++)
        for (int c = 0; c < DC; c += 4) begin
          logic [31:0] e;
          for (int cc = c; cc < c + 4; cc++) begin
            int acc, v;
            acc = 0;
            for (int ky = 0; ky < 3; ky++)
              for (int kx = 0; kx < 3; kx++)
                acc += int'($signed(im[((y+ky)*DWD + x+kx)*DC + cc])) * int'($signed(km[cc*9 + ky*3 + kx]));
            v = acc < 0 ? 0 : acc;
            v = v >>> DSH;
            e[8*(cc-c) +: 8] = (v > 127) ? 8'd127 : 8'(v);
          end
          dma_rd(DO + ((y*(DWD-2) + x)*DC + c), d);
          chk(d == e, $sformatf("DWE out y%0d x%0d c%0d", y, x, c));
        end
    cfg_wr(16'h2008, 0);                  // back to the TPE
    n_switch++;
    cfg_wr(16'h2000, 1);
    cfg_wr(16'h2004, 10);
  endtask

  // ------------------------------------------------------------- DataMover
  localparam int MR = 16, MC = 8;
  localparam int unsigned MS = 32'h3000, MD = 32'h3400;
  logic [7:0] mm [MR*MC];

  task automatic run_dmov();
    logic [31:0] d;
    for (int i = 0; i < MR*MC; i++) mm[i] = $urandom;
    // elements are packed most significant byte first
    for (int i = 0; i < MR*MC/4; i++) dma_wr(MS + 4*i, {mm[4*i], mm[4*i+1], mm[4*i+2], mm[4*i+3]});
    cfg_wr(16'h1008, MS); cfg_wr(16'h100c, MD); cfg_wr(16'h1010, MR);
    cfg_wr(16'h1014, MC); cfg_wr(16'h1018, 3);  cfg_wr(16'h101c, 1);
    start_traffic();
    cfg_wr(16'h1000, 1);
    while (!evt[2]) @(posedge clk);
    stop_traffic();
    for (int i = 0; i < MR*MC/4; i++) begin
      dma_rd(MD + 4*i, d);
      for (int k = 0; k < 4; k++) begin
        int o, r, c;
        o = 4*i + k;                      // output element (c, r) = o
        c = o / MR; r = o % MR;
        chk(d[31 - 8*k -: 8] == mm[r*MC + c], "transposed element");
        n_transposed++;
      end
    end
  endtask

  // ---------------------------------------------------- Mac&Load on cores
  function automatic longint elem(input logic [31:0] v, input int pos, input int p, input logic s);
    longint x;
    x = (v >> pos) & ((64'd1 << p) - 1);
    if (s && x[p-1]) x -= (64'd1 << p);
    return x;
  endfunction
  function automatic logic [31:0] ref_dot(input logic [31:0] x, input logic [31:0] w,
      input logic [31:0] ac, input int pa, input int pw, input int sl);
    longint r;
    r = longint'(ac);
    for (int j = 0; j < 32 / pa; j++)
      r += elem(x, j * pa, pa, 1) * elem(w, (sl * (32 / pa) + j) * pw, pw, 1);
    return 32'(r);
  endfunction

  // Core c: activations 8 bit, weights 4 bit (two slices per weight word).
  // A word is read from the TCDM through the core port; in the cycle its
  // data returns it is written into the NN-RF while an M&L instruction
  // consumes the registers' previous contents.
  task automatic ml_core(input int c);
    logic [31:0] nn [6];
    int mpc;
    logic [31:0] d;
    mpc = 0;
    @(negedge clk);
    ml_csr_we[c] = 1; ml_csr_wdata[c] = {26'b0, 1'b1, 1'b1, 2'd2, 2'd1};  // signed, W=4b, A=8b
    @(negedge clk);
    ml_csr_we[c] = 0;
    chk(ml_csr_rdata[c][5:0] == 6'b111001, "CSR readback");
    for (int i = 0; i < 6; i++) nn[i] = 0;
    for (int k = 0; k < 30; k++) begin
      int unsigned a;
      logic [31:0] exp;
      // load request on the core port
      @(negedge clk);
      a = 32'h1_8000 + 32'(c) * 32'h100 + 32'(k) * 4;
      core_req[c] = '{req: 1'b1, we: 1'b0, addr: a, be: 4'h0, wdata: 32'h0};
      #1;
      while (!core_gnt[c]) begin @(negedge clk); #1; end
      @(negedge clk);
      core_req[c] = '0;
      chk(core_rsp[c].r_valid && core_rsp[c].r_data == a ^ 32'h5a5a_5a5a, "core load");
      d = core_rsp[c].r_data;
      // M&L: compute with the NN-RF and load the returned word into it
      ml_valid[c] = 1; ml_is_ml[c] = 1;
      ml_act_sel[c] = 1'(k); ml_wgt_sel[c] = 2'(k >> 1);
      ml_acc[c] = $urandom;
      ml_lsu_we[c] = 1; ml_lsu_idx[c] = 3'(k % 6); ml_lsu_wdata[c] = d;
      exp = ref_dot(nn[4 + (k & 1)], nn[(k >> 1) & 3], ml_acc[c], 8, 4, mpc);
      @(negedge clk);
      chk(ml_res_valid[c] && ml_result[c] == exp, $sformatf("M&L core %0d op %0d", c, k));
      nn[k % 6] = d;
      n_ml_concurrent++;
      if (mpc != 0) n_mpc_steps++;
      mpc = (mpc + 1) % 2;
      ml_valid[c] = 0; ml_is_ml[c] = 0; ml_lsu_we[c] = 0;
    end
    n_running--;
  endtask

  task automatic run_ml();
    for (int c = 0; c < N_CORES; c++)
      for (int k = 0; k < 30; k++) begin
        int unsigned a;
        a = 32'h1_8000 + 32'(c) * 32'h100 + 32'(k) * 4;
        dma_wr(a, a ^ 32'h5a5a_5a5a);
      end
    n_running = N_CORES;
    for (int c = 0; c < N_CORES; c++) begin
      fork
        automatic int cc = c;
        ml_core(cc);
      join_none
    end
    wait (n_running == 0);
  endtask

  // -------------------------------------------------------------- sequence
  initial begin
    logic [31:0] d;
    core_req = '0; dma_req = '0; preq = '0;
    ml_csr_we = '0; ml_valid = '0; ml_is_ml = '0; ml_act_sel = '0; ml_lsu_we = '0;
    ml_csr_wdata = '0; ml_rs1 = '0; ml_rs2 = '0; ml_acc = '0; ml_lsu_wdata = '0;
    ml_wgt_sel = '0; ml_lsu_idx = '0;
    n_coll_sh = 0; n_coll_log = 0; n_core_stall = 0; n_tpe_stall = 0; n_gated = 0;
    n_switch = 0; n_evt = '{0, 0, 0}; n_transposed = 0; n_ml_concurrent = 0; n_mpc_steps = 0;
    traffic_on = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    cfg_acc(0, 16'h2004, 0, d);
    chk(d == 10, "default maximum stall");
    run_tpe();
    run_dwe();
    run_dmov();
    run_ml();
    $display("collisions won by shallow %0d, by log %0d; core stalls %0d", n_coll_sh, n_coll_log, n_core_stall);
    $display("TPE stall cycles %0d, gated cycles %0d; HWPE_SEL switches %0d", n_tpe_stall, n_gated, n_switch);
    $display("events TPE %0d DWE %0d DataMover %0d; transposed %0d", n_evt[0], n_evt[1], n_evt[2], n_transposed);
    $display("M&L with concurrent load %0d; MPC slice steps %0d", n_ml_concurrent, n_mpc_steps);
    chk(n_coll_sh > 0, "collision won by the shallow branch happened");
    chk(n_coll_log > 0, "collision won by the log branch happened");
    chk(n_core_stall > 0, "core stall happened");
    chk(n_tpe_stall > 0, "TPE stall happened");
    chk(n_gated > 0, "gated engine cycles happened");
    chk(n_switch == 2, "HWPE_SEL switches happened");
    chk(n_evt[0] == 1 && n_evt[1] == 1 && n_evt[2] == 1, "one event per engine job");
    chk(n_transposed == MR*MC, "transposition happened");
    chk(n_ml_concurrent == 30 * N_CORES, "M&L with concurrent load happened");
    chk(n_mpc_steps > 0, "MPC slice steps happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

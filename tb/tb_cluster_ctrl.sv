// Testbench of cluster_ctrl: checks the reset values of the local registers
// (shallow priority, max stall 10, HWPE_SEL = TPE, all clocks on), write and
// read-back of each, that configuration accesses reach only the addressed
// target, that the shared HWPE slot follows HWPE_SEL, and that responses are
// returned from the target addressed in the previous cycle.
module tb_cluster_ctrl;
  import darkside_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  periph_req_t rq, tp, dw, dm;
  periph_rsp_t rs, tpr, dwr, dmr;
  logic prio, sel;
  logic [7:0] ms;
  logic [2:0] ce;

  cluster_ctrl dut (.clk_i(clk), .rst_ni(rst_n), .periph_req_i(rq), .periph_rsp_o(rs),
    .tpe_cfg_o(tp), .dwe_cfg_o(dw), .tpe_rsp_i(tpr), .dwe_rsp_i(dwr),
    .dmov_cfg_o(dm), .dmov_rsp_i(dmr), .prio_shallow_o(prio), .max_stall_o(ms),
    .hwpe_sel_o(sel), .clk_en_o(ce));

  task automatic chk(input logic c, input string m);
    checks++;
    if (!c) begin failures++; if (failures < 8) $display("FAIL %s", m); end
  endtask

  task automatic acc(input logic we, input logic [15:0] addr, input logic [31:0] wd,
                     output logic [31:0] rd);
    @(negedge clk);
    rq.req = 1; rq.we = we; rq.addr = addr; rq.wdata = wd;
    #1;
    chk(tp.req == (addr[15:12] == 0 && !sel), "tpe routing");
    chk(dw.req == (addr[15:12] == 0 &&  sel), "dwe routing");
    chk(dm.req == (addr[15:12] == 1), "datamover routing");
    if (dm.req) chk(dm.addr == {4'h0, addr[11:0]} && dm.wdata == wd, "address offset");
    @(negedge clk);
    rq = '0;
    tpr.r_valid = addr[15:12] == 0 && !sel; tpr.r_data = 32'h7777_0000 | 32'(addr[11:0]);
    dwr.r_valid = addr[15:12] == 0 &&  sel; dwr.r_data = 32'hdddd_0000 | 32'(addr[11:0]);
    dmr.r_valid = addr[15:12] == 1;         dmr.r_data = 32'hdada_0000 | 32'(addr[11:0]);
    #1;
    chk(rs.r_valid, "response valid");
    rd = rs.r_data;
    tpr = '0; dwr = '0; dmr = '0;
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    rq = '0; tpr = '0; dwr = '0; dmr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    chk(prio == 1 && ms == 8'd10 && sel == 0 && ce == 3'b111, "reset values");
    for (int n = 0; n < 200; n++) begin
      logic [31:0] v;
      int r;
      r = $urandom % 4;
      v = $urandom;
      acc(1, 16'h2000 | 16'(4 * r), v, d);
      case (r)
        0: chk(prio == v[0], "prio write");
        1: chk(ms == v[7:0], "max stall write");
        2: chk(sel == v[0], "hwpe sel write");
        3: chk(ce == v[2:0], "clock enable write");
      endcase
      acc(0, 16'h2000 | 16'(4 * r), 0, d);
      case (r)
        0: chk(d == {31'b0, v[0]}, "prio read");
        1: chk(d == {24'b0, v[7:0]}, "max stall read");
        2: chk(d == {31'b0, v[0]}, "hwpe sel read");
        3: chk(d == {29'b0, v[2:0]}, "clock enable read");
      endcase
      acc(1'($urandom), 16'h0000 | 16'($urandom % 64) << 2, $urandom, d);
      chk(d[31:16] == (sel ? 16'hdddd : 16'h7777), "HWPE slot response");
      acc(1'($urandom), 16'h1000 | 16'($urandom % 64) << 2, $urandom, d);
      chk(d[31:16] == 16'hdada, "datamover response");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

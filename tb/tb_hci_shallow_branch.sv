// Testbench of hci_shallow_branch: random 288-bit accesses at every bank
// index, including roll-over past the last bank. The expected bank and row
// of word i are computed from the flat word address (addr/4 + i): bank =
// that mod 32, row = that div 32. Reads are checked against a reference.
module tb_hci_shallow_branch;
  import darkside_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  hwpe_req_t rq;
  logic      gnt, bg;
  hwpe_rsp_t rs;
  bank_req_t [31:0] br;
  logic [31:0][31:0] brd;
  logic [31:0] bank_mem [32][8];
  logic [31:0] ref_mem [256];
  logic [287:0] exp_d;
  logic exp_v, exp_rd;

  hci_shallow_branch #(.NB(32), .N_WORDS(9)) dut (
    .clk_i(clk), .rst_ni(rst_n), .hwpe_req_i(rq), .hwpe_gnt_o(gnt), .hwpe_rsp_o(rs),
    .bank_req_o(br), .bank_gnt_i(bg), .bank_rdata_i(brd));

  always_ff @(posedge clk) begin
    for (int b = 0; b < 32; b++)
      if (br[b].req && bg) begin
        if (br[b].we) begin
          for (int k = 0; k < 4; k++)
            if (br[b].be[k]) bank_mem[b][br[b].addr[2:0]][8*k +: 8] <= br[b].wdata[8*k +: 8];
        end else brd[b] <= bank_mem[b][br[b].addr[2:0]];
      end
  end

  task automatic chk(input logic c, input string m);
    checks++;
    if (!c) begin failures++; if (failures < 8) $display("FAIL %s", m); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rq = '0; bg = 0; exp_v = 0;
    for (int b = 0; b < 32; b++) for (int i = 0; i < 8; i++) bank_mem[b][i] = 0;
    for (int i = 0; i < 256; i++) ref_mem[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      int unsigned wa;
      @(negedge clk);
      chk(rs.r_valid == exp_v, "r_valid");
      if (exp_v && exp_rd) chk(rs.r_data == exp_d, "r_data");
      rq.req = 1'($urandom % 4 != 0);
      rq.we  = 1'($urandom);
      wa = $urandom % (256 - 9);
      rq.addr = wa * 4;
      rq.be = {$urandom, $urandom};
      for (int i = 0; i < 9; i++) rq.wdata[32*i +: 32] = $urandom;
      bg = 1'($urandom % 5 != 0);
      #1;
      chk(gnt == (rq.req && bg), "grant");
      for (int i = 0; i < 9; i++) begin
        int unsigned w, b, row;
        w = wa + i; b = w % 32; row = w / 32;
        chk(br[b].req == rq.req && br[b].addr == 10'(row) && br[b].wdata == rq.wdata[32*i +: 32]
            && br[b].be == rq.be[4*i +: 4], "bank index/row");
      end
      exp_v = gnt;
      exp_rd = !rq.we;
      if (gnt) begin
        for (int i = 0; i < 9; i++) begin
          if (rq.we) begin
            for (int k = 0; k < 4; k++)
              if (rq.be[4*i+k]) ref_mem[wa + i][8*k +: 8] = rq.wdata[32*i + 8*k +: 8];
          end else exp_d[32*i +: 32] = ref_mem[wa + i];
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

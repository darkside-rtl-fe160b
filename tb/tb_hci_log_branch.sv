// Testbench of hci_log_branch: 10 initiators issue random reads and writes
// (held until granted) to 32 modelled banks, with random level-3 grants.
// Checks: at most one grant per bank, every grant matches a bank request,
// an asked bank with level-3 grant always serves someone, read data equals
// a reference memory, and round-robin fairness on a fully contended bank.
module tb_hci_log_branch;
  import darkside_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int NP = 10;

  tcdm_req_t [NP-1:0] rq;
  logic      [NP-1:0] gnt;
  tcdm_rsp_t [NP-1:0] rs;
  bank_req_t [31:0]   br;
  logic      [31:0]   bg;
  logic [31:0][31:0]  brd;
  logic [31:0] bank_mem [32][16];
  logic [31:0] ref_mem  [32][16];
  logic [31:0] exp_q [NP];
  logic [NP-1:0] exp_v, exp_rd;
  bit contend = 0;

  hci_log_branch #(.N_PORTS(NP), .NB(32)) dut (
    .clk_i(clk), .rst_ni(rst_n), .in_req_i(rq), .in_gnt_o(gnt), .in_rsp_o(rs),
    .bank_req_o(br), .bank_gnt_i(bg), .bank_rdata_i(brd));

  // banks served by the testbench
  always_ff @(posedge clk) begin
    for (int b = 0; b < 32; b++)
      if (br[b].req && bg[b]) begin
        if (br[b].we) bank_mem[b][br[b].addr[3:0]] <= br[b].wdata;
        else brd[b] <= bank_mem[b][br[b].addr[3:0]];
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

  // initiators
  int unsigned wait_cnt [NP];
  initial begin
    rq = '0; bg = '0; exp_v = '0;
    for (int b = 0; b < 32; b++) for (int i = 0; i < 16; i++) begin
      bank_mem[b][i] = 0; ref_mem[b][i] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      if (n == 4000) contend = 1;
      // responses for grants of the previous cycle
      for (int p = 0; p < NP; p++) begin
        chk(rs[p].r_valid == exp_v[p], "r_valid");
        if (exp_v[p] && exp_rd[p]) chk(rs[p].r_data == exp_q[p], "r_data");
      end
      for (int p = 0; p < NP; p++) begin
        if (!rq[p].req || gnt[p]) begin    // new request once granted
          rq[p].req   = contend ? 1'b1 : 1'($urandom % 3 != 0);
          rq[p].we    = 1'($urandom);
          rq[p].addr  = contend ? 32'h0 : {18'b0, 4'($urandom), 5'($urandom % 8), 2'b00};
          rq[p].be    = 4'hf;
          rq[p].wdata = $urandom;
          wait_cnt[p] = 0;
        end else wait_cnt[p]++;
      end
      bg = contend ? 32'hffff_ffff : $urandom;
      #1;
      for (int b = 0; b < 32; b++) begin
        int ng;
        logic asked;
        ng = 0; asked = 0;
        for (int p = 0; p < NP; p++) begin
          if (gnt[p] && rq[p].addr[6:2] == 5'(b)) begin
            ng++;
            chk(br[b].req && br[b].addr == rq[p].addr[16:7] && br[b].wdata == rq[p].wdata,
                "bank request matches granted port");
          end
          if (rq[p].req && rq[p].addr[6:2] == 5'(b)) asked = 1;
        end
        chk(ng <= 1, "one grant per bank");
        chk(ng == int'(asked && bg[b]), "work conserving");
      end
      for (int p = 0; p < NP; p++) begin
        exp_v[p] = gnt[p];
        exp_rd[p] = !rq[p].we;
        if (gnt[p]) begin
          if (rq[p].we) ref_mem[rq[p].addr[6:2]][rq[p].addr[10:7]] = rq[p].wdata;
          else exp_q[p] = ref_mem[rq[p].addr[6:2]][rq[p].addr[10:7]];
        end
        if (contend && n > 4050) chk(wait_cnt[p] < NP, "round robin bound");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

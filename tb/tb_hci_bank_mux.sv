// Testbench of hci_bank_mux: random request patterns against an independent
// model of the priority / conflict-counter rule, and the paper's example:
// shallow priority, maximum stall 10, permanent collision -> the
// logarithmic side wins exactly one collision in 11 (9.1 %).
module tb_hci_bank_mux;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [31:0] lr, sr, lg, sel;
  logic sg, prio, col;
  logic [7:0] maxs;
  int cnt;   // model counter

  hci_bank_mux #(.NB(32), .STALL_W(8)) dut (
    .clk_i(clk), .rst_ni(rst_n), .log_req_i(lr), .sh_req_i(sr), .prio_shallow_i(prio),
    .max_stall_i(maxs), .log_gnt_o(lg), .sh_gnt_o(sg), .sel_sh_o(sel), .collision_o(col));

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
    int log_wins;
    lr = 0; sr = 0; prio = 1; maxs = 10; cnt = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      logic collide, shw;
      @(negedge clk);
      if (n % 500 == 0) begin prio = 1'($urandom); maxs = 8'($urandom % 5); end
      lr = $urandom & $urandom;
      sr = ($urandom % 3 == 0) ? 32'h0 : (32'h1ff << ($urandom % 24));
      #1;
      collide = (lr & sr) != 0;
      shw = collide ? (prio ^ (cnt >= maxs)) : 1'b1;
      chk(col == collide, "collision");
      chk(sg == ((sr != 0) && shw), "shallow grant");
      chk(lg == (sg ? (lr & ~sr) : lr), "log grant");
      chk(sel == (sg ? sr : 32'h0), "bank select");
      if (collide) cnt = (cnt >= maxs) ? 0 : cnt + 1;
    end
    // paper example
    @(negedge clk);
    prio = 1; maxs = 10;
    rst_n = 0; @(negedge clk); rst_n = 1; cnt = 0;
    log_wins = 0;
    for (int n = 0; n < 1100; n++) begin
      lr = 32'h4; sr = 32'h1ff;
      #1;
      if (!sg) log_wins++;
      @(negedge clk);
    end
    chk(log_wins == 100, "1 in 11 rotation");
    $display("log branch won %0d of 1100 collisions", log_wins);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

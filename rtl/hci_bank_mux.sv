// Level 3 of the HCI: the per-bank multiplexers between the logarithmic and
// the shallow branch, with the starvation-free priority rotation.
//
// A collision is a cycle in which both branches want at least one common
// bank. The branch named by prio_shallow_i wins collisions, except that a
// conflict counter counts the collisions the other branch has lost; when it
// has reached max_stall_i the other branch wins that collision (one access)
// and the counter restarts. With max_stall = 10 the non-priority branch thus
// loses at most 10 consecutive collisions (1 in 11 wins, the 9.1 % of the
// paper). The shallow branch is granted or stalled as a whole; logarithmic
// ports are stalled only on the banks where they lose. Banks without a
// collision are granted to whichever branch asks. Priority register, max
// stall register, collective shallow stall and the counter with "< max" and
// "= max" compares follow the paper and Fig. 3; counting one collision per
// cycle (not per bank) is this design's reading.
module hci_bank_mux #(
  parameter int unsigned NB      = 32,
  parameter int unsigned STALL_W = 8
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic [NB-1:0]      log_req_i,
  input  logic [NB-1:0]      sh_req_i,
  input  logic               prio_shallow_i,
  input  logic [STALL_W-1:0] max_stall_i,
  output logic [NB-1:0]      log_gnt_o,
  output logic               sh_gnt_o,
  output logic [NB-1:0]      sel_sh_o,      // bank b serves the shallow branch
  output logic               collision_o    // for observation
);
  logic [STALL_W-1:0] cnt_q;
  logic collision, switch_now, sh_wins;

  assign collision  = |(log_req_i & sh_req_i);
  assign switch_now = collision && (cnt_q >= max_stall_i);
  // shallow wins a collision if it has priority and no switch, or has no
  // priority and the switch happens
  assign sh_wins    = prio_shallow_i ^ switch_now;

  assign sh_gnt_o   = (|sh_req_i) && (!collision || sh_wins);
  assign sel_sh_o   = sh_gnt_o ? sh_req_i : '0;
  assign log_gnt_o  = log_req_i & ~sel_sh_o;
  assign collision_o = collision;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) cnt_q <= '0;
    else if (collision) begin
      if (switch_now) cnt_q <= '0;
      else            cnt_q <= cnt_q + 1'b1;
    end
  end
endmodule

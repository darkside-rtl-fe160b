// Shallow branch of the HCI: routes the 288-bit HWPE port to 9 adjacent
// TCDM banks without arbitration.
//
// The wide word's byte address is split into an index (bits 2 to
// log2(N)+1, the first bank) and an offset (the upper bits, the word row).
// Word i of the wide access goes to bank (index+i) mod N; when index+i
// rolls over the last bank, the row is offset+1. This split and the
// roll-over follow the paper's description and Fig. 3. The whole access is
// granted or stalled as one (the level-3 multiplexer gives a single grant).
// Read data is gathered one cycle after the grant, word 0 in bits [31:0].
module hci_shallow_branch
  import darkside_pkg::*;
#(
  parameter int unsigned NB      = darkside_pkg::N_BANKS,
  parameter int unsigned N_WORDS = darkside_pkg::HWPE_WORDS
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  hwpe_req_t          hwpe_req_i,
  output logic               hwpe_gnt_o,
  output hwpe_rsp_t          hwpe_rsp_o,
  output bank_req_t [NB-1:0] bank_req_o,
  input  logic               bank_gnt_i,      // collective grant
  input  logic [NB-1:0][31:0] bank_rdata_i
);
  localparam int unsigned BW = $clog2(NB);

  logic [BW-1:0]      idx;
  logic [BANK_AW-1:0] offs;
  assign idx  = hwpe_req_i.addr[2 +: BW];
  assign offs = hwpe_req_i.addr[2 + BW +: BANK_AW];

  always_comb begin
    bank_req_o = '0;
    for (int i = 0; i < N_WORDS; i++) begin
      logic [BW:0] sum;
      logic [BW-1:0] bk;
      sum = {1'b0, idx} + (BW+1)'(i);
      bk  = sum[BW-1:0];                     // (index + i) mod N
      bank_req_o[bk].req   = hwpe_req_i.req;
      bank_req_o[bk].we    = hwpe_req_i.we;
      bank_req_o[bk].addr  = offs + BANK_AW'(sum[BW]);   // roll-over: next row
      bank_req_o[bk].be    = hwpe_req_i.be[4*i +: 4];
      bank_req_o[bk].wdata = hwpe_req_i.wdata[32*i +: 32];
    end
  end

  assign hwpe_gnt_o = hwpe_req_i.req && bank_gnt_i;

  logic          rv_q;
  logic [BW-1:0] ridx_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rv_q   <= 1'b0;
      ridx_q <= '0;
    end else begin
      rv_q <= hwpe_gnt_o;
      if (hwpe_gnt_o) ridx_q <= idx;
    end
  end

  always_comb begin
    hwpe_rsp_o.r_valid = rv_q;
    hwpe_rsp_o.r_data  = '0;
    for (int i = 0; i < N_WORDS; i++) begin
      logic [BW:0] s;
      s = {1'b0, ridx_q} + (BW+1)'(i);
      hwpe_rsp_o.r_data[32*i +: 32] = bank_rdata_i[s[BW-1:0]];
    end
  end
endmodule

// One 4 kB TCDM (L1) bank: single-port, 32-bit words, byte enables.
//
// A request in cycle t is performed at the clock edge ending cycle t; read
// data is valid during cycle t+1 and holds until the next read. The bank
// never stalls: arbitration happens in the HCI in front of it. The 4 kB size
// and the count of 32 banks follow the paper; the single-cycle read timing is
// this design's choice, consistent with the one-cycle HCI latency the paper
// gives. Written as a plain array so a synthesis flow can map it to an SRAM
// macro.
module tcdm_bank #(
  parameter int unsigned WORDS = 1024,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic          clk_i,
  input  logic          req_i,
  input  logic          we_i,
  input  logic [AW-1:0] addr_i,
  input  logic [3:0]    be_i,
  input  logic [31:0]   wdata_i,
  output logic [31:0]   rdata_o
);
  logic [31:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < 4; b++)
          if (be_i[b]) mem[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end
endmodule

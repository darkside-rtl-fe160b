// RVNN mixed-precision and fused MAC&load (M&L) extension of one core.
//
// Groups what the paper adds to the RI5CY pipeline around the dot-product
// unit: the precision CSR (A-PRECISION and W-PRECISION fields), the
// Mixed-Precision Controller (MPC), the Neural-Network Register File
// (NN-RF, 6 x 32 bit: registers 0-3 weights, 4-5 activations) with its
// write port from the load-store unit, and the operand multiplexers that
// feed the dot-product unit either from the general-purpose register file
// (ordinary "virtual" dotp instruction, operands rs1/rs2) or from the NN-RF
// (M&L instruction, activation register act_sel_i and weight register
// wgt_sel_i). During an M&L the LSU may write a loaded word into one NN-RF
// register in the same cycle (lsu_we_i); the dot product then still uses the
// old value, and the new one from the next instruction on. The variant
// without update simply leaves lsu_we_i low.
// MPC: for a mixed format (W narrower than A) each dotp uses one sub-portion
// of the weight word; the MPC counts the mixed-precision dotps issued and
// selects sub-portion (count mod Pa/Pw), so the sub-words of a weight
// register are consumed in order. The count restarts at every CSR write.
// Timing: an instruction presented with valid_i yields result_o (to be
// written to the GP-RF accumulator rd) with res_valid_o one cycle later.
// From the paper: CSR-defined formats, MPC, NN-RF size and split, M&L
// concurrency with the LSU. This design's choices: CSR layout (bits [1:0]
// A precision, [3:2] W precision, bit 4 A signed, bit 5 W signed), the MPC
// counting rule, the NN-RF register numbering and the one-cycle result
// register.
module rvnn_ml_unit
  import darkside_pkg::*;
#(
  parameter int unsigned NNRF_REGS = 6,
  parameter int unsigned NNRF_W    = 4,
  parameter int unsigned NNRF_A    = 2
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // CSR write (precision formats)
  input  logic        csr_we_i,
  input  logic [31:0] csr_wdata_i,
  output logic [31:0] csr_rdata_o,
  // instruction from the decoder
  input  logic        valid_i,
  input  logic        is_ml_i,        // M&L: operands from the NN-RF
  input  logic [31:0] rs1_i,          // GP-RF operands (non-M&L dotp)
  input  logic [31:0] rs2_i,
  input  logic [31:0] acc_i,          // accumulator from the GP-RF
  input  logic [$clog2(NNRF_A)-1:0] act_sel_i,
  input  logic [$clog2(NNRF_W)-1:0] wgt_sel_i,
  // LSU write port of the NN-RF
  input  logic        lsu_we_i,
  input  logic [$clog2(NNRF_REGS)-1:0] lsu_idx_i,
  input  logic [31:0] lsu_wdata_i,
  // result to write back
  output logic        res_valid_o,
  output logic [31:0] result_o
);
  logic [5:0]  csr_q;
  logic [31:0] nnrf_q [NNRF_REGS];
  logic [3:0]  mpc_cnt_q;

  prec_e fa, fw;
  assign fa = prec_e'(csr_q[1:0]);
  assign fw = prec_e'(csr_q[3:2]);
  assign csr_rdata_o = {26'b0, csr_q};

  // MPC: sub-portion selection
  logic [4:0] ratio;
  logic       mixed;
  logic [3:0] slice;
  always_comb begin
    int unsigned pa, pw;
    pa = prec_bits(fa);
    pw = prec_bits(fw);
    ratio = (pw < pa) ? 5'(pa / pw) : 5'd1;
    mixed = pw < pa;
    slice = mixed ? mpc_cnt_q : 4'd0;
  end

  // operand multiplexers (1: NN-RF, 0: GP-RF)
  logic [31:0] op_a, op_b, dotp;
  assign op_a = is_ml_i ? nnrf_q[NNRF_W + 32'(act_sel_i)] : rs1_i;
  assign op_b = is_ml_i ? nnrf_q[32'(wgt_sel_i)]          : rs2_i;

  rvnn_dotp_unit u_dotp (
    .op_a_i(op_a), .op_b_i(op_b), .fmt_a_i(fa), .fmt_b_i(fw), .slice_i(slice),
    .signed_a_i(csr_q[4]), .signed_b_i(csr_q[5]), .acc_i(acc_i), .result_o(dotp)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      csr_q <= '0;
      mpc_cnt_q <= '0;
      res_valid_o <= 1'b0;
      result_o <= '0;
      for (int i = 0; i < NNRF_REGS; i++) nnrf_q[i] <= '0;
    end else begin
      if (csr_we_i) begin
        csr_q     <= csr_wdata_i[5:0];
        mpc_cnt_q <= '0;
      end else if (valid_i && mixed) begin
        mpc_cnt_q <= (5'(mpc_cnt_q) + 5'd1 == ratio) ? 4'd0 : mpc_cnt_q + 4'd1;
      end
      if (lsu_we_i) nnrf_q[lsu_idx_i] <= lsu_wdata_i;
      res_valid_o <= valid_i;
      if (valid_i) result_o <= dotp;
    end
  end
endmodule

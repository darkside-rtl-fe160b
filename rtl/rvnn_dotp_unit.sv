// Mixed-precision SIMD dot-product unit of the RVNN core (EX stage).
//
// RS1 (op_a_i) always holds the higher-precision vector: 32/Pa elements of
// Pa bits (Pa = 16, 8, 4 or 2, from the A-precision field). RS2 (op_b_i)
// holds elements of Pb <= Pa bits. The slicer & router takes the
// sub-portion slice_i of RS2 that has as many elements as RS1 (32*Pb/Pa
// bits, chosen by the mixed-precision controller), sign- or zero-extends
// every element to Pa bits and routes both vectors to the multiplier set of
// that format: 16 2-bit, 8 4-bit, 4 8-bit or 2 16-bit multipliers. The
// products are summed and added to the accumulator; the output multiplexer
// picks the active set. result_o = acc_i + sum_j a_j * b_j (32-bit,
// wrapping). Purely combinational: one EX cycle.
// The multiplier sets, the slicer & router and the RS1-is-wider rule follow
// the paper (Fig. 4a); the encoding of the precisions and the slice
// numbering (slice 0 = least significant part) are this design's.
module rvnn_dotp_unit
  import darkside_pkg::*;
(
  input  logic [31:0] op_a_i,
  input  logic [31:0] op_b_i,
  input  prec_e       fmt_a_i,
  input  prec_e       fmt_b_i,
  input  logic [3:0]  slice_i,
  input  logic        signed_a_i,
  input  logic        signed_b_i,
  input  logic [31:0] acc_i,
  output logic [31:0] result_o
);
  // ---------------- slicer & router: RS2 sub-word extended to Pa bits
  logic [31:0] b_ext;
  always_comb begin
    int unsigned pa, pb, n, sw;
    logic [31:0] part;
    pa = prec_bits(fmt_a_i);
    pb = prec_bits(fmt_b_i);
    if (pb > pa) pb = pa;                 // RS1 is the wider operand
    n  = 32 / pa;                         // elements per vector
    sw = n * pb;                          // bits of RS2 used
    part = op_b_i >> (32'(slice_i) * sw);
    b_ext = '0;
    for (int j = 0; j < 16; j++) begin
      if (j < int'(n)) begin
        for (int k = 0; k < 16; k++) begin
          if (k < int'(pa)) begin
            if (k < int'(pb))
              b_ext[j*pa + k] = part[j*pb + k];
            else
              b_ext[j*pa + k] = signed_b_i & part[j*pb + pb - 1];
          end
        end
      end
    end
  end

  // ---------------- the four multiplier sets
  function automatic logic signed [31:0] dot(input logic [31:0] a, input logic [31:0] b,
                                             input int unsigned p, input logic sa, input logic sb);
    logic signed [31:0] s;
    s = 0;
    for (int j = 0; j < 32 / int'(p); j++) begin
      logic signed [16:0] ea, eb;
      logic [15:0] ra, rb;
      ra = 16'(a >> (j * p)) & 16'((1 << p) - 1);
      rb = 16'(b >> (j * p)) & 16'((1 << p) - 1);
      ea = (sa && ra[p-1]) ? 17'(ra) - 17'(1 << p) : 17'(ra);
      eb = (sb && rb[p-1]) ? 17'(rb) - 17'(1 << p) : 17'(rb);
      s += 32'(ea * eb);
    end
    return s;
  endfunction

  logic [31:0] d2, d4, d8, d16;
  assign d2  = dot(op_a_i, b_ext, 2,  signed_a_i, signed_b_i);   // 16 x 2b
  assign d4  = dot(op_a_i, b_ext, 4,  signed_a_i, signed_b_i);   //  8 x 4b
  assign d8  = dot(op_a_i, b_ext, 8,  signed_a_i, signed_b_i);   //  4 x 8b
  assign d16 = dot(op_a_i, b_ext, 16, signed_a_i, signed_b_i);   //  2 x 16b

  // output multiplexer
  always_comb begin
    case (fmt_a_i)
      PREC_2:  result_o = acc_i + d2;
      PREC_4:  result_o = acc_i + d4;
      PREC_8:  result_o = acc_i + d8;
      default: result_o = acc_i + d16;
    endcase
  end
endmodule

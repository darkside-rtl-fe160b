// Testbench of rvnn_dotp_unit: random operands for every combination of
// operand precisions (16/8/4/2 bit), signedness and sub-word slice. The
// reference takes element j of RS1 at bit j*Pa and element j of RS2 at bit
// (slice*N + j)*Pw with N = 32/Pa, as the slicer of the mixed-precision
// extension selects the slice of RS2 consumed by the current instruction.
module tb_rvnn_dotp_unit;
  import darkside_pkg::*;
  int checks = 0, failures = 0;
  logic [31:0] a, b, acc, res;
  prec_e fa, fb;
  logic [3:0] slice;
  logic sa, sb;

  rvnn_dotp_unit dut (.op_a_i(a), .op_b_i(b), .fmt_a_i(fa), .fmt_b_i(fb), .slice_i(slice),
    .signed_a_i(sa), .signed_b_i(sb), .acc_i(acc), .result_o(res));

  function automatic longint elem(input logic [31:0] v, input int pos, input int p, input logic s);
    longint x;
    x = (v >> pos) & ((64'd1 << p) - 1);
    if (s && x[p-1]) x -= (64'd1 << p);
    return x;
  endfunction

  initial begin
    for (int n = 0; n < 20000; n++) begin
      int pa, pb, ne, ns;
      longint r;
      fa = prec_e'($urandom % 4);
      fb = prec_e'($urandom % 4);
      pa = prec_bits(fa); pb = prec_bits(fb);
      if (pb > pa) pb = pa;
      ne = 32 / pa;
      ns = pa / pb;
      slice = 4'($urandom % ns);
      sa = 1'($urandom); sb = 1'($urandom);
      a = $urandom; b = $urandom; acc = $urandom;
      #1;
      r = longint'(acc);
      for (int j = 0; j < ne; j++)
        r += elem(a, j * pa, pa, sa) * elem(b, (int'(slice) * ne + j) * pb, pb, sb);
      checks++;
      if (res !== 32'(r)) begin
        failures++;
        if (failures < 8) $display("FAIL pa=%0d pb=%0d slice=%0d a=%h b=%h got %h exp %h",
                                   pa, pb, slice, a, b, res, 32'(r));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_xpulpnn_dotp: random test of the packed-SIMD dot-product unit against
// an element-by-element reference, for all four element sizes, the three
// signedness variants, vector-scalar mode and with/without accumulation.
module tb_xpulpnn_dotp;
  import marsellus_pkg::*;
  int checks = 0, failures = 0;
  logic [31:0] a, b, acc, res;
  simd_fmt_e fmt;
  simd_sign_e sgn;
  logic vs, sdotp;

  xpulpnn_dotp dut (.op_a_i (a), .op_b_i (b), .acc_i (acc), .fmt_i (fmt), .sign_i (sgn),
                    .vs_i (vs), .sdotp_i (sdotp), .res_o (res));

  function automatic longint elem(logic [31:0] v, int i, int ew, bit sgnd);
    logic [31:0] e;
    e = (v >> (i * ew)) & ((32'd1 << ew) - 1);
    if (sgnd && e[ew - 1]) return longint'(e) - (longint'(1) << ew);
    return longint'(e);
  endfunction

  function automatic logic [31:0] ref_dot();
    int ew;
    longint s;
    ew = 16 >> int'(fmt);
    s = sdotp ? longint'(acc) : 0;
    for (int i = 0; i < 32 / ew; i++)
      s += elem(a, i, ew, sgn == SGN_S) * elem(b, vs ? 0 : i, ew, sgn != SGN_U);
    return s[31:0];
  endfunction

  initial begin
    for (int n = 0; n < 4000; n++) begin
      a = $urandom; b = $urandom; acc = $urandom;
      fmt = simd_fmt_e'($urandom % 4);
      sgn = simd_sign_e'($urandom % 3);
      vs = ($urandom % 4) == 0;
      sdotp = $urandom % 2;
      if (n < 8) begin a = '1; b = (n % 2) ? '1 : 32'h8000_8000; end
      #1;
      checks++;
      if (res !== ref_dot()) begin
        failures++;
        if (failures < 6) $display("FAIL fmt %0d sign %0d vs %0d a %h b %h acc %h: %h expected %h",
                                   fmt, sgn, vs, a, b, acc, res, ref_dot());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule

// tb_adip_mul2: exhaustive check of the 2-bit multiplier.
// Every digit pair (16) under every signedness combination (4) is compared
// with a product computed from integers.
module tb_adip_mul2;
  logic [1:0]        a, b;
  logic              as, bs;
  logic signed [5:0] p;
  int checks = 0, failures = 0;

  adip_mul2 dut (.a(a), .a_signed(as), .b(b), .b_signed(bs), .p(p));

  function automatic int dval(logic [1:0] d, logic s);
    return (s && d[1]) ? int'(d) - 4 : int'(d);
  endfunction

  initial begin
    for (int sa = 0; sa < 2; sa++)
      for (int sb = 0; sb < 2; sb++)
        for (int ia = 0; ia < 4; ia++)
          for (int ib = 0; ib < 4; ib++) begin
            a = 2'(ia); b = 2'(ib); as = 1'(sa); bs = 1'(sb);
            #1;
            checks++;
            if (int'(p) != dval(a, as) * dval(b, bs)) begin
              failures++;
              $display("mismatch a=%0d(%0d) b=%0d(%0d) p=%0d", ia, sa, ib, sb, p);
            end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_dual_issue_check: exhaustive test of the pairing rules. Every
// combination of the two slots' unit classes, with and without an FPU
// write-back in the cycle, is compared against a table of the rules written
// out independently here.
module tb_dual_issue_check;
  import cva6sp_pkg::*;
  fu_t  fu0, fu1;
  logic fpu_wb, ok, alu1;
  int checks = 0, failures = 0;

  dual_issue_check dut (.fu0_i(fu0), .fu1_i(fu1), .fpu_wb_i(fpu_wb), .pair_ok_o(ok), .alu1_used_o(alu1));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // unit classes: 0 none 1 alu 2 br 3 ld 4 st 5 mul 6 div 7 fpu 8 fst
  function automatic bit exp_alu1(int a, int b);
    return b == 1 && (a == 1 || a == 2);
  endfunction
  function automatic bit exp_ok(int a, int b, bit w);
    bit lsu_a = a inside {3, 4, 8}, lsu_b = b inside {3, 4, 8};
    bit md_a = a inside {5, 6}, md_b = b inside {5, 6};
    if (a == 0 || b == 0) return 0;
    if (a == 7 && b == 7) return 0;            // one FPU
    if ((a == 8 && b == 7) || (a == 7 && b == 8)) return 0;  // FP store + FPU
    if (lsu_a && lsu_b) return 0;
    if (md_a && md_b) return 0;
    if (b == 2 && (a == 1 || a == 2)) return 0;
    if (exp_alu1(a, b) && w) return 0;         // ALU 1 port owned by FPU
    return 1;
  endfunction

  initial begin
    int np = 0;
    for (int a = 0; a < 9; a++)
      for (int b = 0; b < 9; b++)
        for (int w = 0; w < 2; w++) begin
          fu0 = fu_t'(a); fu1 = fu_t'(b); fpu_wb = w[0];
          #1;
          checks += 2;
          if (ok !== exp_ok(a, b, w[0])) begin
            failures++;
            $display("pair %0d/%0d wb=%0d: ok=%0d expected %0d", a, b, w, ok, exp_ok(a, b, w[0]));
          end
          if (alu1 !== exp_alu1(a, b)) failures++;
          np += int'(ok);
        end
    // two ALU ops pair, an FP op pairs with an integer op
    checks++; if (!exp_ok(1, 1, 0) || !exp_ok(7, 1, 0) || !exp_ok(3, 7, 0)) failures++;
    $display("pairable combinations: %0d", np);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_dr_add - exhaustive test of the dual-rail full-adder cell.
//
// Applies all 27 combinations of null / 0 / 1 on a, b and carry-in. The
// expected outputs are worked out from integer addition: with all inputs
// valid, sum and carry must be the bits of a+b+c; with all inputs null
// both must be null; the sum must be null whenever any input is null;
// the carry may only be valid if its value is already decided by the
// valid inputs, and never wrong. No output may carry the illegal code.
module tb_dr_add;
  import flysig_pkg::*;
  int checks = 0, failures = 0;
  dr_t a, b, c, s, co;
  dr_add dut (.a, .b, .c, .s, .co);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic dr_t code(int v);  // 0 null, 1 zero, 2 one
    return v == 0 ? DR_NULL : (v == 1 ? DR_ZERO : DR_ONE);
  endfunction

  initial begin
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++)
        for (int k = 0; k < 3; k++) begin
          a = code(i); b = code(j); c = code(k);
          #1;
          check(!dr_illegal(s) && !dr_illegal(co), "no illegal output code");
          if (i > 0 && j > 0 && k > 0) begin
            automatic int tot = (i - 1) + (j - 1) + (k - 1);
            check(s  == dr_enc(1'(tot % 2)), $sformatf("sum %0d%0d%0d", i, j, k));
            check(co == dr_enc(1'(tot / 2)), $sformatf("carry %0d%0d%0d", i, j, k));
          end else begin
            check(s == DR_NULL, $sformatf("sum null with a null input %0d%0d%0d", i, j, k));
            if (dr_valid(co)) begin
              // carry is only allowed early if both completions agree
              automatic bit lo = 1'b0, hi = 1'b0;
              automatic int ones = (i == 2) + (j == 2) + (k == 2);
              automatic int nul  = (i == 0) + (j == 0) + (k == 0);
              lo = (ones >= 2);              // carry is 1 whatever the rest
              hi = (ones + nul) >= 2;        // carry can still be 1
              check(lo == hi && co == dr_enc(lo), $sformatf("early carry %0d%0d%0d", i, j, k));
            end
            if (i == 0 && j == 0 && k == 0)
              check(co == DR_NULL, "carry null when all inputs null");
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

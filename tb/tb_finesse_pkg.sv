// tb_finesse_pkg: checks the BN254N constants of finesse_pkg.
// p must equal 36u^4+36u^3+24u^2+6u+1 for u = -(2^62+2^55+1), P_INV must
// satisfy p*P_INV = -1 mod 2^256, R2 must be 2^512 mod p, and p must be
// prime enough for Fermat (2^(p-1) = 1 mod p) and below 2^254 (4p < R).
module tb_finesse_pkg;
  import finesse_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    logic signed [300:0] u, pu;
    logic [2*DW-1:0] prod;
    logic [2*DW+1:0] r2w;
    u  = -((301'sd1 <<< 62) + (301'sd1 <<< 55) + 301'sd1);
    pu = 36*u*u*u*u + 36*u*u*u + 24*u*u + 6*u + 1;
    check(pu == 301'(P_MOD), "p from u");
    prod = (2*DW)'(P_MOD) * (2*DW)'(P_INV);
    check(prod[DW-1:0] == {DW{1'b1}}, "p * P_INV = -1 mod R");
    r2w = (wide_t'(1) << (2*DW)) % wide_t'(P_MOD);
    check(fp_t'(r2w) == R2_MOD, "R2 = R^2 mod p");
    check(P_MOD[DW-1:DW-2] == 2'b00, "4p < R");
    check(powmod(fp_t'(2), P_MOD - 1) == fp_t'(1), "Fermat base 2");
    check(mulmod(r_mod(), rinv_mod()) == fp_t'(1), "R * R^-1 = 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

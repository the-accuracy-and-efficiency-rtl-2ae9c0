// tb_posit_addsub_selector: self-checking test of posit_addsub_selector.
//
// Two Posit(16,2) decoders feed the selector with every sign combination
// of random operands and both operations.  The checks are semantic: swap
// must be set exactly when |a| < |b|; the effective operation must be a
// magnitude subtraction exactly when the operand signs (after applying the
// requested subtraction to b) differ; and for a non-zero result the sign
// must be that of the exact result a +- b, computed in real arithmetic.
module tb_posit_addsub_selector;
  import posit_ref_pkg::*;
  import posar_pkg::*;

  localparam int PS = 16, ES = 2;
  int checks = 0;
  int failures = 0;

  logic [PS-1:0] a, b;
  logic          op, op_o, sign, swap;
  logic          as, asn, bs, bsn;
  logic signed [k_width(PS)-1:0] ak, bk;
  logic [ES:0]   ae, be;
  logic [f_width(PS)-1:0] af, bf;
  logic [fs_width(PS)-1:0] afs, bfs;
  logic [$clog2(PS+1)-1:0] r0, r1, r2, r3;

  posit_decoder #(.PS(PS), .ES(ES)) u_da (.bp(a), .s(as), .sn(asn), .k(ak), .rs(r0), .e(ae),
    .ers(r1), .f(af), .fs(afs));
  posit_decoder #(.PS(PS), .ES(ES)) u_db (.bp(b), .s(bs), .sn(bsn), .k(bk), .rs(r2), .e(be),
    .ers(r3), .f(bf), .fs(bfs));
  posit_addsub_selector #(.PS(PS), .ES(ES)) dut (.op_i(op),
    .s1(as), .sn1(asn), .k1(ak), .e1(ae), .f1(af), .fs1(afs),
    .s2(bs), .sn2(bsn), .k2(bk), .e2(be), .f2(bf), .fs2(bfs),
    .op_o(op_o), .sign(sign), .swap(swap));

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ra, rb, res;
    bit exp_swap, exp_sub;
    for (int n = 0; n < 40000; n++) begin
      a  = PS'(rand_posit(PS));
      b  = (n % 7 == 0) ? a : PS'(rand_posit(PS));
      if (n % 11 == 0) b = PS'(pneg(64'(a), PS));
      if (a == PS'(nar_of(PS)) || b == PS'(nar_of(PS))) continue;
      op = 1'(n);
      #1;
      ra = ref_to_real(64'(a), PS, ES);
      rb = ref_to_real(64'(b), PS, ES);
      res = op ? ra - rb : ra + rb;
      exp_swap = (ra < 0 ? -ra : ra) < (rb < 0 ? -rb : rb);
      exp_sub  = (a != 0 && b != 0) && ((ra < 0) != ((op ? -rb : rb) < 0));
      checks++;
      if (swap != exp_swap || (a != 0 && b != 0 && op_o != exp_sub) ||
          (res != 0.0 && sign != (res < 0))) begin
        failures++;
        if (failures < 10)
          $display("FAIL a=%h b=%h op=%0d: swap=%0d/%0d op_o=%0d/%0d sign=%0d res=%f",
                   a, b, op, swap, exp_swap, op_o, exp_sub, sign, res);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

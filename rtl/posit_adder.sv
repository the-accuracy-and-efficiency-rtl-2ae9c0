// posit_adder: posit addition and subtraction on unpacked operands.
//
// Follows the paper's adder: the selector fixes the effective operation,
// the result sign and the operand order (|P1| >= |P2|).  A NaR operand
// gives NaR; a zero second operand returns the first.  Otherwise the
// result takes regime and exponent of P1, its fraction size is 2*ps-4, both
// fractions are aligned to that size, the second is shifted right by the
// scale difference t = (k1*2^es+e1) - (k2*2^es+e2) and added or
// subtracted, and bm records whether ones were shifted out of the second
// fraction.
//
// Where the paper's adder assigns the result sign twice (first from the
// selector, later P3.s <- P1.s), the selector's sign is kept: with swapped
// operands the second assignment would lose the sign of a subtraction.
// The result is unrounded and not normalised (carry-out or cancellation
// possible); posit_normalize and posit_encoder follow.  Combinational.
module posit_adder
  import posar_pkg::*;
#(
  parameter int unsigned PS = 32,
  parameter int unsigned ES = 3,
  localparam int unsigned KW  = k_width(PS),
  localparam int unsigned FW  = f_width(PS),
  localparam int unsigned FSW = fs_width(PS),
  localparam int unsigned SCW = sc_width(PS, ES)
) (
  input  logic                 op,       // 0 add, 1 subtract
  input  logic                 s1, sn1,
  input  logic signed [KW-1:0] k1,
  input  logic [ES:0]          e1,
  input  logic [FW-1:0]        f1,
  input  logic [FSW-1:0]       fs1,
  input  logic                 s2, sn2,
  input  logic signed [KW-1:0] k2,
  input  logic [ES:0]          e2,
  input  logic [FW-1:0]        f2,
  input  logic [FSW-1:0]       fs2,
  output logic                 s3, sn3,
  output logic signed [KW-1:0] k3,
  output logic [ES:0]          e3,
  output logic [FW-1:0]        f3,
  output logic [FSW-1:0]       fs3,
  output logic                 bm3
);

  logic                 eff_op, sign, swap;
  logic                 as, asn, bs, bsn;
  logic signed [KW-1:0] ak, bk;
  logic [ES:0]          ae, be;
  logic [FW-1:0]        af, bf;
  logic [FSW-1:0]       afs, bfs;
  logic signed [SCW:0]  t;
  logic [FW-1:0]        al1, al2, sh2;

  posit_addsub_selector #(.PS(PS), .ES(ES)) u_sel (
    .op_i(op),
    .s1(s1), .sn1(sn1), .k1(k1), .e1(e1), .f1(f1), .fs1(fs1),
    .s2(s2), .sn2(sn2), .k2(k2), .e2(e2), .f2(f2), .fs2(fs2),
    .op_o(eff_op), .sign(sign), .swap(swap)
  );

  always_comb begin
    // Operand order after the selector: (a) is the larger magnitude.
    {as, asn, ak, ae, af, afs} = swap ? {s2, sn2, k2, e2, f2, fs2}
                                      : {s1, sn1, k1, e1, f1, fs1};
    {bs, bsn, bk, be, bf, bfs} = swap ? {s1, sn1, k1, e1, f1, fs1}
                                      : {s2, sn2, k2, e2, f2, fs2};
    t   = '0;
    al1 = '0;
    al2 = '0;
    sh2 = '0;
    if ((asn && as) || (bsn && bs)) begin             // NaR
      {s3, sn3, k3, e3, f3, fs3, bm3} = {1'b1, 1'b1, KW'(0), (ES + 1)'(0),
                                         FW'(0), FSW'(0), 1'b0};
    end else if (bsn && !bs) begin                    // P2 = 0: P3 = P1
      {s3, sn3, k3, e3, f3, fs3, bm3} = {as, asn, ak, ae, af, afs, 1'b0};
      if (!asn) s3 = sign;
    end else begin
      s3  = sign;
      sn3 = 1'b0;
      k3  = ak;
      e3  = ae;
      fs3 = FSW'(2 * PS - 4);
      t   = ((SCW + 1)'(ak) <<< ES) + (SCW + 1)'(ae)
          - ((SCW + 1)'(bk) <<< ES) - (SCW + 1)'(be);
      al1 = af << (2 * PS - 4 - int'(afs));
      al2 = bf << (2 * PS - 4 - int'(bfs));
      sh2 = al2 >> t;
      f3  = eff_op ? (al1 - sh2) : (al1 + sh2);
      bm3 = (sh2 << t) != al2;
    end
  end

endmodule

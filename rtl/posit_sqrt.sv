// posit_sqrt: posit square root on an unpacked operand.
//
// Follows the structure of the paper's SQRT wrapper: NaR and negative
// inputs give NaR, 0 gives 0; otherwise the result is positive, its scale
// is half the input's (a right shift) after an odd scale has been made even
// by doubling the fraction, and the fraction's root comes from the
// non-restoring integer square root (uint_sqrt), whose non-zero remainder
// becomes the sticky bit bm.
//
// Two points differ from the paper's listing.  (1) The listing halves k and
// e separately (k >> 1 and (e + (e&1)) >> 1).  The new k is right, but for
// an odd k the new exponent misses the 2^(es-1) that the odd regime bit
// contributes, so here the combined scale k*2^es + e is halved and then
// split again (which gives the same k >> 1).  (2) The listing takes the root of the fraction as it is,
// which leaves only about fs/2 result bits; here the fraction is first
// widened to 2*ps fraction bits, so the root has ps fraction bits (fs = ps),
// more than any posit of size ps keeps.  Combinational.
module posit_sqrt
  import posar_pkg::*;
#(
  parameter int unsigned PS = 32,
  parameter int unsigned ES = 3,
  localparam int unsigned KW  = k_width(PS),
  localparam int unsigned FW  = f_width(PS),
  localparam int unsigned FSW = fs_width(PS),
  localparam int unsigned SCW = sc_width(PS, ES),
  localparam int unsigned DW  = 2 * PS + 2
) (
  input  logic                 s1, sn1,
  input  logic signed [KW-1:0] k1,
  input  logic [ES:0]          e1,
  input  logic [FW-1:0]        f1,
  input  logic [FSW-1:0]       fs1,
  output logic                 s2, sn2,
  output logic signed [KW-1:0] k2,
  output logic [ES:0]          e2,
  output logic [FW-1:0]        f2,
  output logic [FSW-1:0]       fs2,
  output logic                 bm2
);

  logic signed [SCW-1:0] scale, half;
  logic [DW-1:0]         d;
  logic [DW/2-1:0]       q;
  logic [DW/2:0]         r;

  uint_sqrt #(.DW(DW)) u_isqrt (.d(d), .q(q), .r(r));

  always_comb begin
    scale = (SCW'(k1) <<< ES) + SCW'(e1);
    half  = scale >>> 1;
    // fraction * 2^(scale odd), widened to 2*PS fraction bits
    d     = (DW'(f1[PS-1:0]) << scale[0]) << (2 * PS - int'(fs1));
    if (sn1 && s1) begin                                   // NaR
      {s2, sn2, k2, e2, f2, fs2, bm2} = {1'b1, 1'b1, KW'(0), (ES + 1)'(0),
                                         FW'(0), FSW'(0), 1'b0};
    end else if (sn1) begin                                // 0
      {s2, sn2, k2, e2, f2, fs2, bm2} = {1'b0, 1'b1, KW'(0), (ES + 1)'(0),
                                         FW'(0), FSW'(0), 1'b0};
    end else if (s1) begin                                 // negative
      {s2, sn2, k2, e2, f2, fs2, bm2} = {1'b1, 1'b1, KW'(0), (ES + 1)'(0),
                                         FW'(0), FSW'(0), 1'b0};
    end else begin
      s2  = 1'b0;
      sn2 = 1'b0;
      k2  = KW'(half >>> ES);
      e2  = {1'b0, half[ES-1:0]};
      fs2 = FSW'(PS);
      f2  = FW'(q);
      bm2 = r != '0;
    end
  end

endmodule

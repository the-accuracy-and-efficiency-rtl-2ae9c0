// posit_addsub_selector: decides how an add or subtract is carried out.
//
// Follows the paper's add/sub selector: for operands of equal sign the
// requested operation stays and the result takes their sign; for operands
// of opposite sign the operation flips (add <-> subtract of magnitudes) and
// the result takes the sign of the first operand.  If the first operand's
// magnitude is below the second's, the operands are swapped and, for a
// magnitude subtraction, the sign is inverted.  The adder then always works
// on |P1| >= |P2|.
//
// Magnitudes are compared on the unpacked fields: first the scale
// k*2^es + e, then the fraction aligned to a common width; a zero (sn set)
// is smaller than any other value.  Instead of returning the two operands
// reordered, the module returns a swap flag and leaves the multiplexing to
// the adder (this design's choice).  Combinational.
module posit_addsub_selector
  import posar_pkg::*;
#(
  parameter int unsigned PS = 32,
  parameter int unsigned ES = 3,
  localparam int unsigned KW  = k_width(PS),
  localparam int unsigned FW  = f_width(PS),
  localparam int unsigned FSW = fs_width(PS),
  localparam int unsigned SCW = sc_width(PS, ES)
) (
  input  logic                 op_i,     // 0 add, 1 subtract
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
  output logic                 op_o,     // 0 add, 1 subtract magnitudes
  output logic                 sign,     // sign of the result
  output logic                 swap      // |P1| < |P2|: operands exchanged
);

  logic signed [SCW-1:0] sc1, sc2;
  logic [PS:0]           a1, a2;     // fractions aligned to PS fraction bits

  always_comb begin
    if (s1 == s2) begin
      op_o = op_i;
      sign = s1;
    end else begin
      op_o = ~op_i;
      sign = s1;
    end

    sc1 = (SCW'(k1) <<< ES) + SCW'(e1);
    sc2 = (SCW'(k2) <<< ES) + SCW'(e2);
    a1  = (PS + 1)'(f1 << (PS - int'(fs1)));
    a2  = (PS + 1)'(f2 << (PS - int'(fs2)));
    if (sn1 || sn2)
      swap = sn1 && !sn2;
    else
      swap = (sc1 < sc2) || (sc1 == sc2 && a1 < a2);

    if (swap && op_o) sign = ~sign;
  end

endmodule

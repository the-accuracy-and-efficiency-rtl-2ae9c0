// uint_sqrt: non-restoring square root of an unsigned integer.
//
// Follows the paper's UINT_SQRT algorithm: D is consumed two bits at a
// time from the top; the partial remainder R is signed, and at each step
// (Q<<2)|1 is subtracted while R >= 0, or (Q<<2)|3 added while R < 0; the
// new root bit is 1 when the new R is non-negative.  A negative final
// remainder is restored so that D = Q*Q + R.  The paper's listing adds
// (Q<<2)|1 for that; after the last step Q has already been shifted left,
// so the amount last subtracted is (Q<<1)|1, and that is what is added
// back here.
// The DW/2 steps are unrolled into one combinational block (the paper
// gives no cycle count; this is this design's choice).
//
// Interface: d (DW bits, DW even) in; q (DW/2 bits) and r (DW/2+1 bits) out.
module uint_sqrt #(
  parameter int unsigned DW = 66,
  localparam int unsigned QW = DW / 2,
  localparam int unsigned RW = QW + 3
) (
  input  logic [DW-1:0]  d,
  output logic [QW-1:0]  q,
  output logic [QW:0]    r
);

  logic signed [RW-1:0] rr, tr;
  logic [QW-1:0]        qq;

  always_comb begin
    rr = '0;
    qq = '0;
    for (int i = QW - 1; i >= 0; i--) begin
      tr = (rr <<< 2) | RW'(d[2*i +: 2]);
      if (rr >= 0) rr = tr - signed'(RW'({qq, 2'b01}));
      else         rr = tr + signed'(RW'({qq, 2'b11}));
      qq = (rr >= 0) ? {qq[QW-2:0], 1'b1} : {qq[QW-2:0], 1'b0};
    end
    if (rr < 0) rr = rr + signed'(RW'({qq, 1'b1}));
    q = qq;
    r = rr[QW:0];
  end

endmodule

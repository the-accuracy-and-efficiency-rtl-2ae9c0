// posit_misc_ops: the F-extension operations that need no rounding:
// sign injection (fsgnj/fsgnjn/fsgnjx), fmin/fmax, feq/flt/fle and fclass.
//
// The paper states that all F-extension instructions are supported but
// does not describe these; what follows is this design's own mapping.
// Posits order like two's-complement integers, so comparisons, min and max
// are signed integer operations on the bit patterns; NaR (the most
// negative pattern) is therefore below every real and equal to itself,
// as in the posit standard.  A posit is negated by two's complement, so
// sign injection negates the magnitude of rs1 when the wanted sign is 1
// (0 and NaR are their own negation).  fclass sets bit 1 (negative),
// bit 4 (zero), bit 6 (positive) or bit 9 (NaR, reported like a quiet NaN).
//
// Interface: combinational; a, b posits, op selects; res is the posit
// result, res_int the integer result.
module posit_misc_ops
  import posar_pkg::*;
#(
  parameter int unsigned PS = 32
) (
  input  posar_op_e            op,
  input  logic [PS-1:0]        a,
  input  logic [PS-1:0]        b,
  output logic [PS-1:0]        res,
  output logic [XLEN-1:0]      res_int
);

  logic [PS-1:0] mag_a;
  logic          want_neg;
  logic          lt, eq;
  logic [PS-1:0] nar;

  always_comb begin
    nar      = {1'b1, {(PS - 1){1'b0}}};
    mag_a    = a[PS-1] ? (~a + 1'b1) : a;
    lt       = signed'(a) < signed'(b);
    eq       = a == b;
    want_neg = 1'b0;
    res      = '0;
    res_int  = '0;
    unique case (op)
      OP_SGNJ:  want_neg = b[PS-1];
      OP_SGNJN: want_neg = ~b[PS-1];
      OP_SGNJX: want_neg = a[PS-1] ^ b[PS-1];
      default:  want_neg = 1'b0;
    endcase
    unique case (op)
      OP_SGNJ, OP_SGNJN, OP_SGNJX: res = want_neg ? (~mag_a + 1'b1) : mag_a;
      OP_MIN:   res = lt ? a : b;
      OP_MAX:   res = lt ? b : a;
      OP_EQ:    res_int = XLEN'(eq);
      OP_LT:    res_int = XLEN'(lt);
      OP_LE:    res_int = XLEN'(lt | eq);
      OP_CLASS: begin
        if (a == nar)        res_int = XLEN'(1) << 9;
        else if (a == '0)    res_int = XLEN'(1) << 4;
        else if (a[PS-1])    res_int = XLEN'(1) << 1;
        else                 res_int = XLEN'(1) << 6;
      end
      default: ;
    endcase
  end

endmodule

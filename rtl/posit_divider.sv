// posit_divider: posit division on unpacked operands.
//
// Follows the paper's divider: a NaR operand or a zero divisor gives NaR,
// a zero dividend gives 0.  Otherwise the sign is the XOR of the signs,
// the regimes subtract, and the exponents subtract with a borrow from the
// regime when e2 > e1 (e3 = e1 + 2^es - e2, k3 = k3 - 1).  The dividend's
// fraction is widened by ps bits before the integer division so that the
// quotient keeps enough bits (fs3 = fs1 + ps - fs2); a non-zero remainder
// sets the sticky bit bm.  The quotient lies in (1/2, 2) times 2^fs3 and is
// normalised afterwards.  The division uses the tool's '/' and '%'
// operators, as the paper uses Chisel's built-in ones.  Combinational.
module posit_divider
  import posar_pkg::*;
#(
  parameter int unsigned PS = 32,
  parameter int unsigned ES = 3,
  localparam int unsigned KW  = k_width(PS),
  localparam int unsigned FW  = f_width(PS),
  localparam int unsigned FSW = fs_width(PS)
) (
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

  logic [2*PS-1:0] num;
  logic [PS-1:0]   den;
  logic [2*PS-1:0] quo, rem;

  always_comb begin
    num = {f1[PS-1:0], {PS{1'b0}}};          // f1 << ps
    den = f2[PS-1:0];
    // A zero divisor only occurs for special operands, handled below.
    quo = (den != '0) ? num / (2*PS)'(den) : '0;
    rem = (den != '0) ? num % (2*PS)'(den) : '0;
    if ((sn1 && s1) || (sn2 && s2) || (sn2 && !s2)) begin
      {s3, sn3, k3, e3, f3, fs3, bm3} = {1'b1, 1'b1, KW'(0), (ES + 1)'(0),
                                         FW'(0), FSW'(0), 1'b0};
    end else if (sn1 && !s1) begin
      {s3, sn3, k3, e3, f3, fs3, bm3} = {1'b0, 1'b1, KW'(0), (ES + 1)'(0),
                                         FW'(0), FSW'(0), 1'b0};
    end else begin
      s3  = s1 ^ s2;
      sn3 = 1'b0;
      k3  = k1 - k2;
      if (e2 > e1) begin
        e3 = e1 + (ES + 1)'(1 << ES) - e2;
        k3 = k3 - 1'b1;
      end else begin
        e3 = e1 - e2;
      end
      fs3 = fs1 + FSW'(PS) - fs2;
      f3  = FW'(quo);
      bm3 = rem != '0;
    end
  end

endmodule

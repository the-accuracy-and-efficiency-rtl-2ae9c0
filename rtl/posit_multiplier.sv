// posit_multiplier: posit multiplication on unpacked operands.
//
// Follows the paper's multiplier: a NaR operand gives NaR, otherwise a
// zero operand gives 0; in the normal case the sign is the XOR of the
// signs, regimes add, exponents add, fraction sizes add and the fractions
// (hidden bits included) are multiplied.  No bits are lost, so bm = 0.
// The product lies in [1, 4) times 2^fs and the exponent sum can reach
// 2*(2^es - 1); posit_normalize folds both back before encoding.
// The multiply uses the synthesis tool's '*' operator, as the paper's unit
// uses Chisel's built-in operator.  Combinational.
module posit_multiplier
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

  // Decoded fractions are at most PS bits wide (hidden bit included).
  logic [PS-1:0]   m1, m2;
  logic [2*PS-1:0] prod;

  always_comb begin
    m1   = f1[PS-1:0];
    m2   = f2[PS-1:0];
    prod = m1 * m2;
    if ((sn1 && s1) || (sn2 && s2)) begin
      {s3, sn3, k3, e3, f3, fs3, bm3} = {1'b1, 1'b1, KW'(0), (ES + 1)'(0),
                                         FW'(0), FSW'(0), 1'b0};
    end else if ((sn1 && !s1) || (sn2 && !s2)) begin
      {s3, sn3, k3, e3, f3, fs3, bm3} = {1'b0, 1'b1, KW'(0), (ES + 1)'(0),
                                         FW'(0), FSW'(0), 1'b0};
    end else begin
      s3  = s1 ^ s2;
      sn3 = 1'b0;
      k3  = k1 + k2;
      e3  = e1 + e2;
      fs3 = fs1 + fs2;
      f3  = FW'(prod);
      bm3 = 1'b0;
    end
  end

endmodule

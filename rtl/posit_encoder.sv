// posit_encoder: packs an unpacked posit into its binary form and rounds.
//
// Follows the paper's encoding algorithm: 0 and NaR come from sn and s;
// a regime k >= ps-2 saturates to maxpos and k < -(ps-2) to minpos (a
// posit never rounds to 0 or NaR); otherwise the regime bits are built,
// the fraction (without hidden bit) is moved into a 3*ps-bit buffer behind
// the exponent so the exponent's top bit sits at the buffer's top, and the
// first nrs = ps-rs-1 bits of that buffer follow the regime.  Rounding is
// round-to-nearest, ties to even, on the bit string: b(n+1) is the first
// bit that does not fit and the sticky bit bm ORs every bit after it and
// the bm input.  A negative result is two's-complemented at the end.
//
// Interface: combinational.  Inputs must be normalised: e < 2^es, the
// hidden bit of f at position fs and fs <= 2*ps (posit_normalize
// delivers exactly that).  Output bp is the binary posit.
module posit_encoder
  import posar_pkg::*;
#(
  parameter int unsigned PS = 32,
  parameter int unsigned ES = 3,
  localparam int unsigned KW  = k_width(PS),
  localparam int unsigned FW  = f_width(PS),
  localparam int unsigned FSW = fs_width(PS)
) (
  input  logic                 s,
  input  logic                 sn,
  input  logic signed [KW-1:0] k,
  input  logic [ES-1:0]        e,
  input  logic [FW-1:0]        f,
  input  logic [FSW-1:0]       fs,
  input  logic                 bm,
  output logic [PS-1:0]        bp
);

  logic [PS-1:0]   regimebits;
  logic [PS-1:0]   mag;
  logic [FW-1:0]   fsh;          // f << (2ps - fs), hidden bit at 2ps
  logic [3*PS-1:0] othervalue;
  logic [PS-1:0]   top;          // othervalue[3ps:2ps+1]
  logic [PS-1:0]   otherbits;
  logic            bn1, bmx, add_one;
  int              rn, rs, nrs;

  always_comb begin
    regimebits = '0;
    fsh        = '0;
    othervalue = '0;
    top        = '0;
    otherbits  = '0;
    bn1        = 1'b0;
    bmx        = 1'b0;
    add_one    = 1'b0;
    rn         = 0;
    rs         = 0;
    nrs        = 0;
    mag        = '0;
    if (sn) begin
      bp = s ? (PS'(1) << (PS - 1)) : '0;
    end else begin
      if (k >= signed'(KW'(PS - 2))) begin
        mag = (PS'(1) << (PS - 1)) - 1'b1;           // maxpos
      end else if (k < -signed'(KW'(PS - 2))) begin
        mag = PS'(1);                                 // minpos
      end else begin
        if (k >= 0) begin
          rn         = int'(k) + 1;
          regimebits = ((PS'(1) << rn) - 1'b1) << 1;
        end else begin
          rn         = -int'(k);
          regimebits = PS'(1);
        end
        rs  = rn + 1;
        nrs = PS - rs - 1;
        if (nrs < 0) nrs = 0;
        regimebits = regimebits << nrs;

        fsh        = f << (2 * PS - int'(fs));
        othervalue = {e, fsh[2*PS-1:0], {(PS - ES){1'b0}}};
        top        = othervalue[3*PS-1:2*PS];
        otherbits  = top >> (PS - nrs);
        mag        = regimebits | otherbits;
        bn1        = top[PS - nrs - 1];
        bmx        = |(top & ((PS'(1) << (PS - nrs - 1)) - 1'b1))
                   | |othervalue[2*PS-1:0] | bm;
        add_one    = bn1 & (bmx | (~bmx & mag[0]));
        mag        = mag + PS'(add_one);
      end
      bp = s ? (~mag + 1'b1) : mag;
    end
  end

endmodule

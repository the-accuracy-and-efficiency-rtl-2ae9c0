// posit_decoder: unpacks a binary posit into its fields.
//
// Follows the decoding algorithm of the paper step by step: the special
// flag sn is the NOR of all bits below the sign; a negative posit is
// replaced by its two's complement; the first regime bit ri selects
// whether a run of ones (k = rn-1) or of zeros (k = -rn) is counted; the
// exponent field may be cut short by a long regime (ers < es bits), in
// which case the bits present are the most significant ones of e; the
// remaining frs bits are the fraction, to which the hidden bit 2^fs is
// added (fs = frs).  For 0 and NaR the fields other than s and sn carry no
// meaning.
//
// Interface: bp in, unpacked fields out.  Purely combinational.
// The exponent output is es+1 bits wide (top bit always 0) so that it has
// the same width as the exponent of an unrounded product; f is the shared
// raw-fraction width of posar_pkg.  Both widths are this design's choice.
module posit_decoder
  import posar_pkg::*;
#(
  parameter int unsigned PS = 32,   // posit size
  parameter int unsigned ES = 3,    // exponent size (>= 1)
  localparam int unsigned KW  = k_width(PS),
  localparam int unsigned FW  = f_width(PS),
  localparam int unsigned FSW = fs_width(PS),
  localparam int unsigned CW  = $clog2(PS + 1)
) (
  input  logic [PS-1:0]        bp,
  output logic                 s,
  output logic                 sn,
  output logic signed [KW-1:0] k,
  output logic [CW-1:0]        rs,
  output logic [ES:0]          e,
  output logic [CW-1:0]        ers,
  output logic [FW-1:0]        f,
  output logic [FSW-1:0]       fs
);

  logic [PS-1:0] mag;       // two's complement of bp when negative
  logic [PS-1:0] rest;      // mag with sign and regime shifted out
  logic          ri;
  logic [CW-1:0] rn;
  int            frs;
  int            ers_i;

  always_comb begin
    sn  = ~|bp[PS-2:0];
    s   = bp[PS-1];
    mag = s ? (~bp + 1'b1) : bp;
    ri  = mag[PS-2];

    // Leading-run detector: number of bits equal to ri from bit PS-2 down.
    rn = '0;
    for (int i = PS - 2; i >= 0; i--) begin
      if (mag[i] != ri) break;
      rn = rn + 1'b1;
    end
    k  = ri ? KW'(signed'({1'b0, rn}) - 1) : -KW'(signed'({1'b0, rn}));
    rs = rn + 1'b1;

    // ers = max(0, min(es, ps-rs-1))
    ers_i = int'(PS) - int'(rs) - 1;
    if (ers_i > int'(ES)) ers_i = int'(ES);
    if (ers_i < 0)        ers_i = 0;
    ers = CW'(ers_i);

    // Exponent: the ES bits after sign and regime, missing bits read as 0,
    // which equals BP[..] << (es-ers) of the paper.
    rest = mag << (int'(rs) + 1);
    e    = {1'b0, rest[PS-1 -: ES]};

    // frs = max(0, ps-rs-es-1); f = BP[frs:1] + 2^frs
    frs = int'(PS) - int'(rs) - int'(ES) - 1;
    if (frs < 0) frs = 0;
    fs = FSW'(frs);
    f  = '0;
    for (int i = 0; i < PS; i++)
      if (i < frs) f[i] = mag[i];
    f[frs] = 1'b1;
  end

endmodule

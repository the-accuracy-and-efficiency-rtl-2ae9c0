// posit_int_converter: conversions between posits and XLEN-bit integers
// (RISC-V fcvt.w.s, fcvt.wu.s, fcvt.s.w, fcvt.s.wu).
//
// The paper states that all F-extension instructions are supported but
// does not describe how; the conversions here are this design's own.
//
// Integer to posit: the sign and magnitude of the integer become an
// unpacked posit with k = 0, e = 0, fs = 0 and f = |x|; posit_normalize
// then finds the leading one and posit_encoder rounds, so the conversion
// is rounded to nearest, ties to even, like every posit result.
//
// Posit to integer: the value is placed in fixed point with XLEN fraction
// bits and rounded to nearest-even, or truncated when the instruction's
// rounding mode is RTZ (other modes round to nearest-even).  Out-of-range
// values saturate to the integer limits; a negative value converted to an
// unsigned integer gives 0; 0 gives 0 and NaR gives the most negative
// integer 0x80000000 (the posit standard's integer NaR), for both the
// signed and the unsigned form.  Combinational.
module posit_int_converter
  import posar_pkg::*;
#(
  parameter int unsigned PS = 32,
  parameter int unsigned ES = 3,
  localparam int unsigned KW  = k_width(PS),
  localparam int unsigned FW  = f_width(PS),
  localparam int unsigned FSW = fs_width(PS),
  localparam int unsigned SCW = sc_width(PS, ES)
) (
  // posit -> integer
  input  logic                 p_s, p_sn,
  input  logic signed [KW-1:0] p_k,
  input  logic [ES:0]          p_e,
  input  logic [FW-1:0]        p_f,
  input  logic [FSW-1:0]       p_fs,
  input  logic                 to_unsigned,
  input  logic                 rtz,
  output logic [XLEN-1:0]      int_o,
  // integer -> posit (unpacked, to be normalised and encoded)
  input  logic [XLEN-1:0]      int_i,
  input  logic                 from_signed,
  output logic                 u_s, u_sn,
  output logic signed [KW-1:0] u_k,
  output logic [ES:0]          u_e,
  output logic [FW-1:0]        u_f,
  output logic [FSW-1:0]       u_fs,
  output logic                 u_bm
);

  logic signed [SCW-1:0] scale;
  logic [2*XLEN:0]       fixed;       // integer part . XLEN fraction bits
  logic [XLEN:0]         ipart;       // one extra bit for the rounding carry
  logic                  guard, sticky, inc;
  logic [XLEN-1:0]       mag_i;

  // posit -> integer
  always_comb begin
    scale = (SCW'(p_k) <<< ES) + SCW'(p_e);
    fixed = '0;
    ipart = '0;
    guard = 1'b0;
    sticky = 1'b0;
    inc   = 1'b0;
    if (p_sn) begin
      int_o = p_s ? {1'b1, {(XLEN - 1){1'b0}}} : '0;
    end else if (scale >= signed'(SCW'(XLEN))) begin                // too large
      if (p_s) int_o = to_unsigned ? '0 : {1'b1, {(XLEN - 1){1'b0}}};
      else     int_o = to_unsigned ? '1 : {1'b0, {(XLEN - 1){1'b1}}};
    end else begin
      if (scale < -signed'(SCW'(1))) begin
        fixed = '0;                                       // |x| < 1/2
        sticky = 1'b1;
      end else begin
        // f has fs fraction bits; value = f * 2^(scale - fs)
        fixed = (2 * XLEN + 1)'(p_f[PS-1:0]) << (int'(XLEN) + int'(scale) - int'(p_fs));
      end
      ipart  = {1'b0, fixed[2*XLEN-1:XLEN]};
      guard  = fixed[XLEN-1];
      sticky = sticky | (|fixed[XLEN-2:0]);
      inc    = !rtz && guard && (sticky || ipart[0]);
      ipart  = ipart + (XLEN + 1)'(inc);
      if (to_unsigned) begin
        if (p_s)             int_o = '0;
        else if (ipart[XLEN]) int_o = '1;
        else                 int_o = ipart[XLEN-1:0];
      end else begin
        if (p_s) int_o = (ipart > (XLEN + 1)'(1) << (XLEN - 1))
                         ? {1'b1, {(XLEN - 1){1'b0}}} : XLEN'(-ipart);
        else     int_o = (ipart > ((XLEN + 1)'(1) << (XLEN - 1)) - 1'b1)
                         ? {1'b0, {(XLEN - 1){1'b1}}} : ipart[XLEN-1:0];
      end
    end
  end

  // integer -> posit
  always_comb begin
    u_s   = from_signed & int_i[XLEN-1];
    mag_i = u_s ? (~int_i + 1'b1) : int_i;
    u_sn  = int_i == '0;
    if (u_sn) u_s = 1'b0;
    u_k   = '0;
    u_e   = '0;
    u_f   = FW'(mag_i);
    u_fs  = '0;
    u_bm  = 1'b0;
  end

endmodule

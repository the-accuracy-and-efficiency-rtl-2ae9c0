// posit_normalize: brings an unrounded arithmetic result into the form the
// encoder expects.
//
// The paper's arithmetic algorithms leave their result un-normalised: a
// product has its leading one at fs or fs+1 and an exponent that can reach
// 2*(2^es-1), a quotient may be below one, an adder result may carry out or
// cancel.  The paper does not show the step that fixes this; this module is
// this design's own version of it.  It finds the leading one of f, folds
// its distance from fs and the exponent into one scale
// k*2^es + e + (msb - fs), splits the scale again into k and e < 2^es, and
// moves the leading one of f to bit 2*ps (fs = 2*ps), ORing any bits shifted
// out into the sticky bit bm.  A non-special input with f = 0 (exact
// cancellation) becomes the special number 0.  k is clamped to +-ps, which
// the encoder saturates anyway.
//
// Interface: combinational, unpacked posit in, unpacked posit out.
module posit_normalize
  import posar_pkg::*;
#(
  parameter int unsigned PS = 32,
  parameter int unsigned ES = 3,
  localparam int unsigned KW  = k_width(PS),
  localparam int unsigned FW  = f_width(PS),
  localparam int unsigned FSW = fs_width(PS),
  localparam int unsigned SCW = sc_width(PS, ES)
) (
  input  logic                 s_i,
  input  logic                 sn_i,
  input  logic signed [KW-1:0] k_i,
  input  logic [ES:0]          e_i,
  input  logic [FW-1:0]        f_i,
  input  logic [FSW-1:0]       fs_i,
  input  logic                 bm_i,
  output logic                 s_o,
  output logic                 sn_o,
  output logic signed [KW-1:0] k_o,
  output logic [ES-1:0]        e_o,
  output logic [FW-1:0]        f_o,
  output logic [FSW-1:0]       fs_o,
  output logic                 bm_o
);

  int                   msb;
  logic signed [SCW-1:0] scale;
  logic signed [SCW-1:0] kk;
  logic [FW-1:0]        shifted_back;

  always_comb begin
    msb = 0;
    for (int i = 0; i < FW; i++)
      if (f_i[i]) msb = i;

    scale = (SCW'(k_i) <<< ES) + SCW'(e_i) + SCW'(msb) - SCW'(fs_i);
    kk    = scale >>> ES;
    if (kk > signed'(SCW'(PS)))       kk = signed'(SCW'(PS));
    else if (kk < -signed'(SCW'(PS))) kk = -signed'(SCW'(PS));

    s_o  = s_i;
    sn_o = sn_i;
    k_o  = KW'(kk);
    e_o  = scale[ES-1:0];
    fs_o = FSW'(2 * PS);
    bm_o = bm_i;
    shifted_back = '0;
    if (msb > 2 * int'(PS)) begin
      f_o          = f_i >> (msb - 2 * int'(PS));
      shifted_back = f_o << (msb - 2 * int'(PS));
      bm_o         = bm_i | (shifted_back != f_i);
    end else begin
      f_o = f_i << (2 * int'(PS) - msb);
    end

    if (!sn_i && f_i == '0) begin
      s_o  = 1'b0;
      sn_o = 1'b1;
      bm_o = 1'b0;
    end
  end

endmodule

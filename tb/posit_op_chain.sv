// posit_op_chain: test harness that wires two posit decoders, one of the
// arithmetic units (selected by op: 0 add, 1 subtract, 2 multiply,
// 3 divide, 4 square root of a), the normaliser and the encoder into a
// complete rounded posit operation r = a op b.  Combinational.
module posit_op_chain
  import posar_pkg::*;
#(
  parameter int unsigned PS = 32,
  parameter int unsigned ES = 3,
  localparam int unsigned KW  = k_width(PS),
  localparam int unsigned FW  = f_width(PS),
  localparam int unsigned FSW = fs_width(PS),
  localparam int unsigned CW  = $clog2(PS + 1)
) (
  input  logic [PS-1:0] a,
  input  logic [PS-1:0] b,
  input  logic [2:0]    op,
  output logic [PS-1:0] r
);
  logic                 as, asn, bs, bsn;
  logic signed [KW-1:0] ak, bk;
  logic [ES:0]          ae, be;
  logic [FW-1:0]        af, bf;
  logic [FSW-1:0]       afs, bfs;
  logic [CW-1:0]        ars, aers, brs, bers;

  posit_decoder #(.PS(PS), .ES(ES)) u_da (.bp(a), .s(as), .sn(asn), .k(ak), .rs(ars),
    .e(ae), .ers(aers), .f(af), .fs(afs));
  posit_decoder #(.PS(PS), .ES(ES)) u_db (.bp(b), .s(bs), .sn(bsn), .k(bk), .rs(brs),
    .e(be), .ers(bers), .f(bf), .fs(bfs));

  logic                 s [4], sn [4], bm [4];
  logic signed [KW-1:0] k [4];
  logic [ES:0]          e [4];
  logic [FW-1:0]        f [4];
  logic [FSW-1:0]       fs [4];

  posit_adder #(.PS(PS), .ES(ES)) u_add (.op(op[0]),
    .s1(as), .sn1(asn), .k1(ak), .e1(ae), .f1(af), .fs1(afs),
    .s2(bs), .sn2(bsn), .k2(bk), .e2(be), .f2(bf), .fs2(bfs),
    .s3(s[0]), .sn3(sn[0]), .k3(k[0]), .e3(e[0]), .f3(f[0]), .fs3(fs[0]), .bm3(bm[0]));
  posit_multiplier #(.PS(PS), .ES(ES)) u_mul (
    .s1(as), .sn1(asn), .k1(ak), .e1(ae), .f1(af), .fs1(afs),
    .s2(bs), .sn2(bsn), .k2(bk), .e2(be), .f2(bf), .fs2(bfs),
    .s3(s[1]), .sn3(sn[1]), .k3(k[1]), .e3(e[1]), .f3(f[1]), .fs3(fs[1]), .bm3(bm[1]));
  posit_divider #(.PS(PS), .ES(ES)) u_div (
    .s1(as), .sn1(asn), .k1(ak), .e1(ae), .f1(af), .fs1(afs),
    .s2(bs), .sn2(bsn), .k2(bk), .e2(be), .f2(bf), .fs2(bfs),
    .s3(s[2]), .sn3(sn[2]), .k3(k[2]), .e3(e[2]), .f3(f[2]), .fs3(fs[2]), .bm3(bm[2]));
  posit_sqrt #(.PS(PS), .ES(ES)) u_sqrt (
    .s1(as), .sn1(asn), .k1(ak), .e1(ae), .f1(af), .fs1(afs),
    .s2(s[3]), .sn2(sn[3]), .k2(k[3]), .e2(e[3]), .f2(f[3]), .fs2(fs[3]), .bm2(bm[3]));

  int unsigned sel;
  assign sel = (op <= 3'd1) ? 0 : int'(op) - 1;

  logic                 ns, nsn, nbm;
  logic signed [KW-1:0] nk;
  logic [ES-1:0]        ne;
  logic [FW-1:0]        nf;
  logic [FSW-1:0]       nfs;

  posit_normalize #(.PS(PS), .ES(ES)) u_norm (
    .s_i(s[sel]), .sn_i(sn[sel]), .k_i(k[sel]), .e_i(e[sel]), .f_i(f[sel]), .fs_i(fs[sel]),
    .bm_i(bm[sel]),
    .s_o(ns), .sn_o(nsn), .k_o(nk), .e_o(ne), .f_o(nf), .fs_o(nfs), .bm_o(nbm));
  posit_encoder #(.PS(PS), .ES(ES)) u_enc (
    .s(ns), .sn(nsn), .k(nk), .e(ne), .f(nf), .fs(nfs), .bm(nbm), .bp(r));
endmodule

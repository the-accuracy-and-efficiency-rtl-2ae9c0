// posar: posit arithmetic unit taking the place of the FPU of a RISC-V core.
//
// The unit executes every RISC-V single-precision (F) instruction on posits
// of PS bits with ES exponent bits (Posit(32,3) by default; Posit(8,1) and
// Posit(16,2) are the other sizes the design is meant for).  Programs keep
// using the F instructions unchanged; only the bit patterns in memory and in
// the registers are posits.
//
// Datapath: three decoders unpack rs1, rs2 and rs3; the adder, multiplier,
// divider and square-root units work on the unpacked fields; one normaliser
// and one encoder round the selected result.  Fused multiply-add
// (fmadd/fmsub/fnmsub/fnmadd) is done as a rounded product, re-decoded and
// fed to the adder together with rs3, so it rounds twice (no quire, which
// the paper leaves out; the two-step fused operation is this design's
// choice).  Sign injection, min/max, compares and fclass work directly on
// the bit patterns; integer conversions go through posit_int_converter.
//
// Interface and timing (this design's choice; the paper gives no latency):
// an instruction is presented with in_valid, its operation, register
// numbers, rounding mode and an integer operand (integer source register,
// or load data for flw).  Registers are read combinationally, the result
// is computed in the same cycle and at the next rising clock edge the
// posit result is written to rd, while integer results (compares, fclass,
// fcvt.w[u].s, fmv.x.w, store data for fsw) appear on out_int with
// out_valid and out_int_wr one cycle after the request.  One instruction
// can be accepted every cycle, and a dependent instruction may follow
// immediately.  The rounding mode is used only by posit-to-integer
// conversions; posit results always round to nearest, ties to even.
module posar
  import posar_pkg::*;
#(
  parameter int unsigned PS = 32,
  parameter int unsigned ES = 3,
  localparam int unsigned KW  = k_width(PS),
  localparam int unsigned FW  = f_width(PS),
  localparam int unsigned FSW = fs_width(PS),
  localparam int unsigned CW  = $clog2(PS + 1),
  localparam int unsigned AW  = $clog2(NFREGS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  posar_op_e       in_op,
  input  logic [2:0]      in_rm,
  input  logic [AW-1:0]   in_rd,
  input  logic [AW-1:0]   in_rs1,
  input  logic [AW-1:0]   in_rs2,
  input  logic [AW-1:0]   in_rs3,
  input  logic [XLEN-1:0] in_int,
  output logic            out_valid,
  output logic            out_int_wr,
  output logic [AW-1:0]   out_rd,
  output logic [XLEN-1:0] out_int
);

  // Register file
  logic [PS-1:0] ra, rb, rc;
  logic          rf_we;
  logic [PS-1:0] rf_wdata;

  posit_regfile #(.PS(PS), .NREGS(NFREGS)) u_rf (
    .clk(clk), .rst_n(rst_n),
    .raddr1(in_rs1), .raddr2(in_rs2), .raddr3(in_rs3),
    .rdata1(ra), .rdata2(rb), .rdata3(rc),
    .we(rf_we), .waddr(in_rd), .wdata(rf_wdata)
  );

  // Unpacked operand bundles: {s, sn, k, e, f, fs}
  logic                 as, asn, bs, bsn, cs, csn, ps_, psn;
  logic signed [KW-1:0] ak, bk, ck, pk;
  logic [ES:0]          ae, be, ce, pe;
  logic [FW-1:0]        af, bf, cf, pf;
  logic [FSW-1:0]       afs, bfs, cfs, pfs;
  logic [CW-1:0]        unused_rs [4];
  logic [CW-1:0]        unused_ers [4];

  posit_decoder #(.PS(PS), .ES(ES)) u_dec_a (.bp(ra), .s(as), .sn(asn), .k(ak),
    .rs(unused_rs[0]), .e(ae), .ers(unused_ers[0]), .f(af), .fs(afs));
  posit_decoder #(.PS(PS), .ES(ES)) u_dec_b (.bp(rb), .s(bs), .sn(bsn), .k(bk),
    .rs(unused_rs[1]), .e(be), .ers(unused_ers[1]), .f(bf), .fs(bfs));
  posit_decoder #(.PS(PS), .ES(ES)) u_dec_c (.bp(rc), .s(cs), .sn(csn), .k(ck),
    .rs(unused_rs[2]), .e(ce), .ers(unused_ers[2]), .f(cf), .fs(cfs));

  // Multiplier and its own rounding (used alone and for fused ops)
  logic                 ms, msn, mbm;
  logic signed [KW-1:0] mk;
  logic [ES:0]          me;
  logic [FW-1:0]        mf;
  logic [FSW-1:0]       mfs;
  logic                 mns, mnsn, mnbm;
  logic signed [KW-1:0] mnk;
  logic [ES-1:0]        mne;
  logic [FW-1:0]        mnf;
  logic [FSW-1:0]       mnfs;
  logic [PS-1:0]        prod_bp, prod_fma;

  posit_multiplier #(.PS(PS), .ES(ES)) u_mul (
    .s1(as), .sn1(asn), .k1(ak), .e1(ae), .f1(af), .fs1(afs),
    .s2(bs), .sn2(bsn), .k2(bk), .e2(be), .f2(bf), .fs2(bfs),
    .s3(ms), .sn3(msn), .k3(mk), .e3(me), .f3(mf), .fs3(mfs), .bm3(mbm));
  posit_normalize #(.PS(PS), .ES(ES)) u_norm_mul (
    .s_i(ms), .sn_i(msn), .k_i(mk), .e_i(me), .f_i(mf), .fs_i(mfs), .bm_i(mbm),
    .s_o(mns), .sn_o(mnsn), .k_o(mnk), .e_o(mne), .f_o(mnf), .fs_o(mnfs), .bm_o(mnbm));
  posit_encoder #(.PS(PS), .ES(ES)) u_enc_mul (
    .s(mns), .sn(mnsn), .k(mnk), .e(mne), .f(mnf), .fs(mnfs), .bm(mnbm), .bp(prod_bp));

  // Fused ops: fnmsub/fnmadd negate the product
  logic is_fma, neg_prod;
  assign is_fma   = in_op inside {OP_MADD, OP_MSUB, OP_NMSUB, OP_NMADD};
  assign neg_prod = in_op inside {OP_NMSUB, OP_NMADD};
  assign prod_fma = neg_prod ? (~prod_bp + 1'b1) : prod_bp;

  posit_decoder #(.PS(PS), .ES(ES)) u_dec_p (.bp(prod_fma), .s(ps_), .sn(psn), .k(pk),
    .rs(unused_rs[3]), .e(pe), .ers(unused_ers[3]), .f(pf), .fs(pfs));

  // Adder: rs1 +- rs2, or product +- rs3
  logic                 add_op;
  logic                 ss, ssn, sbm;
  logic signed [KW-1:0] sk;
  logic [ES:0]          se;
  logic [FW-1:0]        sf;
  logic [FSW-1:0]       sfs;

  assign add_op = in_op inside {OP_SUB, OP_MSUB, OP_NMADD};

  posit_adder #(.PS(PS), .ES(ES)) u_add (
    .op(add_op),
    .s1(is_fma ? ps_ : as), .sn1(is_fma ? psn : asn), .k1(is_fma ? pk : ak),
    .e1(is_fma ? pe : ae), .f1(is_fma ? pf : af), .fs1(is_fma ? pfs : afs),
    .s2(is_fma ? cs : bs), .sn2(is_fma ? csn : bsn), .k2(is_fma ? ck : bk),
    .e2(is_fma ? ce : be), .f2(is_fma ? cf : bf), .fs2(is_fma ? cfs : bfs),
    .s3(ss), .sn3(ssn), .k3(sk), .e3(se), .f3(sf), .fs3(sfs), .bm3(sbm));

  // Divider and square root
  logic                 ds, dsn, dbm, qs, qsn, qbm;
  logic signed [KW-1:0] dk, qk;
  logic [ES:0]          de, qe;
  logic [FW-1:0]        df, qf;
  logic [FSW-1:0]       dfs, qfs;

  posit_divider #(.PS(PS), .ES(ES)) u_div (
    .s1(as), .sn1(asn), .k1(ak), .e1(ae), .f1(af), .fs1(afs),
    .s2(bs), .sn2(bsn), .k2(bk), .e2(be), .f2(bf), .fs2(bfs),
    .s3(ds), .sn3(dsn), .k3(dk), .e3(de), .f3(df), .fs3(dfs), .bm3(dbm));
  posit_sqrt #(.PS(PS), .ES(ES)) u_sqrt (
    .s1(as), .sn1(asn), .k1(ak), .e1(ae), .f1(af), .fs1(afs),
    .s2(qs), .sn2(qsn), .k2(qk), .e2(qe), .f2(qf), .fs2(qfs), .bm2(qbm));

  // Integer conversions
  logic                 cvs, cvsn, cvbm;
  logic signed [KW-1:0] cvk;
  logic [ES:0]          cve;
  logic [FW-1:0]        cvf;
  logic [FSW-1:0]       cvfs;
  logic [XLEN-1:0]      cvt_int;

  posit_int_converter #(.PS(PS), .ES(ES)) u_cvt (
    .p_s(as), .p_sn(asn), .p_k(ak), .p_e(ae), .p_f(af), .p_fs(afs),
    .to_unsigned(in_op == OP_CVT_WU), .rtz(in_rm == RM_RTZ), .int_o(cvt_int),
    .int_i(in_int), .from_signed(in_op == OP_CVT_S_W),
    .u_s(cvs), .u_sn(cvsn), .u_k(cvk), .u_e(cve), .u_f(cvf), .u_fs(cvfs), .u_bm(cvbm));

  // Result selection, normalisation and rounding
  logic                 rs_s, rs_sn, rs_bm, ns, nsn, nbm;
  logic signed [KW-1:0] rs_k, nk;
  logic [ES:0]          rs_e;
  logic [ES-1:0]        ne;
  logic [FW-1:0]        rs_f, nf;
  logic [FSW-1:0]       rs_fs, nfs;
  logic [PS-1:0]        arith_bp;

  always_comb begin
    unique case (in_op)
      OP_MUL:  {rs_s, rs_sn, rs_k, rs_e, rs_f, rs_fs, rs_bm} = {ms, msn, mk, me, mf, mfs, mbm};
      OP_DIV:  {rs_s, rs_sn, rs_k, rs_e, rs_f, rs_fs, rs_bm} = {ds, dsn, dk, de, df, dfs, dbm};
      OP_SQRT: {rs_s, rs_sn, rs_k, rs_e, rs_f, rs_fs, rs_bm} = {qs, qsn, qk, qe, qf, qfs, qbm};
      OP_CVT_S_W, OP_CVT_S_WU:
               {rs_s, rs_sn, rs_k, rs_e, rs_f, rs_fs, rs_bm} = {cvs, cvsn, cvk, cve, cvf, cvfs, cvbm};
      default: {rs_s, rs_sn, rs_k, rs_e, rs_f, rs_fs, rs_bm} = {ss, ssn, sk, se, sf, sfs, sbm};
    endcase
  end

  posit_normalize #(.PS(PS), .ES(ES)) u_norm (
    .s_i(rs_s), .sn_i(rs_sn), .k_i(rs_k), .e_i(rs_e), .f_i(rs_f), .fs_i(rs_fs), .bm_i(rs_bm),
    .s_o(ns), .sn_o(nsn), .k_o(nk), .e_o(ne), .f_o(nf), .fs_o(nfs), .bm_o(nbm));
  posit_encoder #(.PS(PS), .ES(ES)) u_enc (
    .s(ns), .sn(nsn), .k(nk), .e(ne), .f(nf), .fs(nfs), .bm(nbm), .bp(arith_bp));

  // Bit-level operations
  logic [PS-1:0]   misc_bp;
  logic [XLEN-1:0] misc_int;

  posit_misc_ops #(.PS(PS)) u_misc (.op(in_op), .a(ra), .b(rb), .res(misc_bp), .res_int(misc_int));

  // Write-back
  logic [XLEN-1:0] int_res;

  always_comb begin
    rf_we    = in_valid && !op_writes_int(in_op);
    rf_wdata = arith_bp;
    int_res  = '0;
    unique case (in_op)
      OP_SGNJ, OP_SGNJN, OP_SGNJX, OP_MIN, OP_MAX: rf_wdata = misc_bp;
      OP_MV_W_X, OP_LOAD:                          rf_wdata = in_int[PS-1:0];
      OP_EQ, OP_LT, OP_LE, OP_CLASS:               int_res  = misc_int;
      OP_CVT_W, OP_CVT_WU:                         int_res  = cvt_int;
      OP_MV_X_W, OP_STORE:                         int_res  = XLEN'(ra);
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_int_wr <= 1'b0;
      out_rd     <= '0;
      out_int    <= '0;
    end else begin
      out_valid  <= in_valid;
      out_int_wr <= in_valid && op_writes_int(in_op);
      out_rd     <= in_rd;
      out_int    <= int_res;
    end
  end

  // Only defined operation codes may be issued.
  a_legal_op: assert property (@(posedge clk) disable iff (!rst_n)
                               in_valid |-> in_op <= OP_STORE)
    else $error("posar: undefined operation %0d", in_op);

endmodule

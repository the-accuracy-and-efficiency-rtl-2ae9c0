// tb_posit_int_converter: self-checking test of posit_int_converter.
//
// Posit -> integer: Posit(32,3) and Posit(16,2) operands (random, small
// integers and halves to hit rounding ties, huge values, 0, NaR) are
// converted to signed and unsigned 32-bit integers with round-to-nearest-
// even and with round-towards-zero.  Integer -> posit: random and edge
// integers go through the converter, posit_normalize and posit_encoder.
// Everything is compared with posit_ref_pkg.
module tb_posit_int_converter;
  import posit_ref_pkg::*;
  import posar_pkg::*;

  localparam int PS = 32, ES = 3;
  localparam int KW = k_width(PS), FW = f_width(PS), FSW = fs_width(PS);
  int checks = 0;
  int failures = 0;

  logic [PS-1:0]  p, enc;
  logic           ps_, psn, tou, rtz, froms;
  logic signed [KW-1:0] pk;
  logic [ES:0]    pe;
  logic [FW-1:0]  pf;
  logic [FSW-1:0] pfs;
  logic [$clog2(PS+1)-1:0] r0, r1;
  logic [31:0]    int_o, int_i;
  logic           us, usn, ubm, ns, nsn, nbm;
  logic signed [KW-1:0] uk, nk;
  logic [ES:0]    ue;
  logic [ES-1:0]  ne;
  logic [FW-1:0]  uf, nf;
  logic [FSW-1:0] ufs, nfs;

  posit_decoder #(.PS(PS), .ES(ES)) u_dec (.bp(p), .s(ps_), .sn(psn), .k(pk), .rs(r0), .e(pe),
    .ers(r1), .f(pf), .fs(pfs));
  posit_int_converter #(.PS(PS), .ES(ES)) dut (
    .p_s(ps_), .p_sn(psn), .p_k(pk), .p_e(pe), .p_f(pf), .p_fs(pfs),
    .to_unsigned(tou), .rtz(rtz), .int_o(int_o),
    .int_i(int_i), .from_signed(froms),
    .u_s(us), .u_sn(usn), .u_k(uk), .u_e(ue), .u_f(uf), .u_fs(ufs), .u_bm(ubm));
  posit_normalize #(.PS(PS), .ES(ES)) u_norm (
    .s_i(us), .sn_i(usn), .k_i(uk), .e_i(ue), .f_i(uf), .fs_i(ufs), .bm_i(ubm),
    .s_o(ns), .sn_o(nsn), .k_o(nk), .e_o(ne), .f_o(nf), .fs_o(nfs), .bm_o(nbm));
  posit_encoder #(.PS(PS), .ES(ES)) u_enc (.s(ns), .sn(nsn), .k(nk), .e(ne), .f(nf),
    .fs(nfs), .bm(nbm), .bp(enc));

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] exp;
    for (int n = 0; n < 20000; n++) begin
      case (n % 5)
        0: p = PS'(rand_posit(PS));
        1: p = PS'(ref_from_int($urandom_range(0, 2000) - 1000, 1'b1, PS, ES));
        2: p = PS'(ref_div(ref_from_int($urandom_range(0, 2000) - 1000, 1'b1, PS, ES),
                           ref_from_int(2, 1'b1, PS, ES), PS, ES));
        3: p = $urandom();
        default: p = (n % 2) ? 32'h0000_0000 : 32'h8000_0000;
      endcase
      tou = 1'($urandom());
      rtz = 1'($urandom());
      int_i = (n % 3 == 0) ? $urandom() : 32'($urandom_range(0, 200) - 100);
      if (n % 97 == 0) int_i = 32'h8000_0000;
      if (n % 89 == 0) int_i = 32'hFFFF_FFFF;
      froms = 1'($urandom());
      #1;
      exp = ref_to_int(64'(p), tou, rtz, PS, ES);
      checks++;
      if (int_o != exp) begin
        failures++;
        if (failures < 10) $display("FAIL to_int p=%h u=%0d rtz=%0d got=%h exp=%h",
                                    p, tou, rtz, int_o, exp);
      end
      checks++;
      if (64'(enc) != ref_from_int(int_i, froms, PS, ES)) begin
        failures++;
        if (failures < 10) $display("FAIL from_int x=%h signed=%0d got=%h exp=%h",
                                    int_i, froms, enc, ref_from_int(int_i, froms, PS, ES));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

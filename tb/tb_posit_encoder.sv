// tb_posit_encoder: self-checking test of posit_encoder.
//
// Drives the encoder directly with random normalised fields (sign, regime
// over and beyond the representable range, exponent, a 2*ps-bit fraction,
// sticky bit) and with 0/NaR, and compares the packed, rounded posit with
// the bit-string rounding of posit_ref_pkg.  Sizes Posit(8,1), Posit(16,2)
// and Posit(32,3).
module tb_posit_encoder;
  import posit_ref_pkg::*;
  import posar_pkg::*;

  int checks = 0;
  int failures = 0;

  `define ENC_INST(N, E) \
    logic s``N, sn``N, bm``N; \
    logic signed [k_width(N)-1:0] k``N; \
    logic [E-1:0] e``N; \
    logic [f_width(N)-1:0] f``N; \
    logic [fs_width(N)-1:0] fs``N; \
    logic [N-1:0] bp``N; \
    posit_encoder #(.PS(N), .ES(E)) u``N (.s(s``N), .sn(sn``N), .k(k``N), .e(e``N), \
      .f(f``N), .fs(fs``N), .bm(bm``N), .bp(bp``N));

  `ENC_INST(8, 1)
  `ENC_INST(16, 2)
  `ENC_INST(32, 3)

  // Random fields for one size; returns the expected posit.
  function automatic logic [63:0] pick(input int ps, input int es, output bit s, output bit sn,
                                       output int k, output int e, output big_t f,
                                       output int fs, output bit bm);
    int lo;
    s  = 1'($urandom());
    sn = ($urandom_range(0, 20) == 0);
    k  = $urandom_range(0, 2 * ps + 2) - (ps + 1);
    e  = $urandom_range(0, (1 << es) - 1);
    fs = (($urandom_range(0, 3) == 0) ? $urandom_range(0, 2 * ps) : 2 * ps);
    f  = big_t'({$urandom(), $urandom(), $urandom()}) & ((big_t'(1) << fs) - 1);
    f  = f | (big_t'(1) << fs);
    lo = $urandom_range(0, 3);
    if (lo == 0) f = f & ~((big_t'(1) << (fs / 2)) - 1);   // exact ties
    bm = ($urandom_range(0, 2) == 0);
    if (sn) return s ? nar_of(ps) : 64'd0;
    return ref_round(s, f, k * (1 << es) + e - fs, bm, ps, es);
  endfunction

  task automatic cmp(input logic [63:0] got, input logic [63:0] exp, input int ps);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL P%0d got=%h exp=%h", ps, got, exp);
    end
  endtask

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit s, sn, bm;
    int k, e, fs;
    big_t f;
    logic [63:0] x8, x16, x32;
    for (int n = 0; n < 20000; n++) begin
      x8 = pick(8, 1, s, sn, k, e, f, fs, bm);
      s8 = s; sn8 = sn; k8 = k_width(8)'(k); e8 = 1'(e); f8 = f_width(8)'(f);
      fs8 = fs_width(8)'(fs); bm8 = bm;
      x16 = pick(16, 2, s, sn, k, e, f, fs, bm);
      s16 = s; sn16 = sn; k16 = k_width(16)'(k); e16 = 2'(e); f16 = f_width(16)'(f);
      fs16 = fs_width(16)'(fs); bm16 = bm;
      x32 = pick(32, 3, s, sn, k, e, f, fs, bm);
      s32 = s; sn32 = sn; k32 = k_width(32)'(k); e32 = 3'(e); f32 = f_width(32)'(f);
      fs32 = fs_width(32)'(fs); bm32 = bm;
      #1;
      cmp(64'(bp8), x8, 8);
      cmp(64'(bp16), x16, 16);
      cmp(64'(bp32), x32, 32);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

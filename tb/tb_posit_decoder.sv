// tb_posit_decoder: self-checking test of posit_decoder.
//
// Decodes every Posit(8,1) and Posit(16,2) pattern and random Posit(32,3)
// patterns, and compares s, sn, the scale k*2^es+e, k, e, rs, ers, f and fs
// with the bit-walking decoder of posit_ref_pkg.  The five Posit(8,1)
// examples of the paper's example table are checked by value.
module tb_posit_decoder;
  import posit_ref_pkg::*;
  import posar_pkg::*;

  int checks = 0;
  int failures = 0;

  logic [7:0]  p8;
  logic [15:0] p16;
  logic [31:0] p32;

  logic s8, sn8, s16, sn16, s32, sn32;
  logic signed [k_width(8)-1:0]  k8;
  logic signed [k_width(16)-1:0] k16;
  logic signed [k_width(32)-1:0] k32;
  logic [1:0] e8;  logic [2:0] e16;  logic [3:0] e32;
  logic [$clog2(9)-1:0]  rs8, ers8;
  logic [$clog2(17)-1:0] rs16, ers16;
  logic [$clog2(33)-1:0] rs32, ers32;
  logic [f_width(8)-1:0]  f8;
  logic [f_width(16)-1:0] f16;
  logic [f_width(32)-1:0] f32;
  logic [fs_width(8)-1:0]  fs8;
  logic [fs_width(16)-1:0] fs16;
  logic [fs_width(32)-1:0] fs32;

  posit_decoder #(.PS(8),  .ES(1)) u8  (.bp(p8),  .s(s8),  .sn(sn8),  .k(k8),  .rs(rs8),
    .e(e8),  .ers(ers8),  .f(f8),  .fs(fs8));
  posit_decoder #(.PS(16), .ES(2)) u16 (.bp(p16), .s(s16), .sn(sn16), .k(k16), .rs(rs16),
    .e(e16), .ers(ers16), .f(f16), .fs(fs16));
  posit_decoder #(.PS(32), .ES(3)) u32 (.bp(p32), .s(s32), .sn(sn32), .k(k32), .rs(rs32),
    .e(e32), .ers(ers32), .f(f32), .fs(fs32));

  task automatic cmp(input logic [63:0] p, input int ps, input int es,
                     input bit s, input bit sn, input int k, input int e, input int rs,
                     input int ers, input longint unsigned f, input int fs);
    bit z, n, neg;
    int sc, fb, rk, re, rrs, rers;
    longint unsigned sig;
    ref_decode(p, ps, es, z, n, neg, sc, sig, fb);
    checks++;
    if (sn != (z || n) || s != p[ps-1]) begin
      failures++;
      $display("FAIL P%0d %h special s=%0d sn=%0d", ps, p, s, sn);
      return;
    end
    if (z || n) return;
    rk   = sc >>> es;
    re   = sc - rk * (1 << es);
    rrs  = (rk >= 0) ? rk + 2 : -rk + 1;
    rers = ps - rrs - 1;
    if (rers > es) rers = es;
    if (rers < 0) rers = 0;
    checks++;
    if (k != rk || e != re || f != sig || fs != fb || rs != rrs || ers != rers) begin
      failures++;
      if (failures < 10)
        $display("FAIL P%0d %h: k=%0d/%0d e=%0d/%0d f=%h/%h fs=%0d/%0d rs=%0d/%0d ers=%0d/%0d",
                 ps, p, k, rk, e, re, f, sig, fs, fb, rs, rrs, ers, rers);
    end
  endtask

  task automatic value_check(input logic [7:0] p, input real v);
    real got;
    p8 = p;
    #1;
    got = real'(f8);
    for (int i = 0; i < int'(fs8); i++) got = got / 2.0;
    for (int i = 0; i < int'(k8) * 2 + int'(e8); i++) got = got * 2.0;
    for (int i = 0; i < -(int'(k8) * 2 + int'(e8)); i++) got = got / 2.0;
    if (s8) got = -got;
    if (sn8) got = 0.0;
    checks++;
    if (got != v) begin
      failures++;
      $display("FAIL table value %h: got %f expected %f", p, got, v);
    end
  endtask

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) begin
      p8 = 8'(i);
      #1 cmp(64'(p8), 8, 1, s8, sn8, int'(k8), int'(e8), int'(rs8), int'(ers8), 64'(f8), int'(fs8));
    end
    for (int i = 0; i < 65536; i++) begin
      p16 = 16'(i);
      #1 cmp(64'(p16), 16, 2, s16, sn16, int'(k16), int'(e16), int'(rs16), int'(ers16),
             64'(f16), int'(fs16));
    end
    for (int i = 0; i < 20000; i++) begin
      p32 = (i < 64) ? (32'h1 << (i % 32)) ^ ((i >= 32) ? 32'hFFFF_FFFF : 0) : $urandom();
      #1 cmp(64'(p32), 32, 3, s32, sn32, int'(k32), int'(e32), int'(rs32), int'(ers32),
             64'(f32), int'(fs32));
    end
    // Examples of 8-bit posits with 1-bit exponent (0 and NaR give sn = 1).
    p8 = 8'h00; #1 checks++; if (!(sn8 && !s8)) failures++;
    p8 = 8'h80; #1 checks++; if (!(sn8 && s8))  failures++;
    value_check(8'b0_10_0_0000, 1.0);
    value_check(8'b1_01_1_0000, -2.0);
    value_check(8'b0_10_1_1001, 3.125);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

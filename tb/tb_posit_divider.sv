// tb_posit_divider: self-checking test of the posit divider.
//
// The unit is exercised through posit_op_chain (decode, unit, normalise,
// encode) at three sizes: Posit(8,1) over all operand pairs, Posit(16,2)
// and Posit(32,3) on random operands biased towards long fractions plus
// 0 and NaR.  Every result is compared bit for bit with the exact,
// independently rounded result of posit_ref_pkg.
module tb_posit_divider;
  import posit_ref_pkg::*;

  localparam int OPS [1] = '{3};
  int checks = 0;
  int failures = 0;
  logic [2:0]  op;
  logic [7:0]  a8, b8, r8;
  logic [15:0] a16, b16, r16;
  logic [31:0] a32, b32, r32;

  posit_op_chain #(.PS(8),  .ES(1)) u8  (.a(a8),  .b(b8),  .op(op), .r(r8));
  posit_op_chain #(.PS(16), .ES(2)) u16 (.a(a16), .b(b16), .op(op), .r(r16));
  posit_op_chain #(.PS(32), .ES(3)) u32 (.a(a32), .b(b32), .op(op), .r(r32));

  function automatic logic [63:0] expect_of(input logic [63:0] a, input logic [63:0] b,
                                            input int o, input int ps, input int es);
    case (o)
      0: return ref_add(a, b, 1'b0, ps, es);
      1: return ref_add(a, b, 1'b1, ps, es);
      2: return ref_mul(a, b, ps, es);
      3: return ref_div(a, b, ps, es);
      default: return ref_sqrt(a, ps, es);
    endcase
  endfunction

  task automatic check(input logic [63:0] got, input logic [63:0] exp, input int ps,
                       input logic [63:0] a, input logic [63:0] b);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10)
        $display("FAIL P%0d op%0d a=%h b=%h got=%h exp=%h", ps, op, a, b, got, exp);
    end
  endtask

  initial begin : watchdog
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (OPS[oi]) begin
      op = 3'(OPS[oi]);
      for (int i = 0; i < 256; i++) begin
        for (int j = 0; j < (op == 4 ? 1 : 256); j++) begin
          a8 = 8'(i); b8 = 8'(j);
          #1 check(64'(r8), expect_of(64'(a8), 64'(b8), op, 8, 1), 8, 64'(a8), 64'(b8));
        end
      end
      for (int n = 0; n < 4000; n++) begin
        a16 = 16'(rand_posit(16)); b16 = 16'(rand_posit(16));
        a32 = 32'(rand_posit(32)); b32 = 32'(rand_posit(32));
        #1;
        check(64'(r16), expect_of(64'(a16), 64'(b16), op, 16, 2), 16, 64'(a16), 64'(b16));
        check(64'(r32), expect_of(64'(a32), 64'(b32), op, 32, 3), 32, 64'(a32), 64'(b32));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

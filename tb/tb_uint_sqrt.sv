// tb_uint_sqrt: self-checking test of uint_sqrt.
//
// A 16-bit instance is checked on every input and a 66-bit instance (the
// size used by posit_sqrt for Posit(32,3)) on random inputs and on perfect
// squares and their neighbours.  The root q must satisfy
// q*q <= d < (q+1)*(q+1) and the remainder must equal d - q*q.
module tb_uint_sqrt;
  int checks = 0;
  int failures = 0;

  logic [15:0] d16;
  logic [7:0]  q16;
  logic [8:0]  r16;
  logic [65:0] d66;
  logic [32:0] q66;
  logic [33:0] r66;

  uint_sqrt #(.DW(16)) u16 (.d(d16), .q(q16), .r(r16));
  uint_sqrt #(.DW(66)) u66 (.d(d66), .q(q66), .r(r66));

  task automatic cmp(input logic [127:0] d, input logic [127:0] q, input logic [127:0] r);
    checks++;
    if (!(q * q <= d && (q + 1) * (q + 1) > d && r == d - q * q)) begin
      failures++;
      if (failures < 10) $display("FAIL d=%0d q=%0d r=%0d", d, q, r);
    end
  endtask

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [32:0] x;
    for (int i = 0; i < 65536; i++) begin
      d16 = 16'(i);
      #1 cmp(128'(d16), 128'(q16), 128'(r16));
    end
    for (int n = 0; n < 20000; n++) begin
      x = {1'($urandom()), $urandom()};
      case (n % 4)
        0: d66 = {2'($urandom()), $urandom(), $urandom()};
        1: d66 = 66'(x) * 66'(x);
        2: d66 = 66'(x) * 66'(x) - 66'd1;
        default: d66 = 66'(x) * 66'(x) + 66'(2 * x);
      endcase
      #1 cmp(128'(d66), 128'(q66), 128'(r66));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

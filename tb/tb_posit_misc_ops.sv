// tb_posit_misc_ops: self-checking test of posit_misc_ops.
//
// Random Posit(32,3) pairs (with 0, NaR and equal operands mixed in) go
// through every non-rounding operation.  Expected results are derived from
// the real values of the operands (posit_ref_pkg): sign injection must give
// +-|a| with the requested sign, min/max and the compares must follow real
// ordering with NaR below every real, and fclass must name the right class.
module tb_posit_misc_ops;
  import posit_ref_pkg::*;
  import posar_pkg::*;

  localparam int PS = 32, ES = 3;
  int checks = 0;
  int failures = 0;

  posar_op_e     op;
  logic [PS-1:0] a, b, res;
  logic [31:0]   res_int;

  posit_misc_ops #(.PS(PS)) dut (.op(op), .a(a), .b(b), .res(res), .res_int(res_int));

  localparam posar_op_e OPS [11] = '{OP_SGNJ, OP_SGNJN, OP_SGNJX, OP_MIN, OP_MAX,
                                     OP_EQ, OP_LT, OP_LE, OP_CLASS, OP_SGNJ, OP_EQ};

  function automatic real key(input logic [PS-1:0] x);   // NaR sorts lowest
    if (x == PS'(nar_of(PS))) return -1.0e300;
    return ref_to_real(64'(x), PS, ES);
  endfunction

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ra, rb, mag, want;
    bit ok, neg;
    logic [31:0] cls;
    for (int n = 0; n < 30000; n++) begin
      a  = PS'(rand_posit(PS));
      b  = (n % 5 == 0) ? a : PS'(rand_posit(PS));
      op = OPS[n % 11];
      #1;
      ra  = key(a);
      rb  = key(b);
      mag = (ra < 0) ? -ra : ra;
      ok  = 1'b1;
      case (op)
        OP_SGNJ, OP_SGNJN, OP_SGNJX: begin
          neg = (op == OP_SGNJ) ? b[PS-1] : (op == OP_SGNJN) ? !b[PS-1] : (a[PS-1] ^ b[PS-1]);
          if (a == PS'(nar_of(PS))) ok = (res == a);
          else begin
            want = neg ? -mag : mag;
            ok = (ref_to_real(64'(res), PS, ES) == want) && (res != PS'(nar_of(PS)));
          end
        end
        OP_MIN: ok = key(res) == ((ra < rb) ? ra : rb);
        OP_MAX: ok = key(res) == ((ra > rb) ? ra : rb);
        OP_EQ:  ok = res_int == 32'(ra == rb);
        OP_LT:  ok = res_int == 32'(ra < rb);
        OP_LE:  ok = res_int == 32'(ra <= rb);
        OP_CLASS: begin
          cls = (a == PS'(nar_of(PS))) ? 32'h200 : (ra == 0.0) ? 32'h10 :
                (ra < 0.0) ? 32'h2 : 32'h40;
          ok = res_int == cls;
        end
        default: ok = 1'b0;
      endcase
      checks++;
      if (!ok) begin
        failures++;
        if (failures < 10) $display("FAIL op=%s a=%h b=%h res=%h res_int=%h",
                                    op.name(), a, b, res, res_int);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_posar: end-to-end test of the posit arithmetic unit at its default
// size, Posit(32,3).
//
// The testbench acts as the host core: it loads random posits into the
// register file (flw), issues random F-extension instructions back to back
// and reads every posit result back with fsw in the very next cycle, so
// dependent instructions follow each other without gaps.  A shadow
// register file and posit_ref_pkg give the expected value of every result;
// fused multiply-adds are expected to round the product first.  Integer
// results (compares, fclass, conversions, fmv.x.w, fsw data) are checked
// one cycle after issue, which is also the latency check.  Directed
// instructions make sure that each mechanism of the unit occurs: NaR and
// zero operands, division by zero, square root of a negative number,
// saturation to maxpos/minpos, rounding up, operand swap in the adder,
// exact cancellation and integer/posit conversion; each is counted and a
// mechanism that never occurred counts as a failure.
module tb_posar;
  import posar_pkg::*;
  import posit_ref_pkg::*;

  localparam int PS = 32, ES = 3;

  int checks = 0;
  int failures = 0;

  logic            clk = 1'b0, rst_n = 1'b0;
  logic            in_valid;
  posar_op_e       in_op;
  logic [2:0]      in_rm;
  logic [4:0]      in_rd, in_rs1, in_rs2, in_rs3;
  logic [31:0]     in_int;
  logic            out_valid, out_int_wr;
  logic [4:0]      out_rd;
  logic [31:0]     out_int;

  posar dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_op(in_op), .in_rm(in_rm),
    .in_rd(in_rd), .in_rs1(in_rs1), .in_rs2(in_rs2), .in_rs3(in_rs3), .in_int(in_int),
    .out_valid(out_valid), .out_int_wr(out_int_wr), .out_rd(out_rd), .out_int(out_int));

  always #5 clk = ~clk;

  logic [PS-1:0] shadow [32];

  // Mechanism counters
  int n_nar_in, n_zero_in, n_div0, n_sqrt_neg, n_sat_max, n_sat_min, n_round_up, n_swap,
      n_cancel, n_fma, n_cvt, n_cmp;

  always @(posedge clk) if (rst_n && in_valid) begin
    if (!dut.u_enc.sn && dut.u_enc.k >= PS - 2)    n_sat_max++;
    if (!dut.u_enc.sn && dut.u_enc.k < -(PS - 2))  n_sat_min++;
    if (dut.u_enc.add_one)                          n_round_up++;
    if (in_op inside {OP_ADD, OP_SUB} && !dut.u_add.sn1 && !dut.u_add.sn2 && dut.u_add.swap)
      n_swap++;
    if (in_op inside {OP_ADD, OP_SUB} && !dut.u_add.sn1 && !dut.u_add.sn2 && dut.u_add.f3 == '0)
      n_cancel++;
  end

  // Expected posit result of an instruction (posit destination only).
  function automatic logic [PS-1:0] expect_p(input posar_op_e op, input logic [PS-1:0] a,
                                             input logic [PS-1:0] b, input logic [PS-1:0] c,
                                             input logic [31:0] x);
    logic [63:0] p;
    case (op)
      OP_ADD:   return PS'(ref_add(a, b, 1'b0, PS, ES));
      OP_SUB:   return PS'(ref_add(a, b, 1'b1, PS, ES));
      OP_MUL:   return PS'(ref_mul(a, b, PS, ES));
      OP_DIV:   return PS'(ref_div(a, b, PS, ES));
      OP_SQRT:  return PS'(ref_sqrt(a, PS, ES));
      OP_MADD:  return PS'(ref_add(ref_mul(a, b, PS, ES), c, 1'b0, PS, ES));
      OP_MSUB:  return PS'(ref_add(ref_mul(a, b, PS, ES), c, 1'b1, PS, ES));
      OP_NMSUB: return PS'(ref_add(pneg(ref_mul(a, b, PS, ES), PS), c, 1'b0, PS, ES));
      OP_NMADD: return PS'(ref_add(pneg(ref_mul(a, b, PS, ES), PS), c, 1'b1, PS, ES));
      OP_SGNJ:  begin p = a[PS-1] ? pneg(a, PS) : a; return PS'(b[PS-1] ? pneg(p, PS) : p); end
      OP_SGNJN: begin p = a[PS-1] ? pneg(a, PS) : a; return PS'(!b[PS-1] ? pneg(p, PS) : p); end
      OP_SGNJX: begin p = a[PS-1] ? pneg(a, PS) : a;
                      return PS'((a[PS-1] ^ b[PS-1]) ? pneg(p, PS) : p); end
      OP_MIN:   return (signed'(a) < signed'(b)) ? a : b;
      OP_MAX:   return (signed'(a) < signed'(b)) ? b : a;
      OP_CVT_S_W:  return PS'(ref_from_int(x, 1'b1, PS, ES));
      OP_CVT_S_WU: return PS'(ref_from_int(x, 1'b0, PS, ES));
      default:  return x[PS-1:0];                              // fmv.w.x, flw
    endcase
  endfunction

  function automatic logic [31:0] expect_i(input posar_op_e op, input logic [2:0] rm,
                                           input logic [PS-1:0] a, input logic [PS-1:0] b);
    case (op)
      OP_EQ:     return 32'(a == b);
      OP_LT:     return 32'(signed'(a) < signed'(b));
      OP_LE:     return 32'(signed'(a) <= signed'(b));
      OP_CLASS:  return (a == PS'(nar_of(PS))) ? 32'h200 : (a == 0) ? 32'h10 :
                        a[PS-1] ? 32'h2 : 32'h40;
      OP_CVT_W:  return ref_to_int(a, 1'b0, rm == RM_RTZ, PS, ES);
      OP_CVT_WU: return ref_to_int(a, 1'b1, rm == RM_RTZ, PS, ES);
      default:   return 32'(a);                                // fmv.x.w, fsw
    endcase
  endfunction

  // Issue one instruction; returns after the clock edge that executes it.
  // Integer results are compared one cycle later, in the next issue.
  bit          pend_int;
  logic [31:0] pend_val;
  int          pend_cycle, cycle;

  always @(posedge clk) cycle++;

  task automatic issue(input posar_op_e op, input logic [4:0] rd, input logic [4:0] rs1,
                       input logic [4:0] rs2, input logic [4:0] rs3, input logic [2:0] rm,
                       input logic [31:0] x);
    logic [PS-1:0] a, b, c;
    @(negedge clk);
    if (pend_int) begin
      checks++;
      if (!(out_valid && out_int_wr && out_int == pend_val && cycle == pend_cycle + 1)) begin
        failures++;
        if (failures < 10) $display("FAIL int result got=%h exp=%h valid=%0d", out_int,
                                    pend_val, out_valid);
      end
    end
    a = shadow[rs1]; b = shadow[rs2]; c = shadow[rs3];
    in_valid = 1'b1; in_op = op; in_rd = rd; in_rs1 = rs1; in_rs2 = rs2; in_rs3 = rs3;
    in_rm = rm; in_int = x;
    if (a == PS'(nar_of(PS)) || (!(op inside {OP_SQRT, OP_CLASS, OP_CVT_W, OP_CVT_WU, OP_LOAD,
        OP_STORE, OP_MV_X_W, OP_MV_W_X, OP_CVT_S_W, OP_CVT_S_WU}) && b == PS'(nar_of(PS))))
      n_nar_in++;
    if (op inside {OP_ADD, OP_SUB, OP_MUL, OP_DIV} && (a == 0 || b == 0)) n_zero_in++;
    if (op == OP_DIV && b == 0) n_div0++;
    if (op == OP_SQRT && a[PS-1] && a != PS'(nar_of(PS))) n_sqrt_neg++;
    if (op inside {OP_MADD, OP_MSUB, OP_NMSUB, OP_NMADD}) n_fma++;
    if (op inside {OP_CVT_W, OP_CVT_WU, OP_CVT_S_W, OP_CVT_S_WU}) n_cvt++;
    if (op inside {OP_EQ, OP_LT, OP_LE, OP_MIN, OP_MAX}) n_cmp++;
    pend_int = op_writes_int(op);
    if (pend_int) pend_val = expect_i(op, rm, a, b);
    else shadow[rd] = expect_p(op, a, b, c, x);
    pend_cycle = cycle;
    @(posedge clk);
  endtask

  task automatic check_reg(input logic [4:0] r);
    issue(OP_STORE, 5'd0, r, 5'd0, 5'd0, 3'd0, 32'd0);
  endtask

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam posar_op_e RAND_OPS [26] = '{OP_ADD, OP_SUB, OP_MUL, OP_DIV, OP_SQRT, OP_MADD,
    OP_MSUB, OP_NMSUB, OP_NMADD, OP_SGNJ, OP_SGNJN, OP_SGNJX, OP_MIN, OP_MAX, OP_EQ, OP_LT,
    OP_LE, OP_CLASS, OP_CVT_W, OP_CVT_WU, OP_CVT_S_W, OP_CVT_S_WU, OP_MV_X_W, OP_MV_W_X,
    OP_ADD, OP_MUL};

  initial begin
    posar_op_e op;
    logic [4:0] rd;
    in_valid = 1'b0; in_op = OP_ADD; in_rm = '0; in_rd = '0; in_rs1 = '0; in_rs2 = '0;
    in_rs3 = '0; in_int = '0;
    pend_int = 1'b0;
    cycle = 0;
    for (int i = 0; i < 32; i++) shadow[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // Directed: special values and extremes in r1..r7
    issue(OP_LOAD, 5'd1, 0, 0, 0, 0, 32'h8000_0000);       // NaR
    issue(OP_LOAD, 5'd2, 0, 0, 0, 0, 32'h0000_0000);       // 0
    issue(OP_LOAD, 5'd3, 0, 0, 0, 0, 32'h7FFF_FFFF);       // maxpos
    issue(OP_LOAD, 5'd4, 0, 0, 0, 0, 32'h0000_0001);       // minpos
    issue(OP_LOAD, 5'd5, 0, 0, 0, 0, 32'h4000_0000);       // 1.0
    issue(OP_LOAD, 5'd6, 0, 0, 0, 0, 32'hC000_0000);       // -1.0
    issue(OP_LOAD, 5'd7, 0, 0, 0, 0, 32'h4800_0000);       // 2.0
    issue(OP_MUL,  5'd8, 3, 3, 0, 0, 0); check_reg(8);     // saturate to maxpos
    issue(OP_MUL,  5'd8, 4, 4, 0, 0, 0); check_reg(8);     // saturate to minpos
    issue(OP_DIV,  5'd8, 5, 2, 0, 0, 0); check_reg(8);     // 1/0 = NaR
    issue(OP_SQRT, 5'd8, 6, 0, 0, 0, 0); check_reg(8);     // sqrt(-1) = NaR
    issue(OP_ADD,  5'd8, 1, 5, 0, 0, 0); check_reg(8);     // NaR + 1
    issue(OP_SUB,  5'd8, 7, 7, 0, 0, 0); check_reg(8);     // exact cancellation
    issue(OP_ADD,  5'd8, 5, 7, 0, 0, 0); check_reg(8);     // 1 + 2: swap
    issue(OP_ADD,  5'd8, 2, 5, 0, 0, 0); check_reg(8);     // 0 + 1
    issue(OP_CVT_S_W, 5'd9, 0, 0, 0, 0, 32'd12345); check_reg(9);
    issue(OP_CVT_W, 5'd0, 9, 0, 0, 3'b001, 0);
    issue(OP_DIV,  5'd10, 5, 9, 0, 0, 0); check_reg(10);   // 1/12345, rounded
    // Random instruction stream over registers r8..r31
    for (int i = 8; i < 32; i++)
      issue(OP_LOAD, 5'(i), 0, 0, 0, 0, 32'(rand_posit(PS)));
    for (int n = 0; n < 20000; n++) begin
      op = RAND_OPS[$urandom_range(0, 25)];
      rd = 5'($urandom_range(8, 31));
      issue(op, rd, 5'($urandom_range(1, 31)), 5'($urandom_range(1, 31)),
            5'($urandom_range(1, 31)), 3'($urandom_range(0, 1)),
            (n % 2) ? $urandom() : 32'($urandom_range(0, 2000) - 1000));
      if (!op_writes_int(op)) check_reg(rd);
      if (n % 3 == 0)    // keep the register values varied
        issue(OP_LOAD, 5'($urandom_range(8, 31)), 0, 0, 0, 0, 32'(rand_posit(PS)));
    end
    issue(OP_STORE, 5'd0, 5, 0, 0, 0, 0);
    @(negedge clk);
    checks++;
    if (!(out_valid && out_int == pend_val)) failures++;
    $display("mechanisms: nar_in=%0d zero_in=%0d div0=%0d sqrt_neg=%0d sat_max=%0d sat_min=%0d",
             n_nar_in, n_zero_in, n_div0, n_sqrt_neg, n_sat_max, n_sat_min);
    $display("mechanisms: round_up=%0d swap=%0d cancel=%0d fma=%0d cvt=%0d cmp=%0d",
             n_round_up, n_swap, n_cancel, n_fma, n_cvt, n_cmp);
    for (int i = 0; i < 12; i++) begin
      int v;
      case (i)
        0: v = n_nar_in;  1: v = n_zero_in; 2: v = n_div0;     3: v = n_sqrt_neg;
        4: v = n_sat_max; 5: v = n_sat_min; 6: v = n_round_up; 7: v = n_swap;
        8: v = n_cancel;  9: v = n_fma;     10: v = n_cvt;     default: v = n_cmp;
      endcase
      checks++;
      if (v == 0) begin
        failures++;
        $display("FAIL mechanism %0d never occurred", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
